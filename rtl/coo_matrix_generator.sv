// coo_matrix_generator: turns one gate instruction into the gate's matrix in
// COO form, the list of its non-zero (row, col, value) tuples.
//
// The contents follow Table I of the paper (11 sparse one-qubit gates, the
// controlled two-qubit gates and the dense H, SX, RX, RY), with the identity
// added because the paper pads groups with it. For two-qubit gates the more
// significant qubit is the control (rows 2 and 3 are the controlled half). The
// instruction carries pa and pb, the cosine and sine the host already computed:
// cos/sin(lambda) for P and CP, cos/sin(theta/2) for RZ, RX, RY, CRZ, CRX, CRY.
//
// Where a table cell disagrees with the gate's standard matrix this module uses
// the standard matrix: P has its 1 at (0,0), not (0,1); TDG has (q, -q) at
// (1,1); CY has -i at (2,3) and +i at (3,2).
//
// msize is log2 of the matrix size (1 for 2x2, 2 for 4x4), the form the complex
// ALU's shifters take. Purely combinational.
module coo_matrix_generator
  import qea_pkg::*;
(
  input  instr_t                  instr,
  output coo_t [MAX_NNZ-1:0]      entries,
  output logic [2:0]              nnz,
  output logic [1:0]              msize
);

  function automatic coo_t t(int unsigned r, int unsigned c, fx_t re, fx_t im);
    coo_t x;
    x.row    = IDX_W'(r);
    x.col    = IDX_W'(c);
    x.val.re = re;
    x.val.im = im;
    return x;
  endfunction

  fx_t a, b, q, p;
  assign a = instr.pa;
  assign b = instr.pb;
  assign q = FX_RSQ2;
  assign p = FX_HALF;

  always_comb begin
    entries = '0;
    nnz     = 3'd2;
    msize   = 2'd1;
    unique case (instr.gate)
      G_I:   begin entries[0] = t(0,0,FX_ONE,0);  entries[1] = t(1,1,FX_ONE,0); end
      G_P:   begin entries[0] = t(0,0,FX_ONE,0);  entries[1] = t(1,1,a,b); end
      G_X:   begin entries[0] = t(0,1,FX_ONE,0);  entries[1] = t(1,0,FX_ONE,0); end
      G_Y:   begin entries[0] = t(0,1,0,FX_NONE); entries[1] = t(1,0,0,FX_ONE); end
      G_Z:   begin entries[0] = t(0,0,FX_ONE,0);  entries[1] = t(1,1,FX_NONE,0); end
      G_S:   begin entries[0] = t(0,0,FX_ONE,0);  entries[1] = t(1,1,0,FX_ONE); end
      G_SDG: begin entries[0] = t(0,0,FX_ONE,0);  entries[1] = t(1,1,0,FX_NONE); end
      G_T:   begin entries[0] = t(0,0,FX_ONE,0);  entries[1] = t(1,1,q,q); end
      G_TDG: begin entries[0] = t(0,0,FX_ONE,0);  entries[1] = t(1,1,q,-q); end
      G_RZ:  begin entries[0] = t(0,0,a,-b);      entries[1] = t(1,1,a,b); end
      G_H: begin
        nnz = 3'd4;
        entries[0] = t(0,0,q,0);  entries[1] = t(0,1,q,0);
        entries[2] = t(1,0,q,0);  entries[3] = t(1,1,-q,0);
      end
      G_SX: begin
        nnz = 3'd4;
        entries[0] = t(0,0,p,p);  entries[1] = t(0,1,p,-p);
        entries[2] = t(1,0,p,-p); entries[3] = t(1,1,p,p);
      end
      G_RX: begin
        nnz = 3'd4;
        entries[0] = t(0,0,a,0);  entries[1] = t(0,1,0,-b);
        entries[2] = t(1,0,0,-b); entries[3] = t(1,1,a,0);
      end
      G_RY: begin
        nnz = 3'd4;
        entries[0] = t(0,0,a,0);  entries[1] = t(0,1,-b,0);
        entries[2] = t(1,0,b,0);  entries[3] = t(1,1,a,0);
      end
      G_CX, G_CY, G_CZ, G_CP, G_CRZ: begin
        nnz = 3'd4;
        msize = 2'd2;
        entries[0] = t(0,0,FX_ONE,0);
        entries[1] = t(1,1,FX_ONE,0);
        unique case (instr.gate)
          G_CX:  begin entries[2] = t(2,3,FX_ONE,0);  entries[3] = t(3,2,FX_ONE,0); end
          G_CY:  begin entries[2] = t(2,3,0,FX_NONE); entries[3] = t(3,2,0,FX_ONE); end
          G_CZ:  begin entries[2] = t(2,2,FX_ONE,0);  entries[3] = t(3,3,FX_NONE,0); end
          G_CP:  begin entries[2] = t(2,2,FX_ONE,0);  entries[3] = t(3,3,a,b); end
          default: begin entries[2] = t(2,2,a,-b);    entries[3] = t(3,3,a,b); end // CRZ
        endcase
      end
      G_CRX, G_CRY, G_CH: begin
        nnz = 3'd6;
        msize = 2'd2;
        entries[0] = t(0,0,FX_ONE,0);
        entries[1] = t(1,1,FX_ONE,0);
        unique case (instr.gate)
          G_CRX: begin
            entries[2] = t(2,2,a,0);  entries[3] = t(2,3,0,-b);
            entries[4] = t(3,2,0,-b); entries[5] = t(3,3,a,0);
          end
          G_CRY: begin
            entries[2] = t(2,2,a,0);  entries[3] = t(2,3,-b,0);
            entries[4] = t(3,2,b,0);  entries[5] = t(3,3,a,0);
          end
          default: begin // CH
            entries[2] = t(2,2,q,0);  entries[3] = t(2,3,q,0);
            entries[4] = t(3,2,q,0);  entries[5] = t(3,3,-q,0);
          end
        endcase
      end
      default: begin entries[0] = t(0,0,FX_ONE,0); entries[1] = t(1,1,FX_ONE,0); end
    endcase
  end

endmodule
