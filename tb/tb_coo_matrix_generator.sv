// tb_coo_matrix_generator: checks every gate's COO list against the gate's
// textbook matrix, written out independently here.
//
// For each gate and a few angles (the instruction carries cos and sin of the
// angle, or of half of it for the rotations) it checks the matrix size, that
// every listed entry sits where the matrix is non-zero and carries its value
// (to fixed-point precision), that no entry is listed twice and that the
// number of entries equals the number of non-zeros of the matrix.
module tb_coo_matrix_generator;
  import qea_pkg::*;

  instr_t instr;
  coo_t [MAX_NNZ-1:0] entries;
  logic [2:0] nnz;
  logic [1:0] msize;
  int checks = 0, failures = 0;

  coo_matrix_generator dut (.*);

  function automatic void gate_matrix(input gate_e g, input real th,
                                      output real mr [4][4], output real mi [4][4],
                                      output int dim);
    real c, s, q;
    q = 1.0 / $sqrt(2.0);
    for (int r = 0; r < 4; r++) for (int cc = 0; cc < 4; cc++) begin mr[r][cc] = 0; mi[r][cc] = 0; end
    c = $cos(th); s = $sin(th);
    dim = 2;
    case (g)
      G_I:   begin mr[0][0] = 1; mr[1][1] = 1; end
      G_X:   begin mr[0][1] = 1; mr[1][0] = 1; end
      G_Y:   begin mi[0][1] = -1; mi[1][0] = 1; end
      G_Z:   begin mr[0][0] = 1; mr[1][1] = -1; end
      G_S:   begin mr[0][0] = 1; mi[1][1] = 1; end
      G_SDG: begin mr[0][0] = 1; mi[1][1] = -1; end
      G_T:   begin mr[0][0] = 1; mr[1][1] = q; mi[1][1] = q; end
      G_TDG: begin mr[0][0] = 1; mr[1][1] = q; mi[1][1] = -q; end
      G_P:   begin mr[0][0] = 1; mr[1][1] = c; mi[1][1] = s; end
      G_RZ:  begin mr[0][0] = $cos(th/2); mi[0][0] = -$sin(th/2); mr[1][1] = $cos(th/2); mi[1][1] = $sin(th/2); end
      G_H:   begin mr[0][0] = q; mr[0][1] = q; mr[1][0] = q; mr[1][1] = -q; end
      G_SX:  begin mr[0][0] = 0.5; mi[0][0] = 0.5; mr[0][1] = 0.5; mi[0][1] = -0.5;
                   mr[1][0] = 0.5; mi[1][0] = -0.5; mr[1][1] = 0.5; mi[1][1] = 0.5; end
      G_RX:  begin mr[0][0] = $cos(th/2); mi[0][1] = -$sin(th/2); mi[1][0] = -$sin(th/2); mr[1][1] = $cos(th/2); end
      G_RY:  begin mr[0][0] = $cos(th/2); mr[0][1] = -$sin(th/2); mr[1][0] = $sin(th/2); mr[1][1] = $cos(th/2); end
      default: begin
        real br [2][2], bi [2][2];
        dim = 4;
        mr[0][0] = 1; mr[1][1] = 1;
        for (int a = 0; a < 2; a++) for (int b = 0; b < 2; b++) begin br[a][b] = 0; bi[a][b] = 0; end
        case (g)
          G_CX:  begin br[0][1] = 1; br[1][0] = 1; end
          G_CY:  begin bi[0][1] = -1; bi[1][0] = 1; end
          G_CZ:  begin br[0][0] = 1; br[1][1] = -1; end
          G_CP:  begin br[0][0] = 1; br[1][1] = c; bi[1][1] = s; end
          G_CRZ: begin br[0][0] = $cos(th/2); bi[0][0] = -$sin(th/2); br[1][1] = $cos(th/2); bi[1][1] = $sin(th/2); end
          G_CRX: begin br[0][0] = $cos(th/2); bi[0][1] = -$sin(th/2); bi[1][0] = -$sin(th/2); br[1][1] = $cos(th/2); end
          G_CRY: begin br[0][0] = $cos(th/2); br[0][1] = -$sin(th/2); br[1][0] = $sin(th/2); br[1][1] = $cos(th/2); end
          default: begin br[0][0] = q; br[0][1] = q; br[1][0] = q; br[1][1] = -q; end // CH
        endcase
        for (int a = 0; a < 2; a++) for (int b = 0; b < 2; b++) begin
          mr[2+a][2+b] = br[a][b]; mi[2+a][2+b] = bi[a][b];
        end
      end
    endcase
  endfunction


  function automatic logic [31:0] fx(input real x);
    return 32'($rtoi(x * 1073741824.0 + (x >= 0 ? 0.5 : -0.5)));
  endfunction

  function automatic real unfx(input logic [31:0] v);
    return real'($signed(v)) / 1073741824.0;
  endfunction

  initial begin
    real angles [3] = '{0.3, -1.7, 2.9};
    for (int g = 0; g <= int'(G_RY); g++) begin
      foreach (angles[ai]) begin
        real mr [4][4], mi [4][4];
        real th;
        int d, nz;
        bit seen [4][4];
        gate_e ge;
        ge = gate_e'(g);
        th = angles[ai];
        instr = '0;
        instr.op = OP_G;
        instr.gate = ge;
        if (ge inside {G_RZ, G_RX, G_RY, G_CRZ, G_CRX, G_CRY}) begin
          instr.pa = fx($cos(th/2)); instr.pb = fx($sin(th/2));
        end else begin
          instr.pa = fx($cos(th));   instr.pb = fx($sin(th));
        end
        #1;
        gate_matrix(ge, th, mr, mi, d);
        checks++;
        if (msize != ((d == 4) ? 2 : 1)) begin failures++; $display("FAIL: gate %0d msize %0d", g, msize); end
        nz = 0;
        for (int r = 0; r < d; r++) for (int c = 0; c < d; c++) begin
          seen[r][c] = 0;
          if (mr[r][c] != 0.0 || mi[r][c] != 0.0) nz++;
        end
        checks++;
        if (int'(nnz) != nz) begin failures++; $display("FAIL: gate %0d nnz %0d expected %0d", g, nnz, nz); end
        for (int e = 0; e < int'(nnz) && e < MAX_NNZ; e++) begin
          int r, c;
          r = int'(entries[e].row); c = int'(entries[e].col);
          checks++;
          if (r >= d || c >= d) begin
            failures++; $display("FAIL: gate %0d entry %0d out of range", g, e);
          end else if (seen[r][c]) begin
            failures++; $display("FAIL: gate %0d entry (%0d,%0d) twice", g, r, c);
          end else begin
            real dr, di;
            seen[r][c] = 1;
            dr = unfx(entries[e].val.re) - mr[r][c];
            di = unfx(entries[e].val.im) - mi[r][c];
            if (dr > 1e-8 || dr < -1e-8 || di > 1e-8 || di < -1e-8 || (mr[r][c] == 0.0 && mi[r][c] == 0.0)) begin
              failures++;
              $display("FAIL: gate %0d (%0d,%0d) got (%f,%f) expected (%f,%f)", g, r, c,
                       unfx(entries[e].val.re), unfx(entries[e].val.im), mr[r][c], mi[r][c]);
            end
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
