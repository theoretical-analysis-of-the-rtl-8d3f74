// qea_pkg: types and constants shared by the quantum emulation accelerator (QEA).
//
// Every matrix element and every state amplitude travels as a 128-bit COO tuple
// (row, col, value). Row and column are 32-bit unsigned indices; the value is a
// complex number whose real and imaginary parts are 32-bit signed fixed point
// with 2 integer bits and 30 fraction bits (Q2.30). Those widths follow the paper.
// The bit order inside the tuple (row in the top 32 bits, then col, re, im) is
// this design's choice.
//
// The package also holds the instruction format of the gate memory, the gate
// identifiers of the COO matrix generator and the command that the PEA
// controller broadcasts to all processing elements. Those encodings are this
// design's own; the paper names the gates but not their codes.
package qea_pkg;

  localparam int unsigned IDX_W  = 32;   // row / column index width
  localparam int unsigned FX_W   = 32;   // width of the real and imaginary parts
  localparam int unsigned FX_FRAC = 30;  // fraction bits (Q2.30)
  localparam int unsigned WORD_W = 128;  // COO tuple width, also the host bus width

  // largest number of non-zero entries of one gate in COO form (CRX, CRY, CH)
  localparam int unsigned MAX_NNZ = 6;

  typedef logic signed [FX_W-1:0] fx_t;

  typedef struct packed {
    fx_t re;
    fx_t im;
  } cplx_t;

  typedef struct packed {
    logic [IDX_W-1:0] row;
    logic [IDX_W-1:0] col;
    cplx_t            val;
  } coo_t;

  localparam fx_t FX_ONE  = 32'sh4000_0000;  // 1.0
  localparam fx_t FX_NONE = -32'sh4000_0000; // -1.0
  localparam fx_t FX_HALF = 32'sh2000_0000;  // 0.5
  localparam fx_t FX_RSQ2 = 32'sh2D41_3CCD;  // 1/sqrt(2), rounded

  localparam coo_t COO_UNIT = '{row: '0, col: '0, val: '{re: FX_ONE, im: '0}};

  // Fixed-point multiply of two Q2.30 numbers, truncated back to Q2.30.
  function automatic fx_t fx_mul(fx_t a, fx_t b);
    logic signed [2*FX_W-1:0] p;
    p = a * b;
    return p[FX_FRAC +: FX_W];
  endfunction

  // Complex product, the four multipliers, one subtractor and one adder of
  // either half of the complex ALU.
  function automatic cplx_t cmul(cplx_t a, cplx_t b);
    cplx_t r;
    r.re = fx_mul(a.re, b.re) - fx_mul(a.im, b.im);
    r.im = fx_mul(a.re, b.im) + fx_mul(a.im, b.re);
    return r;
  endfunction

  // ALU mode: tensor product of two tuples, or tensor product followed by the
  // multiplication with a state amplitude.
  typedef enum logic {
    ALU_TP = 1'b0,
    ALU_MM = 1'b1
  } alu_mode_e;

  // Gates of the COO matrix generator (Table I of the paper plus the identity).
  typedef enum logic [4:0] {
    G_I   = 5'd0,
    G_P   = 5'd1,
    G_X   = 5'd2,
    G_Y   = 5'd3,
    G_Z   = 5'd4,
    G_S   = 5'd5,
    G_SDG = 5'd6,
    G_T   = 5'd7,
    G_TDG = 5'd8,
    G_RZ  = 5'd9,
    G_CRZ = 5'd10,
    G_CRX = 5'd11,
    G_CX  = 5'd12,
    G_CY  = 5'd13,
    G_CZ  = 5'd14,
    G_CP  = 5'd15,
    G_CRY = 5'd16,
    G_CH  = 5'd17,
    G_H   = 5'd18,
    G_SX  = 5'd19,
    G_RX  = 5'd20,
    G_RY  = 5'd21
  } gate_e;

  // Instruction opcodes of the gate memory.
  typedef enum logic [3:0] {
    OP_HALT = 4'd0,  // end of program
    OP_GBAR = 4'd1,  // gate that belongs to T(Gbar), the high-order factor
    OP_G    = 4'd2,  // gate that belongs to T(G), the low-order factor
    OP_EXEC = 4'd3   // end of one fused group: apply U = T(Gbar) (x) T(G) to the state
  } opcode_e;

  // 128-bit instruction. pa / pb carry the cosine and sine the host computed:
  // cos(lambda), sin(lambda) for P and CP; cos(theta/2), sin(theta/2) for the
  // rotations. Unused by the other gates.
  typedef struct packed {
    opcode_e          op;
    gate_e            gate;
    logic [54:0]      rsvd;
    fx_t              pa;
    fx_t              pb;
  } instr_t;

  // Memories a PE pass reads from or writes to.
  typedef enum logic [1:0] {
    MEM_UNIT = 2'd0,  // source only: the 1x1 matrix {(0,0,1)}
    MEM_LDM1 = 2'd1,  // LDM1, holds T(G)
    MEM_SCR  = 2'd2,  // the state buffer not holding |psi_t>, used as scratch
    MEM_EXT  = 2'd3   // destination only: the shared T(Gbar) memory
  } mem_sel_e;

  typedef enum logic [1:0] {
    PE_TP    = 2'd0,  // one tensor-product pass: list (x) gate
    PE_CLEAR = 2'd1,  // zero the output state slice
    PE_MM    = 2'd2   // multiply-accumulate one T(Gbar) tuple times T(G) times |psi_t>
  } pe_op_e;

  typedef struct packed {
    pe_op_e                op;
    mem_sel_e              src;
    mem_sel_e              dst;
    logic                  filter;   // keep only rows owned by this PE
    logic [1:0]            msize;    // log2 of the gate's matrix size (1 or 2)
    logic [2:0]            nnz;      // entries in gate[]
    coo_t [MAX_NNZ-1:0]    gate;     // COO list of the gate
    coo_t                  gbar;     // T(Gbar) tuple for PE_MM
    logic [4:0]            log_b;    // log2(N / Nbar)
    logic [IDX_W-1:0]      clear_cnt;
  } pe_cmd_t;

endpackage
