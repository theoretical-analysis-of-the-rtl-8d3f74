// complex_alu: the arithmetic unit of a processing element.
//
// It takes three 128-bit COO tuples a, b and c and works in one of two modes.
//   ALU_TP  tensor (Kronecker) product of one element of a with one element of b:
//             row = (a.row << msize) + b.row
//             col = (a.col << msize) + b.col
//             val = a.val * b.val
//           msize is log2 of the size of b's matrix (1 for a 2x2 gate, 2 for 4x4).
//   ALU_MM  the same product followed by the multiplication with a state
//           amplitude c.val; the tuple row is taken from a.row and the column is 0:
//             (a.row, 0, a.val * b.val * c.val)
//
// As in the paper's figure, the unit is split into a COO-processing part (two
// shifters and two adders on the indices), a tensor-product part (four
// multipliers, a subtractor and an adder) and a matrix-multiplication part
// (four more multipliers, a subtractor and an adder), with one multiplexer per
// output field (row, col, re, im) choosing between the two results. The
// 2-bit matrix size, the 128-bit tuple widths and the Q2.30 arithmetic follow
// the paper. The split into two pipeline stages, truncating fixed-point
// rounding and taking the MM row straight from a.row are choices of this design.
//
// Timing: fully pipelined, one tuple per cycle, result two cycles after in_valid.
module complex_alu
  import qea_pkg::*;
(
  input  logic      clk,
  input  logic      rst_n,
  input  logic      in_valid,
  input  alu_mode_e mode,
  input  logic [1:0] msize,
  input  coo_t      a,
  input  coo_t      b,
  input  coo_t      c,
  output logic      out_valid,
  output coo_t      out
);

  // stage 1: COO processing and tensor product
  logic      s1_valid;
  alu_mode_e s1_mode;
  logic [IDX_W-1:0] s1_row_cat, s1_col_cat, s1_row_a;
  cplx_t     s1_tp, s1_c;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_valid <= 1'b0;
    end else begin
      s1_valid <= in_valid;
    end
  end

  always_ff @(posedge clk) begin
    s1_mode    <= mode;
    s1_row_cat <= (a.row << msize) + b.row;
    s1_col_cat <= (a.col << msize) + b.col;
    s1_row_a   <= a.row;
    s1_tp      <= cmul(a.val, b.val);
    s1_c       <= c.val;
  end

  // stage 2: matrix multiplication and output multiplexers
  cplx_t mm;
  assign mm = cmul(s1_tp, s1_c);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
    end else begin
      out_valid <= s1_valid;
    end
  end

  always_ff @(posedge clk) begin
    out.row <= (s1_mode == ALU_MM) ? s1_row_a : s1_row_cat;
    out.col <= (s1_mode == ALU_MM) ? '0       : s1_col_cat;
    out.val <= (s1_mode == ALU_MM) ? mm       : s1_tp;
  end

endmodule
