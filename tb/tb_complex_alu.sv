// tb_complex_alu: checks the complex ALU in both modes.
//
// The Kronecker example of the paper's COO figure (Z (x) Y on 2x2 matrices) is
// checked tuple by tuple; then random tuples are pushed back to back, one per
// cycle, in both modes and every result is compared, two cycles later, with a
// reference computed here with 64-bit integer arithmetic.
module tb_complex_alu;
  import qea_pkg::*;

  logic clk = 0, rst_n = 0;
  logic in_valid = 0;
  alu_mode_e mode = ALU_TP;
  logic [1:0] msize = 2'd1;
  coo_t a = '0, b = '0, c = '0;
  logic out_valid;
  coo_t out;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  complex_alu dut (.*);

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic signed [31:0] m(logic signed [31:0] x, logic signed [31:0] y);
    logic signed [63:0] p;
    p = 64'(x) * 64'(y);
    return 32'(p >>> 30);
  endfunction

  function automatic coo_t ref_out(alu_mode_e md, logic [1:0] ms, coo_t ta, coo_t tb, coo_t tc);
    coo_t r;
    logic signed [31:0] tr, ti;
    tr = m(ta.val.re, tb.val.re) - m(ta.val.im, tb.val.im);
    ti = m(ta.val.re, tb.val.im) + m(ta.val.im, tb.val.re);
    if (md == ALU_TP) begin
      r.row = (ta.row << ms) + tb.row;
      r.col = (ta.col << ms) + tb.col;
      r.val.re = tr; r.val.im = ti;
    end else begin
      r.row = ta.row;
      r.col = 0;
      r.val.re = m(tr, tc.val.re) - m(ti, tc.val.im);
      r.val.im = m(tr, tc.val.im) + m(ti, tc.val.re);
    end
    return r;
  endfunction

  function automatic coo_t mk(int r, int cc, logic [31:0] re, logic [31:0] im);
    coo_t x;
    x.row = r; x.col = cc; x.val.re = re; x.val.im = im;
    return x;
  endfunction

  coo_t exp_q [$];

  // scoreboard: every output must match the oldest expected value
  always @(posedge clk) begin
    if (out_valid) begin
      coo_t e;
      checks++;
      if (exp_q.size() == 0) begin
        failures++; $display("FAIL: unexpected output");
      end else begin
        e = exp_q.pop_front();
        if (out !== e) begin
          failures++;
          $display("FAIL: got %h expected %h", out, e);
        end
      end
    end
  end

  task automatic push(alu_mode_e md, logic [1:0] ms, coo_t ta, coo_t tb, coo_t tc);
    @(negedge clk);
    in_valid = 1; mode = md; msize = ms; a = ta; b = tb; c = tc;
    exp_q.push_back(ref_out(md, ms, ta, tb, tc));
  endtask

  localparam logic [31:0] ONE = 32'h4000_0000, NONE = 32'hC000_0000;

  initial begin
    int lat;
    repeat (2) @(negedge clk);
    rst_n = 1;
    // Z (x) Y from the paper's figure: (1,1,-1) (x) (0,1,i) = (2,3,-i)
    @(negedge clk);
    in_valid = 1; mode = ALU_TP; msize = 1;
    a = mk(1,1,NONE,0); b = mk(0,1,0,ONE); c = '0;
    exp_q.push_back(mk(2,3,0,NONE));
    @(negedge clk);
    in_valid = 0;
    lat = 1;
    while (!out_valid) begin @(negedge clk); lat++; end
    checks++;
    if (out.row != 2 || out.col != 3 || out.val.re != 0 || out.val.im != NONE) begin
      failures++; $display("FAIL: Z(x)Y example gave %h", out);
    end
    checks++;
    if (lat != 2) begin failures++; $display("FAIL: latency %0d, expected 2", lat); end
    @(negedge clk);
    // random traffic, one per cycle
    for (int i = 0; i < 400; i++) begin
      coo_t ta, tb, tc;
      ta = mk($urandom_range(255), $urandom_range(255), 32'($urandom) >>> 2, 32'($urandom) >>> 2);
      tb = mk($urandom_range(3), $urandom_range(3), 32'($urandom) >>> 2, 32'($urandom) >>> 2);
      tc = mk($urandom_range(255), 0, 32'($urandom) >>> 2, 32'($urandom) >>> 2);
      ta.val.re = $signed(ta.val.re) >>> 1; ta.val.im = $signed(ta.val.im) >>> 1;
      push(($urandom_range(1) == 1) ? ALU_MM : ALU_TP, 2'($urandom_range(1, 2)), ta, tb, tc);
    end
    @(negedge clk);
    in_valid = 0;
    repeat (5) @(negedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("FAIL: %0d outputs missing", exp_q.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
