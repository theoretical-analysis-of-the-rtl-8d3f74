// tb_gate_memory: self-checking test of the gate memory that holds the instruction list.
//
// Drives gate_memory at its default depth with a random mix of writes and reads
// (both in the same cycle too, to the same address or not) and compares
// every read with a reference array kept in the testbench. It checks the
// one-cycle read latency (data is there on the first edge after rd_en), that
// the read data holds while rd_en is low, that a read in the cycle of a write
// to the same address returns the old word, and that the top and bottom
// addresses work.
module tb_gate_memory;
  import qea_pkg::*;

  localparam int unsigned DEPTH = 1024;
  localparam int unsigned AW = $clog2(DEPTH);

  logic          clk = 1'b0;
  logic          we = 1'b0, rd_en = 1'b0;
  logic [AW-1:0] waddr = '0, raddr = '0;
  instr_t          wdata = '0;
  instr_t          rdata;
  int checks = 0, failures = 0;

  instr_t ref_mem [DEPTH];
  bit   ref_ok  [DEPTH];

  gate_memory dut (.*);

  always #5 clk = ~clk;

  function automatic instr_t rnd_word();
    instr_t w;
    w = instr_t'({$urandom, $urandom, $urandom, $urandom});
    return w;
  endfunction

  initial begin
    instr_t expect_q, held;
    bit   have;
    for (int i = 0; i < DEPTH; i++) ref_ok[i] = 0;
    have = 0;
    // fill some addresses, including both ends
    for (int i = 0; i < 600; i++) begin
      int a;
      a = (i == 0) ? 0 : (i == 1) ? DEPTH - 1 : int'($urandom_range(DEPTH - 1));
      @(negedge clk);
      we = 1; waddr = AW'(a); wdata = rnd_word(); rd_en = 0;
      ref_mem[a] = wdata; ref_ok[a] = 1;
    end
    @(negedge clk); we = 0;
    // random traffic
    for (int i = 0; i < 4000; i++) begin
      int ra, wa;
      bit do_r, do_w;
      @(negedge clk);
      // the word read on the previous edge is visible now
      if (have) begin
        checks++;
        if (rdata !== expect_q) begin
          failures++;
          $display("FAIL: read mismatch at step %0d", i);
        end
      end
      do_r = ($urandom_range(3) != 0);
      do_w = ($urandom_range(1) != 0);
      ra = int'($urandom_range(DEPTH - 1));
      if (!ref_ok[ra]) ra = 0;
      wa = ($urandom_range(7) == 0) ? ra : int'($urandom_range(DEPTH - 1));
      rd_en = do_r; raddr = AW'(ra);
      we = do_w; waddr = AW'(wa); wdata = rnd_word();
      if (do_r) begin expect_q = ref_mem[ra]; have = 1; end
      if (do_w) begin ref_mem[wa] = wdata; ref_ok[wa] = 1; end
    end
    // hold: no read for a few cycles, data must not change
    @(negedge clk); rd_en = 1; we = 0; raddr = '0; expect_q = ref_mem[0];
    @(negedge clk); rd_en = 0; held = rdata;
    checks++;
    if (held !== expect_q) begin failures++; $display("FAIL: last read"); end
    we = 1; waddr = '0; wdata = rnd_word();
    @(negedge clk); we = 0;
    repeat (3) @(negedge clk);
    checks++;
    if (rdata !== held) begin failures++; $display("FAIL: read data did not hold"); end
    // latency: a read issued now is visible after exactly one edge
    rd_en = 1; raddr = '0; expect_q = wdata;
    @(posedge clk); #1;
    checks++;
    if (rdata !== expect_q) begin failures++; $display("FAIL: read latency is not one cycle"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
