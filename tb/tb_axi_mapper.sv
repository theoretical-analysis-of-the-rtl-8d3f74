// tb_axi_mapper: self-checking test of the host register and memory map.
//
// Writes to every region and checks that only the matching target sees the
// write, with the right address and data (start pulse, gate memory write,
// state tuple), and that writes outside the three regions go nowhere. Reads
// the status word with random counter values and checks each field and that
// the response comes exactly one cycle after the request; reads a state index
// and checks the index passed to the state read port and that the state
// response (modelled here with one cycle of latency) is returned to the host.
module tb_axi_mapper;
  import qea_pkg::*;

  localparam int unsigned GATE_AW = 10;

  logic               clk = 1'b0, rst_n = 1'b0;
  logic               wr_valid = 1'b0;
  logic [31:0]        wr_addr = '0;
  logic [WORD_W-1:0]  wr_data = '0;
  logic               rd_valid = 1'b0;
  logic [31:0]        rd_addr = '0;
  logic               rd_rsp_valid;
  logic [WORD_W-1:0]  rd_rsp_data;
  logic               start;
  logic               busy = 1'b0, done = 1'b0;
  logic [31:0]        cycles = '0, n_groups = '0, n_tp_passes = '0, n_mm_tuples = '0;
  logic               gate_we;
  logic [GATE_AW-1:0] gate_waddr;
  instr_t             gate_wdata;
  logic               st_wr_valid;
  coo_t               st_wr_tuple;
  logic               st_rd_valid;
  logic [IDX_W-1:0]   st_rd_index;
  logic               st_rd_data_valid = 1'b0;
  coo_t               st_rd_data = '0;
  int checks = 0, failures = 0;

  axi_mapper dut (.*);

  always #5 clk = ~clk;

  // state read model: one cycle of latency, returns a tuple built from the index
  always_ff @(posedge clk) begin
    st_rd_data_valid <= st_rd_valid;
    if (st_rd_valid) st_rd_data <= '{row: st_rd_index, col: 0, val: '{re: st_rd_index ^ 32'h5a5a, im: 3}};
  end

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    // writes
    for (int i = 0; i < 300; i++) begin
      logic [3:0] reg_n;
      @(negedge clk);
      reg_n = 4'($urandom_range(4));
      wr_valid = 1;
      wr_addr = {reg_n, 28'($urandom)};
      wr_data = {$urandom, $urandom, $urandom, $urandom};
      #1;
      check(start == (reg_n == 0 && wr_data[0]), "start pulse");
      check(gate_we == (reg_n == 1), "gate write enable");
      check(st_wr_valid == (reg_n == 2), "state write enable");
      if (reg_n == 1) check(gate_waddr == wr_addr[GATE_AW-1:0] && gate_wdata == instr_t'(wr_data), "gate write address/data");
      if (reg_n == 2) check(st_wr_tuple == coo_t'(wr_data), "state tuple");
    end
    @(negedge clk); wr_valid = 0;
    // status reads
    for (int i = 0; i < 100; i++) begin
      logic [WORD_W-1:0] exp_w;
      @(negedge clk);
      busy = 1'($urandom); done = 1'($urandom);
      cycles = $urandom; n_groups = $urandom; n_tp_passes = $urandom; n_mm_tuples = $urandom;
      rd_valid = 1; rd_addr = {4'h0, 28'($urandom)};
      exp_w = {n_mm_tuples, n_tp_passes, n_groups, cycles[29:0], done, busy};
      #1;
      check(!st_rd_valid, "status read reaches state port");
      @(negedge clk); rd_valid = 0;
      check(rd_rsp_valid && rd_rsp_data == exp_w, "status word after one cycle");
      @(negedge clk);
      check(!rd_rsp_valid, "single response");
    end
    // state reads, back to back
    for (int i = 0; i < 100; i++) begin
      logic [27:0] idx;
      @(negedge clk);
      idx = 28'($urandom_range(65535));
      rd_valid = 1; rd_addr = {4'h2, idx};
      #1;
      check(st_rd_valid && st_rd_index == IDX_W'(idx), "state read index");
      @(posedge clk); #1;
      check(rd_rsp_valid && coo_t'(rd_rsp_data) == '{row: IDX_W'(idx), col: 0, val: '{re: IDX_W'(idx) ^ 32'h5a5a, im: 3}},
            "state read data after one cycle");
    end
    @(negedge clk); rd_valid = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
