// tb_load_store_unit: self-checking test of a processing element's
// load/store unit.
//
// The unit runs as PE 1 of 4 (LOG_P = 2) with 256-word buffers; an ldm
// instance plays the scratch / next-state buffer. The test goes through the
// unit's three jobs:
//   - tensor-product lists: random result streams with gaps go to LDM1, to
//     the scratch buffer and to the T(Gbar) memory port; every kept tuple must
//     be written at the next list position of the right port, list_cnt must
//     count them, and with the ownership filter on only rows r with
//     r mod 4 == 1 may be kept;
//   - clear: every word of the next-state buffer is zeroed and labelled with
//     its global index;
//   - matrix-multiply accumulation: random (r, 0, v) results, many of them to
//     the same address in consecutive cycles, are summed into the buffer and
//     the final contents are compared with sums kept in the testbench. The
//     write-back must come exactly one cycle after the result arrives.
// done must pulse once per handled result.
module tb_load_store_unit;
  import qea_pkg::*;

  localparam int unsigned DEPTH = 256;
  localparam int unsigned LOG_P = 2;
  localparam int unsigned PE_ID = 1;
  localparam int unsigned AW = $clog2(DEPTH);

  logic             clk = 1'b0, rst_n = 1'b0;
  logic             cnt_reset = 1'b0;
  pe_op_e           op = PE_TP;
  mem_sel_e         dst = MEM_LDM1;
  logic             filter = 1'b0;
  logic             in_valid = 1'b0;
  coo_t             in = '0;
  logic             clr_valid = 1'b0;
  logic [AW-1:0]    clr_addr = '0;
  logic             ldm1_we;
  logic [AW-1:0]    ldm1_waddr;
  coo_t             ldm1_wdata;
  logic             scr_we;
  logic [AW-1:0]    scr_waddr;
  coo_t             scr_wdata;
  logic             scr_rd_en;
  logic [AW-1:0]    scr_raddr;
  coo_t             scr_rdata;
  logic             ext_we;
  logic [IDX_W-1:0] ext_waddr;
  coo_t             ext_wdata;
  logic [IDX_W-1:0] list_cnt;
  logic             done;
  int checks = 0, failures = 0;

  load_store_unit #(.DEPTH(DEPTH), .LOG_P(LOG_P), .PE_ID(PE_ID)) dut (.*);

  ldm #(.DEPTH(DEPTH)) u_scr (
    .clk, .we(scr_we), .waddr(scr_waddr), .wdata(scr_wdata),
    .rd_en(scr_rd_en), .raddr(scr_raddr), .rdata(scr_rdata)
  );

  always #5 clk = ~clk;

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic coo_t rnd_tuple();
    return '{row: $urandom_range(4 * DEPTH - 1), col: $urandom_range(255),
             val: '{re: $urandom, im: $urandom}};
  endfunction

  // one tensor-product list, checked cycle by cycle
  task automatic tp_list(input mem_sel_e d, input bit filt, input int n);
    int kept;
    @(negedge clk);
    op = PE_TP; dst = d; filter = filt; cnt_reset = 1;
    @(negedge clk);
    cnt_reset = 0;
    check(list_cnt == 0, "list count reset");
    kept = 0;
    for (int i = 0; i < n; i++) begin
      bit k, wr;
      in_valid = ($urandom_range(3) != 0);
      in = rnd_tuple();
      #1;
      k = in_valid && (!filt || in.row % 4 == PE_ID);
      check(done == in_valid, "done follows every list tuple");
      case (d)
        MEM_LDM1: begin
          wr = ldm1_we;
          check(!scr_we && !ext_we, "list write to one port only");
          if (k) check(int'(ldm1_waddr) == kept && ldm1_wdata == in, "LDM1 list address/data");
        end
        MEM_SCR: begin
          wr = scr_we;
          check(!ldm1_we && !ext_we, "list write to one port only");
          if (k) check(int'(scr_waddr) == kept && scr_wdata == in, "scratch list address/data");
        end
        default: begin
          wr = ext_we;
          check(!ldm1_we && !scr_we, "list write to one port only");
          if (k) check(int'(ext_waddr) == kept && ext_wdata == in, "T(Gbar) list address/data");
        end
      endcase
      check(wr == k, "tuple kept exactly when owned");
      if (k) kept++;
      @(negedge clk);
      check(int'(list_cnt) == kept, "list count");
    end
    in_valid = 0;
  endtask

  initial begin
    cplx_t ref_v [DEPTH];
    int    n_done, n_in;
    repeat (2) @(negedge clk);
    rst_n = 1;
    tp_list(MEM_LDM1, 0, 200);
    tp_list(MEM_LDM1, 1, 300);
    tp_list(MEM_SCR, 0, 200);
    tp_list(MEM_SCR, 1, 100);
    tp_list(MEM_EXT, 0, 200);

    // clear
    @(negedge clk);
    op = PE_CLEAR;
    for (int a = 0; a < DEPTH; a++) begin
      clr_valid = 1; clr_addr = AW'(a);
      #1;
      check(scr_we && int'(scr_waddr) == a && scr_wdata.val == '0 &&
            int'(scr_wdata.row) == a * 4 + PE_ID, "clear write");
      @(negedge clk);
    end
    clr_valid = 0;
    for (int a = 0; a < DEPTH; a++) begin
      ref_v[a] = '0;
      check(u_scr.mem[a].val == '0 && int'(u_scr.mem[a].row) == a * 4 + PE_ID, "cleared word");
    end

    // accumulate
    op = PE_MM;
    n_done = 0; n_in = 0;
    for (int i = 0; i < 3000; i++) begin
      int a;
      bit prev_v;
      prev_v = in_valid;
      // hot addresses make consecutive hits likely
      a = ($urandom_range(1) == 0) ? int'($urandom_range(3)) : int'($urandom_range(DEPTH - 1));
      in_valid = ($urandom_range(4) != 0);
      in = '{row: a * 4 + PE_ID, col: 0,
             val: '{re: 32'($signed($urandom_range(2000)) - 1000), im: 32'($signed($urandom_range(2000)) - 1000)}};
      if (in_valid) begin
        ref_v[a].re += in.val.re;
        ref_v[a].im += in.val.im;
        n_in++;
      end
      @(posedge clk); #1;
      if (in_valid) begin
        check(scr_we && int'(scr_waddr) == a, "accumulate writes one cycle after the result");
      end
      if (done) n_done++;
      @(negedge clk);
    end
    in_valid = 0;
    repeat (3) begin @(posedge clk); #1; if (done) n_done++; end
    check(n_done == n_in, "one done per accumulated result");
    for (int a = 0; a < DEPTH; a++) begin
      checks++;
      if (u_scr.mem[a].val != ref_v[a] || int'(u_scr.mem[a].row) != a * 4 + PE_ID) begin
        failures++;
        $display("FAIL: address %0d sum (%0d,%0d) expected (%0d,%0d)", a,
                 $signed(u_scr.mem[a].val.re), $signed(u_scr.mem[a].val.im),
                 $signed(ref_v[a].re), $signed(ref_v[a].im));
      end
    end
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
