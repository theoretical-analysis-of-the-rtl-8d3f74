// tb_pe_control: self-checking test of the processing element sequencer.
//
// pe_control runs as a PE of a 4-PE array (LOG_P = 2) with 256-word buffers.
// ldm instances play LDM1 and the scratch buffer; the testbench plays the
// read crossbar (it grants requests at random and returns the amplitude of
// the requested global index one cycle after the grant) and the load/store
// unit (one done pulse three cycles after each ALU input). Each command's
// ALU input stream is compared, in order, with a stream worked out here:
//   TP    from the unit tuple, from an LDM1 list and from a scratch list:
//         every (list tuple, gate entry) pair, list tuple outer, one per cycle;
//   CLEAR clear_cnt clear requests at addresses 0, 1, ...;
//   MM    for T(Gbar) tuple (i, j, g) and every T(G) tuple (k, l, G) in LDM1:
//         a = (i*B + k, 0, g), b = (k, l, G), c = amplitude j*B + l, and the
//         crossbar request names bank (j*B + l) mod 4, address (j*B + l) / 4.
// Rates: a TP pass must issue one pair per cycle (busy for exactly
// list length x gate entries cycles); an MM command must be busy for exactly
// one cycle per T(G) tuple, plus one cycle of LDM1 read latency, plus one per
// stalled cycle, and stall_cnt must
// count the stalled cycles. idle must come only after the last done.
module tb_pe_control;
  import qea_pkg::*;

  localparam int unsigned DEPTH = 256;
  localparam int unsigned LOG_P = 2;
  localparam int unsigned AW = $clog2(DEPTH);

  logic              clk = 1'b0, rst_n = 1'b0;
  logic              start = 1'b0;
  pe_cmd_t           cmd = '0;
  pe_cmd_t           cmd_q;
  logic [IDX_W-1:0]  list_cnt = '0;
  logic              busy, idle;
  logic              ldm1_rd_en;
  logic [AW-1:0]     ldm1_raddr;
  coo_t              ldm1_rdata;
  logic              scr_rd_en;
  logic [AW-1:0]     scr_raddr;
  coo_t              scr_rdata;
  logic              alu_valid;
  alu_mode_e         alu_mode;
  logic [1:0]        alu_msize;
  coo_t              alu_a, alu_b, alu_c;
  logic              xreq_valid;
  logic [LOG_P-1:0]  xreq_bank;
  logic [AW-1:0]     xreq_addr;
  logic              xgnt;
  coo_t              xrdata = '0;
  logic              clr_valid;
  logic [AW-1:0]     clr_addr;
  logic              lsu_done;
  logic [IDX_W-1:0]  stall_cnt;
  int checks = 0, failures = 0;

  pe_control #(.DEPTH(DEPTH), .LOG_P(LOG_P)) dut (.*);

  // LDM1 and scratch models, loaded by the testbench through their write ports
  logic l1_we = 1'b0, s_we = 1'b0;
  logic [AW-1:0] l1_wa = '0, s_wa = '0;
  coo_t l1_wd = '0, s_wd = '0;
  ldm #(.DEPTH(DEPTH)) u_l1 (.clk, .we(l1_we), .waddr(l1_wa), .wdata(l1_wd),
                              .rd_en(ldm1_rd_en), .raddr(ldm1_raddr), .rdata(ldm1_rdata));
  ldm #(.DEPTH(DEPTH)) u_s  (.clk, .we(s_we), .waddr(s_wa), .wdata(s_wd),
                              .rd_en(scr_rd_en), .raddr(scr_raddr), .rdata(scr_rdata));

  always #5 clk = ~clk;

  // crossbar model
  int  gnt_pct = 100;
  bit  gnt_rnd = 1'b1;
  int  n_stall = 0;
  always @(negedge clk) gnt_rnd = ($urandom_range(99) < gnt_pct);
  assign xgnt = xreq_valid && gnt_rnd;

  function automatic coo_t amp(input int g);
    return '{row: g, col: 0, val: '{re: g * 3 + 1, im: 32'(-g)}};
  endfunction

  always_ff @(posedge clk) begin
    if (xgnt) xrdata <= amp(int'(xreq_addr) * 4 + int'(xreq_bank));
    if (xreq_valid && !xgnt && rst_n) n_stall++;
  end

  // load/store unit model: done three cycles after the ALU input
  logic [2:0] done_sr = '0;
  always_ff @(posedge clk) done_sr <= {done_sr[1:0], alu_valid && rst_n};
  assign lsu_done = done_sr[2];

  // expected ALU stream
  coo_t exp_a [$], exp_b [$], exp_c [$];
  alu_mode_e exp_mode;
  int exp_clr;
  always @(posedge clk) begin
    if (alu_valid && rst_n) begin
      checks++;
      if (exp_a.size() == 0) begin
        failures++; $display("%0t FAIL: unexpected ALU input", $time);
      end else begin
        coo_t ea, eb, ec;
        ea = exp_a.pop_front(); eb = exp_b.pop_front(); ec = exp_c.pop_front();
        if (alu_a != ea || alu_b != eb || alu_mode != exp_mode || alu_msize != cmd_q.msize ||
            (exp_mode == ALU_MM && alu_c != ec)) begin
          failures++;
          $display("%0t FAIL: ALU input a=(%0d,%0d) b=(%0d,%0d) expected a=(%0d,%0d) b=(%0d,%0d)", $time,
                   alu_a.row, alu_a.col, alu_b.row, alu_b.col, ea.row, ea.col, eb.row, eb.col);
        end
      end
    end
    if (clr_valid && rst_n) begin
      checks++;
      if (int'(clr_addr) != exp_clr) begin failures++; $display("%0t FAIL: clear address %0d", $time, clr_addr); end
      exp_clr++;
    end
  end

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("%0t FAIL: %s", $time, what); end
  endtask

  function automatic coo_t rnd_tuple(input int rmax, input int cmax);
    return '{row: $urandom_range(rmax), col: $urandom_range(cmax), val: '{re: $urandom, im: $urandom}};
  endfunction

  // run one command; returns the number of cycles busy was high
  task automatic run(input pe_cmd_t c, input int cnt, output int busy_cycles);
    int guard;
    @(negedge clk);
    cmd = c; list_cnt = IDX_W'(cnt); start = 1;
    @(negedge clk);
    start = 0;
    busy_cycles = 0;
    guard = 0;
    while (!idle && guard < 5000) begin
      if (busy) busy_cycles++;
      @(negedge clk);
      guard++;
    end
    check(exp_a.size() == 0, "every expected ALU input was issued");
    check(!busy && idle, "idle at the end");
  endtask

  initial begin
    coo_t list [$];
    int bc;
    pe_cmd_t c;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    check(idle && !busy, "idle after reset");

    // --- TP from the unit tuple ---
    c = '0; c.op = PE_TP; c.src = MEM_UNIT; c.msize = 2'd2; c.nnz = 3'd4;
    for (int j = 0; j < MAX_NNZ; j++) c.gate[j] = rnd_tuple(3, 3);
    exp_mode = ALU_TP;
    for (int j = 0; j < 4; j++) begin exp_a.push_back(COO_UNIT); exp_b.push_back(c.gate[j]); exp_c.push_back('0); end
    run(c, 0, bc);
    check(bc == 4, "TP from unit: one pair per cycle");

    // --- TP from LDM1 and from scratch lists ---
    for (int rep = 0; rep < 6; rep++) begin
      int n, nz;
      bit from_scr;
      from_scr = rep[0];
      n = int'($urandom_range(40, 1));
      nz = int'($urandom_range(MAX_NNZ, 1));
      list.delete();
      for (int i = 0; i < n; i++) begin
        coo_t t;
        t = rnd_tuple(1000, 1000);
        list.push_back(t);
        @(negedge clk);
        if (from_scr) begin s_we = 1; s_wa = AW'(i); s_wd = t; end
        else          begin l1_we = 1; l1_wa = AW'(i); l1_wd = t; end
      end
      @(negedge clk); s_we = 0; l1_we = 0;
      c = '0; c.op = PE_TP; c.src = from_scr ? MEM_SCR : MEM_LDM1; c.msize = 2'd1; c.nnz = 3'(nz);
      for (int j = 0; j < MAX_NNZ; j++) c.gate[j] = rnd_tuple(1, 1);
      for (int i = 0; i < n; i++)
        for (int j = 0; j < nz; j++) begin
          exp_a.push_back(list[i]); exp_b.push_back(c.gate[j]); exp_c.push_back('0);
        end
      run(c, n, bc);
      check(bc == n * nz, "TP pass: one pair per cycle");
    end

    // --- CLEAR ---
    c = '0; c.op = PE_CLEAR; c.clear_cnt = 77;
    exp_clr = 0;
    run(c, 0, bc);
    check(exp_clr == 77 && bc == 77, "clear: one word per cycle");

    // --- MM with random grants ---
    for (int rep = 0; rep < 8; rep++) begin
      int n, lb, stall0, sc0;
      coo_t gb;
      gnt_pct = (rep == 0) ? 100 : int'($urandom_range(90, 20));
      lb = int'($urandom_range(5, 2));
      n = int'($urandom_range(50, 1));
      list.delete();
      for (int i = 0; i < n; i++) begin
        coo_t t;
        t = rnd_tuple((1 << lb) - 1, (1 << lb) - 1);
        list.push_back(t);
        @(negedge clk);
        l1_we = 1; l1_wa = AW'(i); l1_wd = t;
      end
      @(negedge clk); l1_we = 0;
      gb = rnd_tuple(3, 3);
      c = '0; c.op = PE_MM; c.gbar = gb; c.log_b = 5'(lb); c.msize = 2'd1;
      exp_mode = ALU_MM;
      for (int i = 0; i < n; i++) begin
        exp_a.push_back('{row: (gb.row << lb) + list[i].row, col: 0, val: gb.val});
        exp_b.push_back(list[i]);
        exp_c.push_back(amp(int'((gb.col << lb) + list[i].col)));
      end
      stall0 = n_stall; sc0 = int'(stall_cnt);
      run(c, n, bc);
      check(int'(stall_cnt) - sc0 == n_stall - stall0, "stall counter");
      if (bc != n + 1 + (n_stall - stall0)) $display("n=%0d stalls=%0d busy=%0d", n, n_stall - stall0, bc);
      check(bc == n + 1 + (n_stall - stall0), "MM: one T(G) tuple per cycle plus stalls");
      if (rep > 0) check(n_stall > stall0 || n < 3, "MM: stalls happened");
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
