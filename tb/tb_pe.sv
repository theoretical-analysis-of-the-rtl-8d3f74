// tb_pe: self-checking test of one processing element doing a whole fused
// group.
//
// The PE is PE 0 of a two-PE array (LOG_P = 1) with 64-word buffers. The
// testbench plays the rest of the array: it holds PE 1's share of the state,
// acts as the read crossbar (granting at random, so requests stall; a request
// for bank 0 is looped back to this PE's own bank port) and sends the
// commands a PEA controller would. The group is U = CX (x) H (x) S on four
// qubits (N = 16, Nbar = 4, B = 4):
//   1. the host writes PE 0's half of a random |psi> (even indices);
//   2. TP from the unit tuple with CX into the T(Gbar) memory port, checked
//      against CX's list;
//   3. TP unit (x) H into scratch, then (x) S into LDM1 with the ownership
//      filter, leaving PE 0 with the 4 non-zeros of H (x) S on even rows;
//   4. CLEAR of the next-state buffer;
//   5. one MM command per T(Gbar) tuple, the next one started as soon as
//      busy drops, then a wait for idle;
//   6. cur is flipped and PE 0's half of |psi'> is read back through the bank
//      port and compared with U |psi> worked out here with real arithmetic.
// It also checks list counts, that every TP pass issues one pair per cycle,
// and that the crossbar stalled at least once.
module tb_pe;
  import qea_pkg::*;

  localparam int unsigned DEPTH = 64;
  localparam int unsigned LOG_P = 1;
  localparam int unsigned AW = $clog2(DEPTH);
  localparam int N = 16;

  logic              clk = 1'b0, rst_n = 1'b0;
  logic              start = 1'b0;
  pe_cmd_t           cmd = '0;
  logic              cur = 1'b0;
  logic              busy, idle;
  logic [IDX_W-1:0]  list_cnt, stall_cnt;
  logic              xreq_valid;
  logic [LOG_P-1:0]  xreq_bank;
  logic [AW-1:0]     xreq_addr;
  logic              xgnt;
  coo_t              xrdata;
  logic              bank_rd_en;
  logic [AW-1:0]     bank_rd_addr;
  coo_t              bank_rd_data;
  logic              hw_en = 1'b0;
  logic [AW-1:0]     hw_addr = '0;
  coo_t              hw_data = '0;
  logic              ext_we;
  logic [IDX_W-1:0]  ext_waddr;
  coo_t              ext_wdata;
  int checks = 0, failures = 0;

  pe #(.DEPTH(DEPTH), .LOG_P(LOG_P), .PE_ID(0)) dut (.*);

  always #5 clk = ~clk;

  // ---- rest of the array: PE 1's state and the crossbar ----
  coo_t pe1_mem [DEPTH];
  bit   gnt_rnd = 1'b0;
  logic host_rd = 1'b0;
  logic [AW-1:0] host_addr = '0;
  logic sel_q = 1'b0;
  coo_t pe1_q = '0;
  always @(negedge clk) gnt_rnd = ($urandom_range(2) != 0);
  assign xgnt         = xreq_valid && gnt_rnd;
  assign bank_rd_en   = (xgnt && xreq_bank == 1'b0) || host_rd;
  assign bank_rd_addr = host_rd ? host_addr : xreq_addr;
  always_ff @(posedge clk) begin
    if (xgnt) begin
      sel_q <= xreq_bank;
      pe1_q <= pe1_mem[xreq_addr];
    end
  end
  assign xrdata = sel_q ? pe1_q : bank_rd_data;

  // ---- T(Gbar) memory port monitor ----
  coo_t ext_seen [$];
  always @(posedge clk) if (ext_we && rst_n) ext_seen.push_back(ext_wdata);

  // ---- helpers ----
  function automatic logic [31:0] fx(input real x);
    return 32'($rtoi(x * 1073741824.0 + (x >= 0 ? 0.5 : -0.5)));
  endfunction
  function automatic real unfx(input logic [31:0] v);
    return real'($signed(v)) / 1073741824.0;
  endfunction
  function automatic coo_t tup(input int r, input int c, input real re, input real im);
    return '{row: r, col: c, val: '{re: fx(re), im: fx(im)}};
  endfunction

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("%0t FAIL: %s", $time, what); end
  endtask

  task automatic send(input pe_cmd_t c);
    @(negedge clk);
    cmd = c; start = 1;
    @(negedge clk);
    start = 0;
  endtask

  task automatic wait_idle(output int busy_cycles);
    busy_cycles = 0;
    while (!idle) begin
      if (busy) busy_cycles++;
      @(negedge clk);
    end
  endtask

  // gate lists, as the COO matrix generator would give them
  coo_t cx [4], h [4], s [2];

  initial begin
    real psi_re [N], psi_im [N], u_re [N][N], u_im [N][N];
    real r2;
    pe_cmd_t c;
    int bc;
    r2 = 1.0 / $sqrt(2.0);
    cx = '{tup(0,0,1,0), tup(1,1,1,0), tup(2,3,1,0), tup(3,2,1,0)};
    h  = '{tup(0,0,r2,0), tup(0,1,r2,0), tup(1,0,r2,0), tup(1,1,-r2,0)};
    s  = '{tup(0,0,1,0), tup(1,1,0,1)};

    // reference U = CX (x) H (x) S, dense
    for (int r = 0; r < N; r++) for (int q = 0; q < N; q++) begin u_re[r][q] = 0; u_im[r][q] = 0; end
    foreach (cx[a]) foreach (h[b]) foreach (s[d]) begin
      int r, q;
      real hr, sr, si;
      r = int'(cx[a].row) * 4 + int'(h[b].row) * 2 + int'(s[d].row);
      q = int'(cx[a].col) * 4 + int'(h[b].col) * 2 + int'(s[d].col);
      hr = unfx(h[b].val.re);
      sr = unfx(s[d].val.re); si = unfx(s[d].val.im);
      u_re[r][q] = hr * sr;
      u_im[r][q] = hr * si;
    end

    for (int k = 0; k < N; k++) begin
      psi_re[k] = (real'($urandom_range(2000)) - 1000.0) / 5000.0;
      psi_im[k] = (real'($urandom_range(2000)) - 1000.0) / 5000.0;
    end
    repeat (2) @(negedge clk);
    rst_n = 1;

    // 1. state: even indices to PE 0, odd ones to the modelled PE 1
    for (int k = 0; k < N; k++) begin
      if (k % 2 == 0) begin
        @(negedge clk);
        hw_en = 1; hw_addr = AW'(k / 2); hw_data = tup(k, 0, psi_re[k], psi_im[k]);
      end else begin
        pe1_mem[k / 2] = tup(k, 0, psi_re[k], psi_im[k]);
      end
    end
    @(negedge clk); hw_en = 0;

    // 2. T(Gbar) = CX into the T(Gbar) memory port
    c = '0; c.op = PE_TP; c.src = MEM_UNIT; c.dst = MEM_EXT; c.msize = 2'd2; c.nnz = 3'd4;
    for (int j = 0; j < 4; j++) c.gate[j] = cx[j];
    send(c); wait_idle(bc);
    check(ext_seen.size() == 4 && list_cnt == 4, "T(Gbar) list length");
    for (int j = 0; j < 4 && j < ext_seen.size(); j++)
      check(ext_seen[j] == cx[j], "T(Gbar) tuple");

    // 3. T(G) = H (x) S, last pass filtered into LDM1
    c = '0; c.op = PE_TP; c.src = MEM_UNIT; c.dst = MEM_SCR; c.msize = 2'd1; c.nnz = 3'd4;
    for (int j = 0; j < 4; j++) c.gate[j] = h[j];
    send(c); wait_idle(bc);
    check(list_cnt == 4 && bc == 4, "first T(G) pass: 4 tuples, 4 cycles");
    c = '0; c.op = PE_TP; c.src = MEM_SCR; c.dst = MEM_LDM1; c.filter = 1'b1; c.msize = 2'd1; c.nnz = 3'd2;
    for (int j = 0; j < 2; j++) c.gate[j] = s[j];
    send(c); wait_idle(bc);
    check(list_cnt == 4 && bc == 8, "filtered T(G) pass: 4 of 8 tuples kept, 8 cycles");
    for (int i = 0; i < 4; i++)
      check(dut.u_ldm1.mem[i].row % 2 == 0, "LDM1 holds only owned rows");

    // 4. clear N/P words
    c = '0; c.op = PE_CLEAR; c.clear_cnt = N / 2;
    send(c); wait_idle(bc);
    check(bc == N / 2, "clear: one word per cycle");

    // 5. one MM command per T(Gbar) tuple
    foreach (cx[t]) begin
      c = '0; c.op = PE_MM; c.gbar = cx[t]; c.log_b = 5'd2; c.msize = 2'd1;
      send(c);
      while (busy) @(negedge clk);
    end
    wait_idle(bc);
    check(stall_cnt > 0, "crossbar stalls happened");

    // 6. read PE 0's half of the new state
    cur = 1'b1;
    for (int k = 0; k < N; k += 2) begin
      real er, ei, wr, wi;
      @(negedge clk);
      host_rd = 1; host_addr = AW'(k / 2);
      @(negedge clk);
      host_rd = 0;
      wr = 0; wi = 0;
      for (int q = 0; q < N; q++) begin
        wr += u_re[k][q] * psi_re[q] - u_im[k][q] * psi_im[q];
        wi += u_re[k][q] * psi_im[q] + u_im[k][q] * psi_re[q];
      end
      er = unfx(bank_rd_data.val.re) - wr;
      ei = unfx(bank_rd_data.val.im) - wi;
      checks++;
      if (er > 1e-6 || er < -1e-6 || ei > 1e-6 || ei < -1e-6 || int'(bank_rd_data.row) != k) begin
        failures++;
        $display("FAIL: amplitude %0d = (%f,%f) expected (%f,%f)", k,
                 unfx(bank_rd_data.val.re), unfx(bank_rd_data.val.im), wr, wi);
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
