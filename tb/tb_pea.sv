// tb_pea: self-checking test of the processing element array with its read
// crossbar.
//
// Four PEs (NUM_PE = 4) with 64-word buffers run one fused group on five
// qubits, U = CX (x) H (x) S (x) H (N = 32, Nbar = 4, B = 8). The testbench
// sends the commands a PEA controller would:
//   TP unit (x) CX into the T(Gbar) memory port (written by PE 0 only);
//   TP unit (x) H into LDM1, (x) S into scratch, (x) H back into LDM1 with
//   the ownership filter on (the last pass always lands in LDM1);
//   CLEAR of N/P words; one MM command per T(Gbar) tuple, each sent once
//   any_busy drops; a wait for all_idle.
// Then cur is flipped and every amplitude is read back through the host read
// ports and compared with U |psi> worked out here. It also checks the T(Gbar)
// list that reaches the memory port, list_cnt0, that all_idle and any_busy
// agree with the commands, and that the crossbar stalled (with H as the last
// factor, PE 0 and PE 1 both start on column 0, so they ask for the same bank
// in the same cycle).
module tb_pea;
  import qea_pkg::*;

  localparam int unsigned NUM_PE = 4;
  localparam int unsigned DEPTH  = 64;
  localparam int unsigned AW     = $clog2(DEPTH);
  localparam int N = 32;

  logic              clk = 1'b0, rst_n = 1'b0;
  logic              start = 1'b0;
  pe_cmd_t           cmd = '0;
  logic              cur = 1'b0;
  logic              any_busy, all_idle;
  logic [IDX_W-1:0]  list_cnt0, stalls;
  logic              hw_en   [NUM_PE];
  logic [AW-1:0]     hw_addr [NUM_PE];
  coo_t              hw_data = '0;
  logic              hr_en   [NUM_PE];
  logic [AW-1:0]     hr_addr [NUM_PE];
  coo_t              hr_data [NUM_PE];
  logic              ext_we;
  logic [IDX_W-1:0]  ext_waddr;
  coo_t              ext_wdata;
  int checks = 0, failures = 0;

  pea #(.NUM_PE(NUM_PE), .DEPTH(DEPTH)) dut (.*);

  always #5 clk = ~clk;

  coo_t ext_seen [$];
  always @(posedge clk) if (ext_we && rst_n) ext_seen.push_back(ext_wdata);

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

  task automatic wait_all();
    int guard;
    guard = 0;
    while (!all_idle && guard < 10000) begin @(negedge clk); guard++; end
    check(all_idle && !any_busy, "array idle after the command");
  endtask

  task automatic tp(input mem_sel_e src, input mem_sel_e dst, input bit filt,
                    input int msz, input coo_t g [$]);
    pe_cmd_t c;
    c = '0; c.op = PE_TP; c.src = src; c.dst = dst; c.filter = filt;
    c.msize = 2'(msz); c.nnz = 3'(g.size());
    foreach (g[j]) c.gate[j] = g[j];
    send(c);
    wait_all();
  endtask

  coo_t cx [$], h [$], s [$];

  initial begin
    real psi_re [N], psi_im [N], u_re [N][N], u_im [N][N];
    real r2;
    pe_cmd_t c;
    for (int p = 0; p < NUM_PE; p++) begin hw_en[p] = 0; hw_addr[p] = '0; hr_en[p] = 0; hr_addr[p] = '0; end
    r2 = 1.0 / $sqrt(2.0);
    cx = '{tup(0,0,1,0), tup(1,1,1,0), tup(2,3,1,0), tup(3,2,1,0)};
    h  = '{tup(0,0,r2,0), tup(0,1,r2,0), tup(1,0,r2,0), tup(1,1,-r2,0)};
    s  = '{tup(0,0,1,0), tup(1,1,0,1)};

    for (int r = 0; r < N; r++) for (int q = 0; q < N; q++) begin u_re[r][q] = 0; u_im[r][q] = 0; end
    foreach (cx[a]) foreach (h[b]) foreach (s[d]) foreach (h[e]) begin
      int r, q;
      r = int'(cx[a].row) * 8 + int'(h[b].row) * 4 + int'(s[d].row) * 2 + int'(h[e].row);
      q = int'(cx[a].col) * 8 + int'(h[b].col) * 4 + int'(s[d].col) * 2 + int'(h[e].col);
      u_re[r][q] = unfx(h[b].val.re) * unfx(s[d].val.re) * unfx(h[e].val.re);
      u_im[r][q] = unfx(h[b].val.re) * unfx(s[d].val.im) * unfx(h[e].val.re);
    end
    for (int k = 0; k < N; k++) begin
      psi_re[k] = (real'($urandom_range(2000)) - 1000.0) / 8000.0;
      psi_im[k] = (real'($urandom_range(2000)) - 1000.0) / 8000.0;
    end
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    check(all_idle && !any_busy, "idle after reset");

    for (int k = 0; k < N; k++) begin
      @(negedge clk);
      for (int p = 0; p < NUM_PE; p++) begin hw_en[p] = (p == k % NUM_PE); hw_addr[p] = AW'(k / NUM_PE); end
      hw_data = tup(k, 0, psi_re[k], psi_im[k]);
    end
    @(negedge clk);
    for (int p = 0; p < NUM_PE; p++) hw_en[p] = 0;

    tp(MEM_UNIT, MEM_EXT, 0, 2, cx);
    check(ext_seen.size() == 4 && list_cnt0 == 4, "T(Gbar) list written once, by PE 0");
    for (int j = 0; j < 4 && j < ext_seen.size(); j++) check(ext_seen[j] == cx[j], "T(Gbar) tuple");
    tp(MEM_UNIT, MEM_LDM1, 0, 1, h);
    tp(MEM_LDM1, MEM_SCR, 0, 1, s);
    check(list_cnt0 == 8, "H (x) S has 8 tuples");
    tp(MEM_SCR, MEM_LDM1, 1, 1, h);
    check(list_cnt0 == 8, "PE 0 keeps 8 of the 32 tuples of H (x) S (x) H");

    c = '0; c.op = PE_CLEAR; c.clear_cnt = N / NUM_PE;
    send(c);
    wait_all();

    foreach (cx[t]) begin
      int guard;
      c = '0; c.op = PE_MM; c.gbar = cx[t]; c.log_b = 5'd3; c.msize = 2'd1;
      send(c);
      guard = 0;
      while (any_busy && guard < 1000) begin @(negedge clk); guard++; end
    end
    wait_all();
    check(stalls > 0, "crossbar stalls happened");

    cur = 1'b1;
    for (int k = 0; k < N; k++) begin
      real er, ei, wr, wi;
      coo_t d;
      @(negedge clk);
      hr_en[k % NUM_PE] = 1; hr_addr[k % NUM_PE] = AW'(k / NUM_PE);
      @(negedge clk);
      hr_en[k % NUM_PE] = 0;
      d = hr_data[k % NUM_PE];
      wr = 0; wi = 0;
      for (int q = 0; q < N; q++) begin
        wr += u_re[k][q] * psi_re[q] - u_im[k][q] * psi_im[q];
        wi += u_re[k][q] * psi_im[q] + u_im[k][q] * psi_re[q];
      end
      er = unfx(d.val.re) - wr;
      ei = unfx(d.val.im) - wi;
      checks++;
      if (er > 1e-6 || er < -1e-6 || ei > 1e-6 || ei < -1e-6 || int'(d.row) != k) begin
        failures++;
        $display("FAIL: amplitude %0d = (%f,%f) expected (%f,%f)", k,
                 unfx(d.val.re), unfx(d.val.im), wr, wi);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
