// tb_qea_top: end-to-end test of the accelerator at its default size
// (16 PEs, LDM depth 4096, T(Gbar) depth 65536).
//
// A 7-qubit circuit of four fused groups is loaded through the host bus,
// run, and the final state is read back and compared with a reference
// computed here in floating point: every gate matrix is written out from its
// textbook definition, the group operator is the dense Kronecker product of
// its gates and is applied to the state by plain matrix-vector product.
// The groups mix sparse gates in T(Gbar) with dense gates in T(G) (so T(G)
// has several entries per row, exercising the accumulator) and one-qubit
// with two-qubit gates (matrix sizes 2 and 4).
//
// Also checked: the host state transfer takes one cycle per amplitude; the
// controller's counters (groups, tensor-product passes, T(Gbar) tuples); and
// that each mechanism of the design happened at least once: a crossbar
// stall, a swap of the state buffers (more than one group ran), forwarding in
// the accumulator, a tuple dropped by the ownership filter, an ALU switch
// between tensor-product and multiply mode, and a pass with a 4x4 gate. The
// last four are counted by probes into the processing elements.
module tb_qea_top;
  import qea_pkg::*;

  localparam int NQ = 7;
  localparam int N  = 1 << NQ;
  localparam real TOL = 1.0e-6;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  logic wr_valid = 1'b0, rd_valid = 1'b0;
  logic [31:0] wr_addr = '0, rd_addr = '0;
  logic [127:0] wr_data = '0;
  logic rd_rsp_valid, done;
  logic [127:0] rd_rsp_data;
  logic [31:0] xbar_stalls;

  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  qea_top dut (
    .clk, .rst_n, .wr_valid, .wr_addr, .wr_data, .rd_valid, .rd_addr,
    .rd_rsp_valid, .rd_rsp_data, .done, .xbar_stalls
  );

  // ---------------- reference model ----------------
  real psi_re [N], psi_im [N];
  real nxt_re [N], nxt_im [N];
  // dense operator of the current group
  real u_re [N][N], u_im [N][N];
  real k_re [N][N], k_im [N][N];
  int  u_dim;

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

  // u <- u (x) gate
  task automatic kron_in(input gate_e g, input real th);
    real mr [4][4], mi [4][4];
    int d;
    gate_matrix(g, th, mr, mi, d);
    for (int r = 0; r < u_dim; r++) for (int c = 0; c < u_dim; c++)
      for (int a = 0; a < d; a++) for (int b = 0; b < d; b++) begin
        k_re[r*d+a][c*d+b] = u_re[r][c]*mr[a][b] - u_im[r][c]*mi[a][b];
        k_im[r*d+a][c*d+b] = u_re[r][c]*mi[a][b] + u_im[r][c]*mr[a][b];
      end
    u_dim = u_dim * d;
    for (int r = 0; r < u_dim; r++) for (int c = 0; c < u_dim; c++) begin
      u_re[r][c] = k_re[r][c]; u_im[r][c] = k_im[r][c];
    end
  endtask

  function automatic logic [31:0] fx(input real x);
    return 32'($rtoi(x * 1073741824.0 + (x >= 0 ? 0.5 : -0.5)));
  endfunction

  function automatic real unfx(input logic [31:0] v);
    return real'($signed(v)) / 1073741824.0;
  endfunction

  // ---------------- program ----------------
  typedef struct { opcode_e op; gate_e g; real th; } ins_t;
  ins_t prog [$];

  task automatic add(input opcode_e op, input gate_e g, input real th);
    ins_t i;
    i.op = op; i.g = g; i.th = th;
    prog.push_back(i);
  endtask

  function automatic bit uses_half(gate_e g);
    return g inside {G_RZ, G_RX, G_RY, G_CRZ, G_CRX, G_CRY};
  endfunction

  // ---------------- host bus ----------------
  task automatic bus_write(input logic [31:0] a, input logic [127:0] d);
    @(negedge clk);
    wr_valid = 1'b1; wr_addr = a; wr_data = d;
    @(negedge clk);
    wr_valid = 1'b0;
  endtask

  task automatic bus_read(input logic [31:0] a, output logic [127:0] d);
    @(negedge clk);
    rd_valid = 1'b1; rd_addr = a;
    @(negedge clk);
    rd_valid = 1'b0;
    if (!rd_rsp_valid) begin
      failures++;
      $display("FAIL: no read response for %h", a);
    end
    d = rd_rsp_data;
  endtask

  // mechanism counters, probed inside the processing elements:
  //   fwd_hits     accumulator read-modify-write that took the sum of the
  //                previous cycle (forwarding)
  //   filter_drops tensor-product results dropped by the ownership filter
  //   mode_flips   ALU switches between tensor-product and multiply mode
  //   wide_passes  tensor-product passes with a 4x4 gate
  int fwd_hits = 0, filter_drops = 0, mode_flips = 0, wide_passes = 0;
  for (genvar p = 0; p < 16; p++) begin : g_probe
    alu_mode_e last_mode = ALU_TP;
    always @(posedge clk) begin
      if (dut.u_pea.g_pe[p].u_pe.u_lsu.d1_valid && dut.u_pea.g_pe[p].u_pe.u_lsu.fw_valid &&
          dut.u_pea.g_pe[p].u_pe.u_lsu.fw_addr == dut.u_pea.g_pe[p].u_pe.u_lsu.d1_addr)
        fwd_hits++;
      if (dut.u_pea.g_pe[p].u_pe.u_lsu.in_valid && dut.u_pea.g_pe[p].u_pe.u_lsu.op == PE_TP &&
          !dut.u_pea.g_pe[p].u_pe.u_lsu.keep)
        filter_drops++;
      if (dut.u_pea.g_pe[p].u_pe.alu_in_valid) begin
        if (dut.u_pea.g_pe[p].u_pe.alu_mode != last_mode) mode_flips++;
        last_mode = dut.u_pea.g_pe[p].u_pe.alu_mode;
      end
    end
  end
  always @(posedge clk) if (dut.pe_start && dut.pe_cmd.op == PE_TP && dut.pe_cmd.msize == 2'd2) wide_passes++;

  // watchdog
  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int exp_groups, exp_passes, exp_tuples;
  int t0, t1;

  initial begin
    logic [127:0] d, st;
    // four fused groups on 7 qubits: 3 high qubits in T(Gbar), 4 in T(G)
    add(OP_GBAR, G_X, 0);     add(OP_GBAR, G_CX, 0);
    add(OP_G, G_H, 0);        add(OP_G, G_CH, 0);       add(OP_G, G_RX, 0.7);
    add(OP_EXEC, G_I, 0);
    add(OP_GBAR, G_T, 0);     add(OP_GBAR, G_Y, 0);     add(OP_GBAR, G_P, 1.1);
    add(OP_G, G_CRY, 0.9);    add(OP_G, G_SX, 0);       add(OP_G, G_Z, 0);
    add(OP_EXEC, G_I, 0);
    add(OP_GBAR, G_CP, -0.4); add(OP_GBAR, G_SDG, 0);
    add(OP_G, G_CRX, 1.3);    add(OP_G, G_CY, 0);
    add(OP_EXEC, G_I, 0);
    add(OP_GBAR, G_CRZ, 2.0);
    add(OP_G, G_RZ, 0.5);     add(OP_G, G_S, 0);        add(OP_G, G_CZ, 0);   add(OP_G, G_RY, -1.2);
    // this group puts 2 qubits in T(Gbar) and 5 in T(G)
    add(OP_EXEC, G_I, 0);
    add(OP_HALT, G_I, 0);

    repeat (3) @(negedge clk);
    rst_n = 1'b1;

    // gate memory
    foreach (prog[i]) begin
      instr_t ins;
      real a, b;
      a = uses_half(prog[i].g) ? $cos(prog[i].th/2) : $cos(prog[i].th);
      b = uses_half(prog[i].g) ? $sin(prog[i].th/2) : $sin(prog[i].th);
      ins = '0;
      ins.op = prog[i].op; ins.gate = prog[i].g;
      ins.pa = fx(a); ins.pb = fx(b);
      bus_write(32'h1000_0000 | 32'(i), ins);
    end

    // initial state
    for (int k = 0; k < N; k++) begin
      psi_re[k] = (real'($urandom_range(2000)) - 1000.0) / 12000.0;
      psi_im[k] = (real'($urandom_range(2000)) - 1000.0) / 12000.0;
    end
    t0 = 0;
    @(negedge clk);
    for (int k = 0; k < N; k++) begin
      wr_valid = 1'b1; wr_addr = 32'h2000_0000;
      wr_data = {32'(k), 32'd0, fx(psi_re[k]), fx(psi_im[k])};
      @(negedge clk);
      t0++;
    end
    wr_valid = 1'b0;
    checks++;
    if (t0 != N) begin failures++; $display("FAIL: state write took %0d cycles", t0); end

    // reference
    exp_groups = 0; exp_passes = 0; exp_tuples = 0;
    begin
      int gs;
      gs = 0;
      while (prog[gs].op != OP_HALT) begin
        int ge, nb;
        real mr [4][4], mi [4][4];
        int dd;
        ge = gs;
        while (prog[ge].op != OP_EXEC) ge++;
        u_dim = 1; u_re[0][0] = 1.0; u_im[0][0] = 0.0;
        nb = 0;
        for (int x = gs; x < ge; x++) if (prog[x].op == OP_GBAR) begin
          kron_in(prog[x].g, prog[x].th);
          gate_matrix(prog[x].g, prog[x].th, mr, mi, dd);
          nb += (dd == 4) ? 2 : 1;
          exp_passes++;
        end
        exp_tuples += (1 << nb);
        for (int x = gs; x < ge; x++) if (prog[x].op == OP_G) begin
          kron_in(prog[x].g, prog[x].th);
          exp_passes++;
        end
        if (u_dim != N) $fatal(1, "program does not cover %0d qubits", NQ);
        for (int r = 0; r < N; r++) begin
          nxt_re[r] = 0; nxt_im[r] = 0;
          for (int c = 0; c < N; c++) begin
            nxt_re[r] += u_re[r][c]*psi_re[c] - u_im[r][c]*psi_im[c];
            nxt_im[r] += u_re[r][c]*psi_im[c] + u_im[r][c]*psi_re[c];
          end
        end
        for (int r = 0; r < N; r++) begin psi_re[r] = nxt_re[r]; psi_im[r] = nxt_im[r]; end
        exp_groups++;
        gs = ge + 1;
      end
    end

    // run
    bus_write(32'h0000_0000, 128'h1);
    t1 = 0;
    while (!done) begin @(negedge clk); t1++; end

    bus_read(32'h0000_0000, st);
    $display("run: %0d cycles, groups=%0d tp_passes=%0d tgbar_tuples=%0d xbar_stalls=%0d",
             st[31:2], st[63:32], st[95:64], st[127:96], xbar_stalls);
    checks++;
    if (st[63:32] != 32'(exp_groups)) begin failures++; $display("FAIL: groups %0d, expected %0d", st[63:32], exp_groups); end
    checks++;
    if (st[95:64] != 32'(exp_passes)) begin failures++; $display("FAIL: passes %0d, expected %0d", st[95:64], exp_passes); end
    checks++;
    if (st[127:96] != 32'(exp_tuples)) begin failures++; $display("FAIL: tgbar tuples %0d, expected %0d", st[127:96], exp_tuples); end
    checks++;
    if (xbar_stalls == 0) begin failures++; $display("FAIL: crossbar never stalled"); end
    $display("mechanisms: forwarding=%0d filter_drops=%0d mode_flips=%0d wide_passes=%0d",
             fwd_hits, filter_drops, mode_flips, wide_passes);
    checks++;
    if (fwd_hits == 0) begin failures++; $display("FAIL: accumulator forwarding never happened"); end
    checks++;
    if (filter_drops == 0) begin failures++; $display("FAIL: ownership filter never dropped a tuple"); end
    checks++;
    if (mode_flips == 0) begin failures++; $display("FAIL: ALU never switched mode"); end
    checks++;
    if (wide_passes == 0) begin failures++; $display("FAIL: no pass with a 4x4 gate"); end
    checks++;
    if (exp_groups < 2) begin failures++; $display("FAIL: state buffers never swapped"); end

    // read back
    for (int k = 0; k < N; k++) begin
      real er, ei;
      bus_read(32'h2000_0000 | 32'(k), d);
      er = unfx(d[63:32]) - psi_re[k];
      ei = unfx(d[31:0]) - psi_im[k];
      checks++;
      if (er > TOL || er < -TOL || ei > TOL || ei < -TOL || d[127:96] != 32'(k)) begin
        failures++;
        if (failures < 10)
          $display("FAIL: amp %0d got (%f,%f) row %0d, expected (%f,%f)", k,
                   unfx(d[63:32]), unfx(d[31:0]), d[127:96], psi_re[k], psi_im[k]);
      end
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
