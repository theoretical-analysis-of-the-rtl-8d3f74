// tb_qea_16q: a 16-qubit run at the accelerator's default size, the largest
// state the default configuration holds on chip (16 PEs x 4096 words =
// 2^16 amplitudes).
//
// The fused group is U = (H (x) H) (x) (X^(x)12 (x) CX): the two top qubits
// form T(Gbar) (Nbar = 4, 16 tuples), the 14 low qubits T(G) (B = 2^14,
// 2^14 tuples, 1024 per PE). The intermediate T(G) list before the last pass
// has 4096 tuples, exactly one full LDM, so this group also probes the
// buffer limits. The reference is worked out directly:
// X^(x)12 (x) CX is the permutation f(l) = l ^ 0x3FFC ^ (bit 1 of l), so
//   psi'[i*B + f(l)] = sum_j (H (x) H)[i][j] * psi[j*B + l].
// Checked: the state transfer takes one cycle per amplitude (the paper's
// C_write = N), the run completes, the controller counters, and all 65536
// amplitudes of the result. The run's cycle count is printed next to the
// paper's estimate (Nbar + N/Nbar)/P + N/P for the same group.
module tb_qea_16q;
  import qea_pkg::*;

  localparam int NQ = 16;
  localparam int N  = 1 << NQ;
  localparam int LOG_B = 14;
  localparam int B  = 1 << LOG_B;
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

  function automatic logic [31:0] fx(input real x);
    return 32'($rtoi(x * 1073741824.0 + (x >= 0 ? 0.5 : -0.5)));
  endfunction
  function automatic real unfx(input logic [31:0] v);
    return real'($signed(v)) / 1073741824.0;
  endfunction

  task automatic bus_write(input logic [31:0] a, input logic [127:0] d);
    @(negedge clk);
    wr_valid = 1'b1; wr_addr = a; wr_data = d;
    @(negedge clk);
    wr_valid = 1'b0;
  endtask

  real psi_re [N], psi_im [N];

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    instr_t prog [$];
    instr_t ins;
    logic [127:0] st;
    int t0, t1, n_bad;
    ins = '0; ins.op = OP_GBAR; ins.gate = G_H; prog.push_back(ins); prog.push_back(ins);
    ins.op = OP_G; ins.gate = G_X;
    repeat (12) prog.push_back(ins);
    ins.gate = G_CX; prog.push_back(ins);
    ins = '0; ins.op = OP_EXEC; prog.push_back(ins);
    ins.op = OP_HALT; prog.push_back(ins);

    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    foreach (prog[i]) bus_write(32'h1000_0000 | 32'(i), prog[i]);

    for (int k = 0; k < N; k++) begin
      psi_re[k] = (real'($urandom_range(2000)) - 1000.0) / 10000.0;
      psi_im[k] = (real'($urandom_range(2000)) - 1000.0) / 10000.0;
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

    bus_write(32'h0000_0000, 128'h1);
    t1 = 0;
    while (!done) begin @(negedge clk); t1++; end

    @(negedge clk);
    rd_valid = 1'b1; rd_addr = 32'h0000_0000;
    @(negedge clk);
    rd_valid = 1'b0;
    st = rd_rsp_data;
    $display("run: %0d cycles (estimate (Nbar + N/Nbar)/P + N/P = %0d), groups=%0d tp_passes=%0d tgbar_tuples=%0d xbar_stalls=%0d",
             st[31:2], (4 + N / 4) / 16 + N / 16, st[63:32], st[95:64], st[127:96], xbar_stalls);
    checks++;
    if (st[63:32] != 1 || st[95:64] != 15 || st[127:96] != 16) begin
      failures++; $display("FAIL: counters");
    end

    // read back, one request per cycle, responses one cycle later
    n_bad = 0;
    for (int k = 0; k <= N; k++) begin
      @(negedge clk);
      if (k > 0) begin
        int q, i, kk, l;
        real wr, wi, er, ei;
        q = k - 1;
        i = q >> LOG_B;
        kk = q & (B - 1);
        // l = f^-1(kk) = f(kk)
        l = kk ^ 16'h3FFC;
        if (l & 2) l = l ^ 1;
        wr = 0; wi = 0;
        for (int j = 0; j < 4; j++) begin
          real h;
          h = ($countones(i & j) % 2 == 1) ? -0.5 : 0.5;
          wr += h * psi_re[j * B + l];
          wi += h * psi_im[j * B + l];
        end
        er = unfx(rd_rsp_data[63:32]) - wr;
        ei = unfx(rd_rsp_data[31:0]) - wi;
        checks++;
        if (!rd_rsp_valid || er > TOL || er < -TOL || ei > TOL || ei < -TOL || rd_rsp_data[127:96] != 32'(q)) begin
          failures++;
          if (n_bad++ < 8)
            $display("FAIL: amp %0d got (%f,%f) expected (%f,%f)", q,
                     unfx(rd_rsp_data[63:32]), unfx(rd_rsp_data[31:0]), wr, wi);
        end
      end
      rd_valid = (k < N);
      rd_addr = 32'h2000_0000 | 32'(k);
    end
    rd_valid = 1'b0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
