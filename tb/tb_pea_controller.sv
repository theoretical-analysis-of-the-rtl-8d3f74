// tb_pea_controller: self-checking test of the PEA controller's instruction
// sequencing.
//
// The controller (16 PEs, default sizes) runs a three-group program from a
// modelled gate memory. A coo_matrix_generator turns instructions into gate
// lists, as in the full design. The processing element array is modelled: on
// every start pulse it records the command, stays busy and then not idle for
// random numbers of cycles, and reports the list length PE 0 would reach
// (gate entries times the source list's length). The T(Gbar) memory is an
// array of random tuples.
// The commands are checked against the schedule rules:
//   - every T(Gbar) gate, then every T(G) gate, makes one TP pass, in program
//     order within its part, with that gate's COO list, size and count;
//   - the first pass of a part reads the unit tuple, each later pass reads
//     what the previous one wrote, no pass reads and writes the same buffer,
//     the last T(Gbar) pass writes the T(Gbar) memory and the last T(G) pass
//     writes LDM1 with the ownership filter, and no other pass filters;
//   - then one CLEAR of Nbar * B / P words, then one MM command per T(Gbar)
//     tuple, in order, carrying that tuple and log2 B;
//   - TP and CLEAR start only when the array is idle, MM only when it is not
//     busy; cur flips once per group; done comes after HALT;
//   - the activity counters match the number of groups, passes and tuples.
module tb_pea_controller;
  import qea_pkg::*;

  localparam int unsigned NUM_PE = 16;
  localparam int unsigned GATE_AW = 10;
  localparam int unsigned TGBAR_AW = 16;

  logic                clk = 1'b0, rst_n = 1'b0;
  logic                start = 1'b0;
  logic                busy, done;
  logic                gm_rd_en;
  logic [GATE_AW-1:0]  gm_raddr;
  instr_t              gm_rdata = '0;
  instr_t              gen_instr;
  coo_t [MAX_NNZ-1:0]  gen_entries;
  logic [2:0]          gen_nnz;
  logic [1:0]          gen_msize;
  logic                tg_rd_en;
  logic [TGBAR_AW-1:0] tg_raddr;
  coo_t                tg_rdata = '0;
  logic                pe_start;
  pe_cmd_t             pe_cmd;
  logic                cur;
  logic                any_busy = 1'b0, all_idle = 1'b1;
  logic [IDX_W-1:0]    list_cnt0 = '0;
  logic [31:0]         cycles, n_groups, n_tp_passes, n_mm_tuples;
  int checks = 0, failures = 0;

  pea_controller #(.NUM_PE(NUM_PE), .GATE_AW(GATE_AW), .TGBAR_AW(TGBAR_AW)) dut (.*);

  coo_matrix_generator u_gen (.instr(gen_instr), .entries(gen_entries), .nnz(gen_nnz), .msize(gen_msize));

  // reference generator for the expected gate lists
  instr_t             ref_instr = '0;
  coo_t [MAX_NNZ-1:0] ref_entries;
  logic [2:0]         ref_nnz;
  logic [1:0]         ref_msize;
  coo_matrix_generator u_ref (.instr(ref_instr), .entries(ref_entries), .nnz(ref_nnz), .msize(ref_msize));

  always #5 clk = ~clk;

  // ---- memories ----
  instr_t prog [64];
  coo_t   tg_mem [64];
  always_ff @(posedge clk) begin
    if (gm_rd_en) gm_rdata <= prog[gm_raddr[5:0]];
    if (tg_rd_en) tg_rdata <= tg_mem[tg_raddr[5:0]];
  end

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("%0t FAIL: %s", $time, what); end
  endtask

  // ---- array model ----
  pe_cmd_t cmds [$];
  logic    cur_at [$];
  int busy_left = 0, idle_left = 0;
  always @(negedge clk) begin
    if (rst_n) begin
      if (busy_left > 0) busy_left--;
      if (idle_left > 0) idle_left--;
      if (pe_start) begin
        cmds.push_back(pe_cmd);
        cur_at.push_back(cur);
        if (pe_cmd.op == PE_MM) check(!any_busy, "MM broadcast while the array is busy");
        else                    check(all_idle, "TP/CLEAR started while the array is not idle");
        if (pe_cmd.op == PE_TP)
          list_cnt0 = (pe_cmd.src == MEM_UNIT) ? IDX_W'(pe_cmd.nnz) : list_cnt0 * IDX_W'(pe_cmd.nnz);
        busy_left = int'($urandom_range(4, 1));
        idle_left = busy_left + int'($urandom_range(3));
      end
      any_busy = (busy_left > 0);
      all_idle = (idle_left == 0);
    end
  end

  function automatic logic [31:0] fx(input real x);
    return 32'($rtoi(x * 1073741824.0 + (x >= 0 ? 0.5 : -0.5)));
  endfunction

  function automatic instr_t mk(input opcode_e op, input gate_e g, input real th);
    instr_t i;
    i = '0; i.op = op; i.gate = g; i.pa = fx($cos(th)); i.pb = fx($sin(th));
    return i;
  endfunction

  initial begin
    int n_prog, cmd_i, groups, passes, tuples;
    int grp_start [$];
    n_prog = 0;
    for (int i = 0; i < 64; i++) begin
      prog[i] = '0;
      tg_mem[i] = '{row: $urandom, col: $urandom, val: '{re: $urandom, im: $urandom}};
    end
    // group 0
    prog[n_prog++] = mk(OP_GBAR, G_X, 0);
    prog[n_prog++] = mk(OP_GBAR, G_CX, 0);
    prog[n_prog++] = mk(OP_G, G_H, 0);
    prog[n_prog++] = mk(OP_G, G_CH, 0);
    prog[n_prog++] = mk(OP_G, G_RX, 0.35);
    prog[n_prog++] = mk(OP_EXEC, G_I, 0);
    // group 1: parts interleaved in the listing
    prog[n_prog++] = mk(OP_G, G_S, 0);
    prog[n_prog++] = mk(OP_GBAR, G_T, 0);
    prog[n_prog++] = mk(OP_G, G_CZ, 0);
    prog[n_prog++] = mk(OP_EXEC, G_I, 0);
    // group 2: three T(Gbar) passes
    prog[n_prog++] = mk(OP_GBAR, G_CRZ, 0.5);
    prog[n_prog++] = mk(OP_GBAR, G_Y, 0);
    prog[n_prog++] = mk(OP_GBAR, G_H, 0);
    prog[n_prog++] = mk(OP_G, G_Z, 0);
    prog[n_prog++] = mk(OP_EXEC, G_I, 0);
    prog[n_prog++] = mk(OP_HALT, G_I, 0);

    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    check(!busy && !done, "idle after reset");
    start = 1;
    @(negedge clk);
    start = 0;
    begin
      int guard;
      guard = 0;
      while (!done && guard < 20000) begin @(negedge clk); guard++; end
    end
    check(done && !busy, "done after HALT");

    // ---- check the recorded command stream ----
    cmd_i = 0; groups = 0; passes = 0; tuples = 0;
    begin
      int pc;
      pc = 0;
      while (prog[pc].op != OP_HALT) begin
        instr_t part [2][$];
        int e, nbar, log_b;
        part[0].delete();
        part[1].delete();
        e = pc;
        while (prog[e].op != OP_EXEC) begin
          if (prog[e].op == OP_GBAR) part[0].push_back(prog[e]);
          else                       part[1].push_back(prog[e]);
          e++;
        end
        nbar = 1; log_b = 0;
        for (int pt = 0; pt < 2; pt++) begin
          mem_sel_e prev;
          prev = MEM_UNIT;
          foreach (part[pt][k]) begin
            pe_cmd_t c;
            bit last;
            last = (k == part[pt].size() - 1);
            ref_instr = part[pt][k];
            #1;
            if (cmd_i >= cmds.size()) begin check(0, "too few commands"); break; end
            c = cmds[cmd_i];
            check(cur_at[cmd_i] == 1'(groups), "cur selects this group's state buffer");
            cmd_i++; passes++;
            check(c.op == PE_TP, "TP pass expected");
            check(c.nnz == ref_nnz && c.msize == ref_msize, "pass gate size and count");
            for (int j = 0; j < int'(ref_nnz); j++) check(c.gate[j] == ref_entries[j], "pass gate entry");
            check(c.src == prev, "pass reads what the previous pass wrote");
            check(c.src != c.dst, "pass reads and writes different buffers");
            if (last) check(c.dst == (pt == 0 ? MEM_EXT : MEM_LDM1) && c.filter == (pt == 1),
                            "last pass of the part goes to its final place");
            else      check((c.dst == MEM_LDM1 || c.dst == MEM_SCR) && !c.filter, "middle pass stays in the PE");
            prev = c.dst;
            if (pt == 0) nbar *= int'(ref_nnz);
            else         log_b += int'(ref_msize);
          end
        end
        if (cmd_i < cmds.size()) begin
          check(cmds[cmd_i].op == PE_CLEAR && int'(cmds[cmd_i].clear_cnt) == (nbar << log_b) / NUM_PE,
                "clear of Nbar * B / P words");
          cmd_i++;
        end
        for (int t = 0; t < nbar; t++) begin
          if (cmd_i >= cmds.size()) begin check(0, "too few MM commands"); break; end
          check(cmds[cmd_i].op == PE_MM && cmds[cmd_i].gbar == tg_mem[t] && int'(cmds[cmd_i].log_b) == log_b,
                "MM command carries the next T(Gbar) tuple");
          cmd_i++; tuples++;
        end
        groups++;
        pc = e + 1;
      end
    end
    check(cmd_i == cmds.size(), "no extra commands");
    check(cur == 1'(groups), "cur flipped once per group");
    check(n_groups == 32'(groups) && n_tp_passes == 32'(passes) && n_mm_tuples == 32'(tuples),
          "activity counters");
    check(cycles > 0, "cycle counter runs");
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
