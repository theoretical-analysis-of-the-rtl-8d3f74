// pea_controller: runs the instruction list on the processing element array.
//
// The program is a sequence of fused groups. Each group lists its gates, each
// tagged OP_GBAR (a factor of T(Gbar), the high-order qubits) or OP_G (a factor
// of T(G), the low-order qubits), and ends with OP_EXEC; OP_HALT ends the
// program. Within each part the first gate listed is the most significant.
// For one group the controller
//   1. scans the group, counting the gates of each part and adding up
//      log_b = log2(N/Nbar) from the matrix sizes of the T(G) gates;
//   2. builds T(Gbar): one tensor-product pass per OP_GBAR gate, the list
//      ping-ponging between LDM1 and the scratch buffer so that the last pass
//      lands in the T(Gbar) memory (written by PE 0); Nbar is PE 0's count;
//   3. builds T(G) the same way, the last pass landing in LDM1 with the
//      ownership filter on, so every PE keeps only the rows it owns;
//   4. clears the next-state buffer (Nbar * B / P words per PE);
//   5. reads T(Gbar) tuple by tuple and broadcasts each one with a PE_MM
//      command, waiting only until every PE has issued its work (not until
//      it has drained) before sending the next; after the last it waits for
//      the array to drain;
//   6. flips cur, so |psi_t+1> becomes the input of the next group.
// Each gate instruction is turned into its COO list by the COO matrix
// generator (gen_instr out, gen_* in).
//
// The paper gives the controller's job (fetch instructions from the gate
// memory at a program counter, drive the COO matrix generator, start the PEs
// and see them done, with T(Gbar) computed before T(G)); the instruction
// format, the pass schedule and the ping-pong are this design's.
//
// Timing: 2 cycles per instruction for the scan; per TP pass 2 cycles plus the
// pass; per T(Gbar) tuple 2 cycles plus the PEs' issue time.
module pea_controller
  import qea_pkg::*;
#(
  parameter int unsigned NUM_PE    = 16,
  parameter int unsigned GATE_AW   = 10,
  parameter int unsigned TGBAR_AW  = 16,
  localparam int unsigned LOG_P = $clog2(NUM_PE)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  output logic                 busy,
  output logic                 done,
  // gate memory read port
  output logic                 gm_rd_en,
  output logic [GATE_AW-1:0]   gm_raddr,
  input  instr_t               gm_rdata,
  // COO matrix generator
  output instr_t               gen_instr,
  input  coo_t [MAX_NNZ-1:0]   gen_entries,
  input  logic [2:0]           gen_nnz,
  input  logic [1:0]           gen_msize,
  // T(Gbar) memory read port
  output logic                 tg_rd_en,
  output logic [TGBAR_AW-1:0]  tg_raddr,
  input  coo_t                 tg_rdata,
  // processing element array
  output logic                 pe_start,
  output pe_cmd_t              pe_cmd,
  output logic                 cur,
  input  logic                 any_busy,
  input  logic                 all_idle,
  input  logic [IDX_W-1:0]     list_cnt0,
  // activity counters
  output logic [31:0]          cycles,
  output logic [31:0]          n_groups,
  output logic [31:0]          n_tp_passes,
  output logic [31:0]          n_mm_tuples
);

  typedef enum logic [3:0] {
    S_IDLE, S_SCAN_RD, S_SCAN_EV, S_TP_RD, S_TP_GO, S_TP_WAIT,
    S_CLR_GO, S_CLR_WAIT, S_MM_RD, S_MM_GO, S_MM_WAIT, S_MM_DRAIN, S_DONE
  } state_e;

  state_e state;
  logic [GATE_AW-1:0] pc, grp_pc, exec_pc;
  logic [IDX_W-1:0]   mbar, mg, k, nbar_cnt, g_idx;
  logic [4:0]         log_b;
  logic               part_g;     // 0: building T(Gbar), 1: building T(G)
  mem_sel_e           prev_dst;

  // pass schedule for the gate at hand
  logic [IDX_W-1:0] rem;
  mem_sel_e         dst;
  logic             op_match;

  assign rem      = (part_g ? mg : mbar) - 1'b1 - k;
  assign op_match = part_g ? (gm_rdata.op == OP_G) : (gm_rdata.op == OP_GBAR);
  always_comb begin
    if (rem == 0)   dst = part_g ? MEM_LDM1 : MEM_EXT;
    else if (rem[0]) dst = MEM_SCR;
    else             dst = MEM_LDM1;
  end

  assign gen_instr = gm_rdata;

  always_comb begin
    gm_rd_en = (state == S_SCAN_RD) || (state == S_TP_RD);
    gm_raddr = pc;
    tg_rd_en = (state == S_MM_RD);
    tg_raddr = TGBAR_AW'(g_idx);
  end

  // command broadcast
  always_comb begin
    pe_cmd           = '0;
    pe_cmd.log_b     = log_b;
    pe_start         = 1'b0;
    pe_cmd.op        = PE_TP;
    pe_cmd.src       = (k == 0) ? MEM_UNIT : prev_dst;
    pe_cmd.dst       = dst;
    pe_cmd.filter    = part_g && (rem == 0);
    pe_cmd.msize     = gen_msize;
    pe_cmd.nnz       = gen_nnz;
    pe_cmd.gate      = gen_entries;
    pe_cmd.gbar      = tg_rdata;
    pe_cmd.clear_cnt = (nbar_cnt << log_b) >> LOG_P;
    unique case (state)
      S_TP_GO:  pe_start = (gm_rdata.op != OP_EXEC) && op_match;
      S_CLR_GO: begin pe_cmd.op = PE_CLEAR; pe_start = 1'b1; end
      S_MM_GO:  begin pe_cmd.op = PE_MM;    pe_start = 1'b1; end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state       <= S_IDLE;
      pc          <= '0;
      grp_pc      <= '0;
      exec_pc     <= '0;
      mbar        <= '0;
      mg          <= '0;
      k           <= '0;
      nbar_cnt    <= '0;
      g_idx       <= '0;
      log_b       <= '0;
      part_g      <= 1'b0;
      prev_dst    <= MEM_UNIT;
      cur         <= 1'b0;
      done        <= 1'b0;
      cycles      <= '0;
      n_groups    <= '0;
      n_tp_passes <= '0;
      n_mm_tuples <= '0;
    end else begin
      if (state != S_IDLE && state != S_DONE) cycles <= cycles + 1'b1;
      unique case (state)
        S_IDLE: if (start) begin
          state       <= S_SCAN_RD;
          pc          <= '0;
          grp_pc      <= '0;
          mbar        <= '0;
          mg          <= '0;
          log_b       <= '0;
          cur         <= 1'b0;
          done        <= 1'b0;
          cycles      <= '0;
          n_groups    <= '0;
          n_tp_passes <= '0;
          n_mm_tuples <= '0;
        end
        S_SCAN_RD: state <= S_SCAN_EV;
        S_SCAN_EV: begin
          unique case (gm_rdata.op)
            OP_GBAR: begin mbar <= mbar + 1'b1; pc <= pc + 1'b1; state <= S_SCAN_RD; end
            OP_G: begin
              mg    <= mg + 1'b1;
              log_b <= log_b + 5'(gen_msize);
              pc    <= pc + 1'b1;
              state <= S_SCAN_RD;
            end
            OP_EXEC: begin
              exec_pc <= pc;
              pc      <= grp_pc;
              k       <= '0;
              part_g  <= 1'b0;
              state   <= S_TP_RD;
            end
            default: state <= S_DONE;
          endcase
        end
        S_TP_RD: state <= S_TP_GO;
        S_TP_GO: begin
          if (gm_rdata.op == OP_EXEC) begin
            if (!part_g) begin
              part_g <= 1'b1;
              pc     <= grp_pc;
              k      <= '0;
              state  <= S_TP_RD;
            end else begin
              state  <= S_CLR_GO;
            end
          end else if (op_match) begin
            prev_dst <= dst;
            state    <= S_TP_WAIT;
            n_tp_passes <= n_tp_passes + 1'b1;
          end else begin
            pc    <= pc + 1'b1;
            state <= S_TP_RD;
          end
        end
        S_TP_WAIT: if (all_idle) begin
          if (!part_g && rem == 0) nbar_cnt <= list_cnt0;
          k     <= k + 1'b1;
          pc    <= pc + 1'b1;
          state <= S_TP_RD;
        end
        S_CLR_GO: state <= S_CLR_WAIT;
        S_CLR_WAIT: if (all_idle) begin
          g_idx <= '0;
          state <= S_MM_RD;
        end
        S_MM_RD: state <= S_MM_GO;
        S_MM_GO: begin
          n_mm_tuples <= n_mm_tuples + 1'b1;
          state <= S_MM_WAIT;
        end
        S_MM_WAIT: if (!any_busy) begin
          g_idx <= g_idx + 1'b1;
          state <= (g_idx == nbar_cnt - 1'b1) ? S_MM_DRAIN : S_MM_RD;
        end
        S_MM_DRAIN: if (all_idle) begin
          cur      <= ~cur;
          pc       <= exec_pc + 1'b1;
          grp_pc   <= exec_pc + 1'b1;
          mbar     <= '0;
          mg       <= '0;
          log_b    <= '0;
          n_groups <= n_groups + 1'b1;
          state    <= S_SCAN_RD;
        end
        S_DONE: begin
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy = (state != S_IDLE);

endmodule
