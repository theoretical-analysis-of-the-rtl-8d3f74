// pe_control: the sequencer ("PE Control") of one processing element.
//
// On start it latches the broadcast command and walks the PE through it:
//   PE_TP    tensor-product pass. For every tuple a of the source list (LDM1,
//            the scratch buffer, or the implicit {(0,0,1)}) and every entry b
//            of the gate's COO list it feeds (a, b) to the complex ALU, one
//            pair per cycle, a outer and b inner. The source list length is
//            the load/store unit's count of the previous pass.
//   PE_CLEAR writes clear_cnt zero amplitudes through the load/store unit.
//   PE_MM    for the broadcast T(Gbar) tuple (i, j, g) and every tuple
//            (k, l, G) of this PE's part of T(G) in LDM1 it needs the input
//            amplitude at global index c = j*B + l (B = 2^log_b). That
//            amplitude lives in PE c mod P at address c / P, so the sequencer
//            raises a request on the inter-PE read crossbar and holds the tuple
//            until the request is granted (a stall). On grant it passes
//            a = (i*B + k, 0, g), b = (k, l, G) to the ALU together with the
//            amplitude, which arrives one cycle later.
// busy is high while the command still issues work (while it is high in
// PE_MM the next T(Gbar) tuple cannot be accepted); idle is high when the
// command has issued everything and every result has been stored.
//
// The paper names PE Control and its Start / Done / Mode / Matrix-size signals;
// what it does step by step, the crossbar request and the busy/idle split are
// this design's.
module pe_control
  import qea_pkg::*;
#(
  parameter int unsigned DEPTH = 4096,
  parameter int unsigned LOG_P = 4,
  localparam int unsigned AW = $clog2(DEPTH)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  pe_cmd_t           cmd,
  output pe_cmd_t           cmd_q,
  input  logic [IDX_W-1:0]  list_cnt,
  output logic              busy,
  output logic              idle,
  // LDM1 read port
  output logic              ldm1_rd_en,
  output logic [AW-1:0]     ldm1_raddr,
  input  coo_t              ldm1_rdata,
  // scratch buffer read port (TP source)
  output logic              scr_rd_en,
  output logic [AW-1:0]     scr_raddr,
  input  coo_t              scr_rdata,
  // complex ALU inputs
  output logic              alu_valid,
  output alu_mode_e         alu_mode,
  output logic [1:0]        alu_msize,
  output coo_t              alu_a,
  output coo_t              alu_b,
  output coo_t              alu_c,
  // crossbar request / response
  output logic              xreq_valid,
  output logic [LOG_P-1:0]  xreq_bank,
  output logic [AW-1:0]     xreq_addr,
  input  logic              xgnt,
  input  coo_t              xrdata,
  // clear requests to the load/store unit
  output logic              clr_valid,
  output logic [AW-1:0]     clr_addr,
  // one pulse per result stored by the load/store unit
  input  logic              lsu_done,
  // number of cycles a crossbar request waited for its grant
  output logic [IDX_W-1:0]  stall_cnt
);

  logic             issuing;
  logic [IDX_W-1:0] a_idx, n_a;
  logic [2:0]       b_idx;
  // TP stage 1
  logic             s1_valid;
  logic [2:0]       s1_b;
  // MM stages
  logic             rd_q;      // LDM1 read issued last cycle
  logic             b_wait;    // a T(G) tuple waits for its grant
  logic             b_valid;   // a T(G) tuple is on the LDM1 read port
  logic             c_valid;   // granted, amplitude arrives now
  coo_t             a_t, b_t;
  logic [IDX_W-1:0] inflight;

  logic             last_a, last_b, mm_issue;
  logic [IDX_W-1:0] gidx;

  assign b_valid  = rd_q || b_wait;
  assign last_b   = (b_idx == cmd_q.nnz - 3'd1);
  assign last_a   = (a_idx == n_a - 1'b1);
  assign mm_issue = issuing && (cmd_q.op == PE_MM) && (!b_valid || xgnt);

  // global input index of the waiting tuple
  assign gidx       = (cmd_q.gbar.col << cmd_q.log_b) + ldm1_rdata.col;
  assign xreq_valid = b_valid;
  assign xreq_bank  = gidx[LOG_P-1:0];
  assign xreq_addr  = AW'(gidx >> LOG_P);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cmd_q    <= '0;
      issuing  <= 1'b0;
      a_idx    <= '0;
      b_idx    <= '0;
      n_a      <= '0;
      s1_valid <= 1'b0;
      s1_b     <= '0;
      rd_q     <= 1'b0;
      b_wait   <= 1'b0;
      c_valid  <= 1'b0;
      stall_cnt <= '0;
    end else begin
      s1_valid <= 1'b0;
      rd_q     <= 1'b0;
      c_valid  <= 1'b0;
      if (start) begin
        cmd_q <= cmd;
        a_idx <= '0;
        b_idx <= '0;
        unique case (cmd.op)
          PE_TP: begin
            n_a     <= (cmd.src == MEM_UNIT) ? IDX_W'(1) : list_cnt;
            issuing <= (cmd.src == MEM_UNIT) || (list_cnt != 0);
          end
          PE_CLEAR: begin
            n_a     <= cmd.clear_cnt;
            issuing <= (cmd.clear_cnt != 0);
          end
          default: begin
            n_a     <= list_cnt;
            issuing <= (list_cnt != 0);
          end
        endcase
      end else if (issuing) begin
        unique case (cmd_q.op)
          PE_TP: begin
            s1_valid <= 1'b1;
            s1_b     <= b_idx;
            if (last_b) begin
              b_idx <= '0;
              a_idx <= a_idx + 1'b1;
              if (last_a) issuing <= 1'b0;
            end else begin
              b_idx <= b_idx + 1'b1;
            end
          end
          PE_CLEAR: begin
            a_idx <= a_idx + 1'b1;
            if (last_a) issuing <= 1'b0;
          end
          default: begin
            if (mm_issue) begin
              rd_q  <= 1'b1;
              a_idx <= a_idx + 1'b1;
              if (last_a) issuing <= 1'b0;
            end
          end
        endcase
      end
      // MM request stage
      b_wait <= b_valid && !xgnt;
      if (b_valid && xgnt) c_valid <= 1'b1;
      if (b_valid && !xgnt) stall_cnt <= stall_cnt + 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (b_valid && xgnt) begin
      a_t.row <= (cmd_q.gbar.row << cmd_q.log_b) + ldm1_rdata.row;
      a_t.col <= '0;
      a_t.val <= cmd_q.gbar.val;
      b_t     <= ldm1_rdata;
    end
  end

  // memory read ports
  always_comb begin
    ldm1_rd_en = 1'b0;
    ldm1_raddr = AW'(a_idx);
    scr_rd_en  = 1'b0;
    scr_raddr  = AW'(a_idx);
    if (issuing && cmd_q.op == PE_TP) begin
      ldm1_rd_en = (cmd_q.src == MEM_LDM1);
      scr_rd_en  = (cmd_q.src == MEM_SCR);
    end
    if (mm_issue) ldm1_rd_en = 1'b1;
  end

  assign clr_valid = issuing && (cmd_q.op == PE_CLEAR);
  assign clr_addr  = AW'(a_idx);

  // ALU drive
  always_comb begin
    alu_msize = cmd_q.msize;
    alu_c     = xrdata;
    if (cmd_q.op == PE_MM) begin
      alu_valid = c_valid;
      alu_mode  = ALU_MM;
      alu_a     = a_t;
      alu_b     = b_t;
    end else begin
      alu_valid = s1_valid;
      alu_mode  = ALU_TP;
      unique case (cmd_q.src)
        MEM_LDM1: alu_a = ldm1_rdata;
        MEM_SCR:  alu_a = scr_rdata;
        default:  alu_a = COO_UNIT;
      endcase
      alu_b = cmd_q.gate[s1_b];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) inflight <= '0;
    else        inflight <= inflight + IDX_W'(alu_valid) - IDX_W'(lsu_done);
  end

  assign busy = issuing || b_valid;
  assign idle = !busy && !s1_valid && !c_valid && !rd_q && (inflight == 0);

endmodule
