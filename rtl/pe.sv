// pe: one processing element of the accelerator.
//
// A PE holds three local data memories, a complex ALU, a sequencer (pe_control)
// and a load/store unit:
//   LDM1       this PE's share of T(G): the tuples whose row k has k mod P == PE_ID
//   LDM2/LDM3  this PE's share of the state vector: amplitude of global index r
//              is at address r / P of PE r mod P. One of the two holds |psi_t>
//              (selected by cur), the other receives |psi_t+1>; the controller
//              flips cur after every fused group, so consecutive groups run
//              without moving the state. While the tensor products are built,
//              the buffer that is not |psi_t> serves as scratch for the
//              intermediate lists.
// The buffer holding |psi_t> is read through the bank port: by the inter-PE
// crossbar during PE_MM and by the host's read arbiter otherwise. The host
// writes |psi_0> into it through hw_*.
//
// The paper gives the three LDMs and what they store, the complex ALU, PE
// Control and the Load/Store Unit. The interleaved ownership (r mod P), the
// LDM2/LDM3 role swap and the crossbar bank port are this design's.
//
// Timing: see pe_control. A TP pass issues one ALU operation per cycle; in
// PE_MM one T(G) tuple per cycle unless the crossbar stalls it.
module pe
  import qea_pkg::*;
#(
  parameter int unsigned DEPTH = 4096,
  parameter int unsigned LOG_P = 4,
  parameter int unsigned PE_ID = 0,
  localparam int unsigned AW = $clog2(DEPTH)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  pe_cmd_t           cmd,
  input  logic              cur,
  output logic              busy,
  output logic              idle,
  output logic [IDX_W-1:0]  list_cnt,
  output logic [IDX_W-1:0]  stall_cnt,
  // crossbar request (this PE as reader)
  output logic              xreq_valid,
  output logic [LOG_P-1:0]  xreq_bank,
  output logic [AW-1:0]     xreq_addr,
  input  logic              xgnt,
  input  coo_t              xrdata,
  // bank port (|psi_t> buffer of this PE)
  input  logic              bank_rd_en,
  input  logic [AW-1:0]     bank_rd_addr,
  output coo_t              bank_rd_data,
  // host write into the |psi_t> buffer
  input  logic              hw_en,
  input  logic [AW-1:0]     hw_addr,
  input  coo_t              hw_data,
  // T(Gbar) memory write port
  output logic              ext_we,
  output logic [IDX_W-1:0]  ext_waddr,
  output coo_t              ext_wdata
);

  pe_cmd_t cmd_q;

  // LDM1
  logic          l1_we, l1_re;
  logic [AW-1:0] l1_waddr, l1_raddr;
  coo_t          l1_wdata, l1_rdata;
  // scratch side, seen through the cur selection
  logic          c_scr_re, u_scr_re, scr_we;
  logic [AW-1:0] c_scr_raddr, u_scr_raddr, scr_waddr;
  coo_t          scr_wdata, scr_rdata;
  // ALU
  logic          alu_in_valid, alu_out_valid;
  alu_mode_e     alu_mode;
  logic [1:0]    alu_msize;
  coo_t          alu_a, alu_b, alu_c, alu_out;
  // clear / done
  logic          clr_valid, lsu_done;
  logic [AW-1:0] clr_addr;
  // state buffers LDM2 (s[0]) and LDM3 (s[1])
  logic          s_we   [2];
  logic          s_re   [2];
  logic [AW-1:0] s_waddr[2];
  logic [AW-1:0] s_raddr[2];
  coo_t          s_wdata[2];
  coo_t          s_rdata[2];

  pe_control #(.DEPTH(DEPTH), .LOG_P(LOG_P)) u_ctrl (
    .clk, .rst_n, .start, .cmd, .cmd_q, .list_cnt, .busy, .idle,
    .ldm1_rd_en(l1_re), .ldm1_raddr(l1_raddr), .ldm1_rdata(l1_rdata),
    .scr_rd_en(c_scr_re), .scr_raddr(c_scr_raddr), .scr_rdata,
    .alu_valid(alu_in_valid), .alu_mode, .alu_msize, .alu_a, .alu_b, .alu_c,
    .xreq_valid, .xreq_bank, .xreq_addr, .xgnt, .xrdata,
    .clr_valid, .clr_addr, .lsu_done, .stall_cnt
  );

  complex_alu u_alu (
    .clk, .rst_n, .in_valid(alu_in_valid), .mode(alu_mode), .msize(alu_msize),
    .a(alu_a), .b(alu_b), .c(alu_c), .out_valid(alu_out_valid), .out(alu_out)
  );

  load_store_unit #(.DEPTH(DEPTH), .LOG_P(LOG_P), .PE_ID(PE_ID)) u_lsu (
    .clk, .rst_n,
    .cnt_reset(start && cmd.op == PE_TP),
    .op(cmd_q.op), .dst(cmd_q.dst), .filter(cmd_q.filter),
    .in_valid(alu_out_valid), .in(alu_out),
    .clr_valid, .clr_addr,
    .ldm1_we(l1_we), .ldm1_waddr(l1_waddr), .ldm1_wdata(l1_wdata),
    .scr_we, .scr_waddr, .scr_wdata,
    .scr_rd_en(u_scr_re), .scr_raddr(u_scr_raddr), .scr_rdata,
    .ext_we, .ext_waddr, .ext_wdata,
    .list_cnt, .done(lsu_done)
  );

  ldm #(.DEPTH(DEPTH)) u_ldm1 (
    .clk, .we(l1_we), .waddr(l1_waddr), .wdata(l1_wdata),
    .rd_en(l1_re), .raddr(l1_raddr), .rdata(l1_rdata)
  );

  // route the two state buffers: index cur is |psi_t> (bank + host side),
  // the other one is the scratch / |psi_t+1> side
  always_comb begin
    for (int b = 0; b < 2; b++) begin
      if (b == int'(cur)) begin
        s_we[b]    = hw_en;
        s_waddr[b] = hw_addr;
        s_wdata[b] = hw_data;
        s_re[b]    = bank_rd_en;
        s_raddr[b] = bank_rd_addr;
      end else begin
        s_we[b]    = scr_we;
        s_waddr[b] = scr_waddr;
        s_wdata[b] = scr_wdata;
        s_re[b]    = c_scr_re || u_scr_re;
        s_raddr[b] = u_scr_re ? u_scr_raddr : c_scr_raddr;
      end
    end
  end

  assign bank_rd_data = cur ? s_rdata[1] : s_rdata[0];
  assign scr_rdata    = cur ? s_rdata[0] : s_rdata[1];

  ldm #(.DEPTH(DEPTH)) u_ldm2 (
    .clk, .we(s_we[0]), .waddr(s_waddr[0]), .wdata(s_wdata[0]),
    .rd_en(s_re[0]), .raddr(s_raddr[0]), .rdata(s_rdata[0])
  );

  ldm #(.DEPTH(DEPTH)) u_ldm3 (
    .clk, .we(s_we[1]), .waddr(s_waddr[1]), .wdata(s_wdata[1]),
    .rd_en(s_re[1]), .raddr(s_raddr[1]), .rdata(s_rdata[1])
  );

endmodule
