// qea_top: the quantum emulation accelerator (QEA) built on Efficient-Memory
// Matrix Storage (EMMS).
//
// The accelerator applies a sequence of fused gate groups to a state vector of
// n qubits (N = 2^n complex amplitudes). Each group's operator is split as
// U = T(Gbar) (x) T(G): T(Gbar) is the tensor product of the gates on the top
// nbar qubits (sparse gates only, so one non-zero per row, Nbar = 2^nbar
// tuples) and T(G) the tensor product of the gates on the remaining qubits
// (B = N/Nbar rows). Neither factor is ever expanded to U; for each T(Gbar)
// tuple (i, j, g) the array computes block i of the next state as
// g * T(G) * (block j of the current state).
//
// Blocks (as in the paper's overview figure): axi_mapper (host register and
// memory map), gate_memory (instruction list), coo_matrix_generator (gate ->
// COO list), pea_controller, tgbar_memory, write_arbiter / read_arbiter (host
// access to the state held in the PEs) and pea (NUM_PE processing elements).
//
// Use: write the instruction list into the GATE region, the initial state as
// tuples (k, 0, alpha) into the STATE region (N writes), write 1 to CTRL, poll
// the status word until done, read the N amplitudes back from STATE.
//
// Limits of this design: every group needs at least one OP_GBAR and one OP_G
// gate, log2(N/Nbar) >= log2(NUM_PE), N <= NUM_PE * LDM_DEPTH, Nbar <=
// TGBAR_DEPTH, and every intermediate tensor-product list must fit in
// LDM_DEPTH. Defaults: 16 PEs, LDM depth 2^12, T(Gbar) depth 2^16 (the paper's
// 16-PE configuration), so up to 16 qubits are held on chip.
module qea_top
  import qea_pkg::*;
#(
  parameter int unsigned NUM_PE      = 16,
  parameter int unsigned LDM_DEPTH   = 4096,
  parameter int unsigned TGBAR_DEPTH = 65536,
  parameter int unsigned GATE_DEPTH  = 1024
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               wr_valid,
  input  logic [31:0]        wr_addr,
  input  logic [WORD_W-1:0]  wr_data,
  input  logic               rd_valid,
  input  logic [31:0]        rd_addr,
  output logic               rd_rsp_valid,
  output logic [WORD_W-1:0]  rd_rsp_data,
  output logic               done,
  output logic [31:0]        xbar_stalls
);

  localparam int unsigned AW       = $clog2(LDM_DEPTH);
  localparam int unsigned GATE_AW  = $clog2(GATE_DEPTH);
  localparam int unsigned TGBAR_AW = $clog2(TGBAR_DEPTH);

  logic               start, busy;
  logic [31:0]        cycles, n_groups, n_tp_passes, n_mm_tuples;
  logic               gate_we;
  logic [GATE_AW-1:0] gate_waddr;
  instr_t             gate_wdata;
  logic               st_wr_valid, st_rd_valid, st_rd_data_valid;
  coo_t               st_wr_tuple, st_rd_data;
  logic [IDX_W-1:0]   st_rd_index;

  logic               gm_rd_en;
  logic [GATE_AW-1:0] gm_raddr;
  instr_t             gm_rdata, gen_instr;
  coo_t [MAX_NNZ-1:0] gen_entries;
  logic [2:0]         gen_nnz;
  logic [1:0]         gen_msize;
  logic               tg_rd_en;
  logic [TGBAR_AW-1:0] tg_raddr;
  coo_t               tg_rdata;
  logic               pe_start, cur, any_busy, all_idle;
  pe_cmd_t            pe_cmd;
  logic [IDX_W-1:0]   list_cnt0;
  logic               ext_we;
  logic [IDX_W-1:0]   ext_waddr;
  coo_t               ext_wdata;

  logic               hw_en   [NUM_PE];
  logic [AW-1:0]      hw_addr [NUM_PE];
  coo_t               hw_data;
  logic               hr_en   [NUM_PE];
  logic [AW-1:0]      hr_addr [NUM_PE];
  coo_t               hr_data [NUM_PE];

  axi_mapper #(.GATE_AW(GATE_AW)) u_axi (
    .clk, .rst_n, .wr_valid, .wr_addr, .wr_data, .rd_valid, .rd_addr,
    .rd_rsp_valid, .rd_rsp_data,
    .start, .busy, .done, .cycles, .n_groups, .n_tp_passes, .n_mm_tuples,
    .gate_we, .gate_waddr, .gate_wdata,
    .st_wr_valid, .st_wr_tuple, .st_rd_valid, .st_rd_index,
    .st_rd_data_valid, .st_rd_data
  );

  gate_memory #(.DEPTH(GATE_DEPTH)) u_gm (
    .clk, .we(gate_we), .waddr(gate_waddr), .wdata(gate_wdata),
    .rd_en(gm_rd_en), .raddr(gm_raddr), .rdata(gm_rdata)
  );

  coo_matrix_generator u_gen (
    .instr(gen_instr), .entries(gen_entries), .nnz(gen_nnz), .msize(gen_msize)
  );

  pea_controller #(.NUM_PE(NUM_PE), .GATE_AW(GATE_AW), .TGBAR_AW(TGBAR_AW)) u_ctrl (
    .clk, .rst_n, .start, .busy, .done,
    .gm_rd_en, .gm_raddr, .gm_rdata,
    .gen_instr, .gen_entries, .gen_nnz, .gen_msize,
    .tg_rd_en, .tg_raddr, .tg_rdata,
    .pe_start, .pe_cmd, .cur, .any_busy, .all_idle, .list_cnt0,
    .cycles, .n_groups, .n_tp_passes, .n_mm_tuples
  );

  tgbar_memory #(.DEPTH(TGBAR_DEPTH)) u_tg (
    .clk, .we(ext_we), .waddr(TGBAR_AW'(ext_waddr)), .wdata(ext_wdata),
    .rd_en(tg_rd_en), .raddr(tg_raddr), .rdata(tg_rdata)
  );

  write_arbiter #(.NUM_PE(NUM_PE), .AW(AW)) u_wa (
    .wr_valid(st_wr_valid), .wr_tuple(st_wr_tuple), .hw_en, .hw_addr, .hw_data
  );

  read_arbiter #(.NUM_PE(NUM_PE), .AW(AW)) u_ra (
    .clk, .rst_n, .rd_valid(st_rd_valid), .rd_index(st_rd_index),
    .hr_en, .hr_addr, .hr_data,
    .rd_data_valid(st_rd_data_valid), .rd_data(st_rd_data)
  );

  pea #(.NUM_PE(NUM_PE), .DEPTH(LDM_DEPTH)) u_pea (
    .clk, .rst_n, .start(pe_start), .cmd(pe_cmd), .cur,
    .any_busy, .all_idle, .list_cnt0, .stalls(xbar_stalls),
    .hw_en, .hw_addr, .hw_data, .hr_en, .hr_addr, .hr_data,
    .ext_we, .ext_waddr, .ext_wdata
  );

endmodule
