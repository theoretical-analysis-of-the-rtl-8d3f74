// axi_mapper: the accelerator's host-side register and memory map.
//
// It decodes a simple memory-mapped host bus, one 128-bit write or read per
// cycle, into the accelerator's targets. Bits 31:28 of the address pick the
// region:
//   0x0 CTRL   write: data bit 0 = start the program.
//              read : status word: bit 0 busy, bit 1 done, bits 31:2 run
//                     cycles, 63:32 fused groups done, 95:64 tensor-product
//                     passes, 127:96 T(Gbar) tuples broadcast.
//   0x1 GATE   write: instruction at index addr[27:0] of the gate memory.
//   0x2 STATE  write: a state tuple (k, 0, alpha), routed by its row k.
//              read : amplitude of global index addr[27:0].
// Read data come back one cycle after the request with rd_rsp_valid.
//
// The paper puts an AXI Mapper between the processing system and the QEA and
// connects them by a 128-bit AXI bus (64-bit PIO for control, DMA for data).
// The AXI handshakes themselves (address/data channels, bursts) are left out:
// this block is the address decoding behind them, and the region map is this
// design's.
module axi_mapper
  import qea_pkg::*;
#(
  parameter int unsigned GATE_AW = 10
) (
  input  logic               clk,
  input  logic               rst_n,
  // host bus
  input  logic               wr_valid,
  input  logic [31:0]        wr_addr,
  input  logic [WORD_W-1:0]  wr_data,
  input  logic               rd_valid,
  input  logic [31:0]        rd_addr,
  output logic               rd_rsp_valid,
  output logic [WORD_W-1:0]  rd_rsp_data,
  // control / status
  output logic               start,
  input  logic               busy,
  input  logic               done,
  input  logic [31:0]        cycles,
  input  logic [31:0]        n_groups,
  input  logic [31:0]        n_tp_passes,
  input  logic [31:0]        n_mm_tuples,
  // gate memory write port
  output logic               gate_we,
  output logic [GATE_AW-1:0] gate_waddr,
  output instr_t             gate_wdata,
  // state write / read
  output logic               st_wr_valid,
  output coo_t               st_wr_tuple,
  output logic               st_rd_valid,
  output logic [IDX_W-1:0]   st_rd_index,
  input  logic               st_rd_data_valid,
  input  coo_t               st_rd_data
);

  typedef enum logic [3:0] {
    R_CTRL  = 4'h0,
    R_GATE  = 4'h1,
    R_STATE = 4'h2
  } region_e;

  region_e wr_region, rd_region;
  assign wr_region = region_e'(wr_addr[31:28]);
  assign rd_region = region_e'(rd_addr[31:28]);

  assign start       = wr_valid && wr_region == R_CTRL && wr_data[0];
  assign gate_we     = wr_valid && wr_region == R_GATE;
  assign gate_waddr  = wr_addr[GATE_AW-1:0];
  assign gate_wdata  = instr_t'(wr_data);
  assign st_wr_valid = wr_valid && wr_region == R_STATE;
  assign st_wr_tuple = coo_t'(wr_data);
  assign st_rd_valid = rd_valid && rd_region == R_STATE;
  assign st_rd_index = {4'h0, rd_addr[27:0]};

  logic             stat_valid;
  logic [WORD_W-1:0] stat_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      stat_valid <= 1'b0;
      stat_q     <= '0;
    end else begin
      stat_valid <= rd_valid && rd_region != R_STATE;
      stat_q     <= {n_mm_tuples, n_tp_passes, n_groups, cycles[29:0], done, busy};
    end
  end

  assign rd_rsp_valid = stat_valid || st_rd_data_valid;
  assign rd_rsp_data  = st_rd_data_valid ? WORD_W'(st_rd_data) : stat_q;

endmodule
