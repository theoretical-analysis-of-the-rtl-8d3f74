// ldm: one local data memory of a processing element (LDM1, LDM2 or LDM3).
//
// A simple dual-port RAM of DEPTH 128-bit COO tuples: one write port and one
// read port, both synchronous. The read data appear one cycle after rd_en and
// hold until the next read; a read and a write of the same address in the same
// cycle return the old word. The paper gives the three memories, their role
// and the depth it evaluates (2^12 words for the 16-PE design of its Fig. 10);
// the port arrangement is this design's choice, written so that it maps onto
// FPGA block RAM.
module ldm
  import qea_pkg::*;
#(
  parameter int unsigned DEPTH = 4096,
  localparam int unsigned AW = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  coo_t          wdata,
  input  logic          rd_en,
  input  logic [AW-1:0] raddr,
  output coo_t          rdata
);

  coo_t mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
  end

  always_ff @(posedge clk) begin
    if (rd_en) rdata <= mem[raddr];
  end

endmodule
