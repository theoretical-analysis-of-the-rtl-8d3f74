// tgbar_memory: the shared memory that holds T(Gbar), the high-order factor of
// the fused operator, as a list of COO tuples (one tuple per row, because only
// sparse gates go into T(Gbar)).
//
// PE 0 writes the list during the last tensor-product pass of T(Gbar); the
// PEA controller then reads it back tuple by tuple and broadcasts each tuple
// to all PEs for the matrix multiplication. One write port, one synchronous
// read port (data one cycle after rd_en, held until the next read).
//
// The paper gives the memory, its role and depths of 2^12, 2^14 and 2^16 tuples;
// its performance study uses 2^16, the default here.
module tgbar_memory
  import qea_pkg::*;
#(
  parameter int unsigned DEPTH = 65536,
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
