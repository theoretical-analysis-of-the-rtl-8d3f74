// gate_memory: instruction store of the accelerator.
//
// Holds the instruction list the host writes before a run: the gates of each
// fused group, tagged as belonging to T(Gbar) or T(G), followed by an EXEC
// marker, and a final HALT (see qea_pkg::instr_t). The PEA controller reads it
// at its program counter. One write port for the host, one synchronous read
// port (data one cycle after rd_en, held until the next read).
//
// The paper gives the memory and its job (storing the instruction list of gate
// names and positions); its depth is not given, and DEPTH = 1024 instructions
// is this design's choice.
module gate_memory
  import qea_pkg::*;
#(
  parameter int unsigned DEPTH = 1024,
  localparam int unsigned AW = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  instr_t        wdata,
  input  logic          rd_en,
  input  logic [AW-1:0] raddr,
  output instr_t        rdata
);

  instr_t mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
  end

  always_ff @(posedge clk) begin
    if (rd_en) rdata <= mem[raddr];
  end

endmodule
