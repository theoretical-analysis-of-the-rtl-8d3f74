// write_arbiter: routes state amplitudes written by the host to the PEs.
//
// The host sends |psi_0> as COO tuples (k, 0, alpha), one per cycle. The tuple
// goes to PE k mod NUM_PE at local address k / NUM_PE of that PE's |psi_t>
// buffer, so the state is interleaved over the PEs. Combinational, one tuple
// per cycle: writing an N-amplitude state takes N cycles, the paper's
// C_Write = N.
//
// The paper names the Write Arbiter [P PEs] and its PE ADDR / PE DATA outputs;
// the interleaving rule is this design's.
module write_arbiter
  import qea_pkg::*;
#(
  parameter int unsigned NUM_PE = 16,
  parameter int unsigned AW     = 12,
  localparam int unsigned LOG_P = $clog2(NUM_PE)
) (
  input  logic          wr_valid,
  input  coo_t          wr_tuple,
  output logic          hw_en   [NUM_PE],
  output logic [AW-1:0] hw_addr [NUM_PE],
  output coo_t          hw_data
);

  logic [LOG_P-1:0] dest;
  logic [AW-1:0]    laddr;

  assign dest    = wr_tuple.row[LOG_P-1:0];
  assign laddr   = AW'(wr_tuple.row >> LOG_P);
  assign hw_data = wr_tuple;

  always_comb begin
    for (int p = 0; p < NUM_PE; p++) begin
      hw_en[p]   = wr_valid && (dest == LOG_P'(p));
      hw_addr[p] = laddr;
    end
  end

endmodule
