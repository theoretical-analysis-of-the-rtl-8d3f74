// read_arbiter: reads state amplitudes out of the PEs for the host.
//
// A read of global index k is sent to PE k mod NUM_PE at local address
// k / NUM_PE; one cycle later, when the PE's memory has answered, the arbiter
// selects that PE's word and presents it as rd_data with rd_data_valid.
// One read per cycle, so reading an N-amplitude state takes N cycles (the
// paper's C_Read = N) plus one cycle of latency.
//
// The paper names the Read Arbiter [P PEs] and its PE ADDR / PE DATA signals;
// the interleaving rule and the one-cycle latency are this design's.
module read_arbiter
  import qea_pkg::*;
#(
  parameter int unsigned NUM_PE = 16,
  parameter int unsigned AW     = 12,
  localparam int unsigned LOG_P = $clog2(NUM_PE)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             rd_valid,
  input  logic [IDX_W-1:0] rd_index,
  output logic             hr_en   [NUM_PE],
  output logic [AW-1:0]    hr_addr [NUM_PE],
  input  coo_t             hr_data [NUM_PE],
  output logic             rd_data_valid,
  output coo_t             rd_data
);

  logic [LOG_P-1:0] src, src_q;

  assign src = rd_index[LOG_P-1:0];

  always_comb begin
    for (int p = 0; p < NUM_PE; p++) begin
      hr_en[p]   = rd_valid && (src == LOG_P'(p));
      hr_addr[p] = AW'(rd_index >> LOG_P);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_data_valid <= 1'b0;
      src_q         <= '0;
    end else begin
      rd_data_valid <= rd_valid;
      if (rd_valid) src_q <= src;
    end
  end

  assign rd_data = hr_data[src_q];

endmodule
