// ldm_xbar: read crossbar between the processing elements' state buffers.
//
// During the matrix multiplication a PE needs input amplitudes that live in
// other PEs (amplitude r is held by PE r mod P). Each PE p may raise one
// request (req_bank[p], req_addr[p]) per cycle. For each bank the crossbar
// grants the lowest-numbered requesting PE, drives that bank's read port and,
// one cycle later, returns the bank's read data to the granted PE on
// rdata[p]. PEs that are not granted keep their request up (a stall) and try
// again next cycle; with fixed priority every request is served once the
// lower-numbered PEs have moved on, because each PE only has a finite list.
//
// The paper does not say how a PE reaches amplitudes held by another PE; this
// crossbar is this design's answer, kept as simple as a full P x P
// multiplexer with fixed-priority arbitration.
module ldm_xbar
  import qea_pkg::*;
#(
  parameter int unsigned NUM_PE = 16,
  parameter int unsigned AW     = 12,
  localparam int unsigned LOG_P = $clog2(NUM_PE)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             req_valid [NUM_PE],
  input  logic [LOG_P-1:0] req_bank  [NUM_PE],
  input  logic [AW-1:0]    req_addr  [NUM_PE],
  output logic             gnt       [NUM_PE],
  output logic             bank_rd_en   [NUM_PE],
  output logic [AW-1:0]    bank_rd_addr [NUM_PE],
  input  coo_t             bank_rd_data [NUM_PE],
  output coo_t             rdata        [NUM_PE]
);

  logic [LOG_P-1:0] sel_q [NUM_PE];

  always_comb begin
    for (int p = 0; p < NUM_PE; p++) gnt[p] = 1'b0;
    for (int b = 0; b < NUM_PE; b++) begin
      bank_rd_en[b]   = 1'b0;
      bank_rd_addr[b] = '0;
      for (int p = NUM_PE - 1; p >= 0; p--) begin
        if (req_valid[p] && req_bank[p] == LOG_P'(b)) begin
          bank_rd_addr[b] = req_addr[p];
        end
      end
      for (int p = 0; p < NUM_PE; p++) begin
        if (!bank_rd_en[b] && req_valid[p] && req_bank[p] == LOG_P'(b)) begin
          bank_rd_en[b] = 1'b1;
          gnt[p]        = 1'b1;
        end
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int p = 0; p < NUM_PE; p++) sel_q[p] <= '0;
    end else begin
      for (int p = 0; p < NUM_PE; p++) if (gnt[p]) sel_q[p] <= req_bank[p];
    end
  end

  always_comb begin
    for (int p = 0; p < NUM_PE; p++) rdata[p] = bank_rd_data[sel_q[p]];
  end

endmodule
