// pea: the processing element array.
//
// NUM_PE processing elements receive the same command and start pulse from
// the PEA controller (the paper's broadcast of Mode, Matrix size, Start and
// the T(Gbar) tuple). Each PE works on its own share of T(G) and of the state.
// The array adds the read crossbar through which a PE fetches input
// amplitudes held by other PEs, and shares each PE's |psi_t> read port
// between that crossbar and the host's read arbiter (the host only reads
// while the array is idle). PE 0's load/store unit writes T(Gbar) into the
// shared T(Gbar) memory; the other PEs compute the same list and drop it.
//
// all_idle is high when every PE has finished its command; any_busy is high
// while some PE is still issuing work (the controller waits for !any_busy
// before it broadcasts the next T(Gbar) tuple). stalls counts, over all PEs,
// the cycles a crossbar request waited.
//
// The paper gives NUM_PE = 2^2..2^5 and uses 16 PEs in its comparison; 16 is
// the default here.
module pea
  import qea_pkg::*;
#(
  parameter int unsigned NUM_PE = 16,
  parameter int unsigned DEPTH  = 4096,
  localparam int unsigned LOG_P = $clog2(NUM_PE),
  localparam int unsigned AW    = $clog2(DEPTH)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  pe_cmd_t           cmd,
  input  logic              cur,
  output logic              any_busy,
  output logic              all_idle,
  output logic [IDX_W-1:0]  list_cnt0,
  output logic [IDX_W-1:0]  stalls,
  // host writes of |psi_0>
  input  logic              hw_en   [NUM_PE],
  input  logic [AW-1:0]     hw_addr [NUM_PE],
  input  coo_t              hw_data,
  // host reads of |psi_m>
  input  logic              hr_en   [NUM_PE],
  input  logic [AW-1:0]     hr_addr [NUM_PE],
  output coo_t              hr_data [NUM_PE],
  // T(Gbar) memory write port
  output logic              ext_we,
  output logic [IDX_W-1:0]  ext_waddr,
  output coo_t              ext_wdata
);

  logic             busy   [NUM_PE];
  logic             idle   [NUM_PE];
  logic [IDX_W-1:0] cnt    [NUM_PE];
  logic [IDX_W-1:0] stl    [NUM_PE];
  logic             xreq_valid [NUM_PE];
  logic [LOG_P-1:0] xreq_bank  [NUM_PE];
  logic [AW-1:0]    xreq_addr  [NUM_PE];
  logic             xgnt       [NUM_PE];
  coo_t             xrdata     [NUM_PE];
  logic             xb_en      [NUM_PE];
  logic [AW-1:0]    xb_addr    [NUM_PE];
  logic             b_en       [NUM_PE];
  logic [AW-1:0]    b_addr     [NUM_PE];
  coo_t             b_data     [NUM_PE];
  logic             e_we       [NUM_PE];
  logic [IDX_W-1:0] e_waddr    [NUM_PE];
  coo_t             e_wdata    [NUM_PE];

  for (genvar p = 0; p < NUM_PE; p++) begin : g_pe
    pe #(.DEPTH(DEPTH), .LOG_P(LOG_P), .PE_ID(p)) u_pe (
      .clk, .rst_n, .start, .cmd, .cur,
      .busy(busy[p]), .idle(idle[p]), .list_cnt(cnt[p]), .stall_cnt(stl[p]),
      .xreq_valid(xreq_valid[p]), .xreq_bank(xreq_bank[p]), .xreq_addr(xreq_addr[p]),
      .xgnt(xgnt[p]), .xrdata(xrdata[p]),
      .bank_rd_en(b_en[p]), .bank_rd_addr(b_addr[p]), .bank_rd_data(b_data[p]),
      .hw_en(hw_en[p]), .hw_addr(hw_addr[p]), .hw_data,
      .ext_we(e_we[p]), .ext_waddr(e_waddr[p]), .ext_wdata(e_wdata[p])
    );
    assign b_en[p]    = xb_en[p] || hr_en[p];
    assign b_addr[p]  = xb_en[p] ? xb_addr[p] : hr_addr[p];
    assign hr_data[p] = b_data[p];
  end

  ldm_xbar #(.NUM_PE(NUM_PE), .AW(AW)) u_xbar (
    .clk, .rst_n,
    .req_valid(xreq_valid), .req_bank(xreq_bank), .req_addr(xreq_addr),
    .gnt(xgnt), .bank_rd_en(xb_en), .bank_rd_addr(xb_addr),
    .bank_rd_data(b_data), .rdata(xrdata)
  );

  always_comb begin
    any_busy = 1'b0;
    all_idle = 1'b1;
    stalls   = '0;
    for (int p = 0; p < NUM_PE; p++) begin
      any_busy = any_busy | busy[p];
      all_idle = all_idle & idle[p];
      stalls   = stalls + stl[p];
    end
  end

  assign list_cnt0 = cnt[0];
  assign ext_we    = e_we[0];
  assign ext_waddr = e_waddr[0];
  assign ext_wdata = e_wdata[0];

endmodule
