// load_store_unit: the write side of a processing element.
//
// It takes the tuple stream coming out of the complex ALU and puts it into
// memory according to the command the PE is running:
//   PE_TP    each result tuple is appended to the destination list (LDM1, the
//            scratch state buffer, or the shared T(Gbar) memory). With filter
//            set only tuples whose row r satisfies r mod P == PE_ID are kept,
//            so that every PE ends up holding the rows of T(G) it owns.
//            list_cnt counts the tuples written since cnt_reset.
//   PE_MM    each result (r, 0, v) is added into the output state buffer at
//            local address r / P (read-modify-write). The read is issued in
//            the cycle the tuple arrives, the sum is written one cycle later;
//            when two consecutive tuples hit the same address the second one
//            takes the sum straight from the first (forwarding).
//   PE_CLEAR clr_valid / clr_addr write zero amplitudes (global index
//            clr_addr * P + PE_ID) into the output state buffer.
// done pulses once for every ALU tuple that has been fully handled, which the
// PE uses to know when its pipeline is empty.
//
// The paper names this unit in its PE figure and says results are stored in
// LDM1 (T(G)), LDM3 (next state) and the T(Gbar) memory; the list/accumulate
// behaviour, the ownership rule r mod P and the forwarding are this design's.
module load_store_unit
  import qea_pkg::*;
#(
  parameter int unsigned DEPTH  = 4096,
  parameter int unsigned LOG_P  = 4,
  parameter int unsigned PE_ID  = 0,
  localparam int unsigned AW = $clog2(DEPTH)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              cnt_reset,
  input  pe_op_e            op,
  input  mem_sel_e          dst,
  input  logic              filter,
  // result stream from the ALU
  input  logic              in_valid,
  input  coo_t              in,
  // clear requests
  input  logic              clr_valid,
  input  logic [AW-1:0]     clr_addr,
  // LDM1 write port
  output logic              ldm1_we,
  output logic [AW-1:0]     ldm1_waddr,
  output coo_t              ldm1_wdata,
  // scratch / next-state buffer ports
  output logic              scr_we,
  output logic [AW-1:0]     scr_waddr,
  output coo_t              scr_wdata,
  output logic              scr_rd_en,
  output logic [AW-1:0]     scr_raddr,
  input  coo_t              scr_rdata,
  // T(Gbar) memory write port
  output logic              ext_we,
  output logic [IDX_W-1:0]  ext_waddr,
  output coo_t              ext_wdata,
  // status
  output logic [IDX_W-1:0]  list_cnt,
  output logic              done
);

  localparam logic [LOG_P-1:0] ID = LOG_P'(PE_ID);

  // ---------------- tensor-product list writer ----------------
  logic keep;
  assign keep = in_valid && (op == PE_TP) &&
                (!filter || (in.row[LOG_P-1:0] == ID));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                     list_cnt <= '0;
    else if (cnt_reset)             list_cnt <= '0;
    else if (keep)                  list_cnt <= list_cnt + 1'b1;
  end

  // ---------------- matrix-multiply accumulator ----------------
  logic             d1_valid;
  coo_t             d1;
  logic             fw_valid;
  logic [AW-1:0]    fw_addr;
  cplx_t            fw_val;
  logic [AW-1:0]    d1_addr;
  cplx_t            old_val, sum;

  assign d1_addr = AW'(d1.row >> LOG_P);
  assign old_val = (fw_valid && fw_addr == d1_addr) ? fw_val : scr_rdata.val;
  assign sum.re  = old_val.re + d1.val.re;
  assign sum.im  = old_val.im + d1.val.im;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      d1_valid <= 1'b0;
      fw_valid <= 1'b0;
    end else begin
      d1_valid <= in_valid && (op == PE_MM);
      if (clr_valid)     fw_valid <= 1'b0;
      else if (d1_valid) fw_valid <= 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    d1 <= in;
    if (d1_valid) begin
      fw_addr <= d1_addr;
      fw_val  <= sum;
    end
  end

  assign scr_rd_en = in_valid && (op == PE_MM);
  assign scr_raddr = AW'(in.row >> LOG_P);

  // ---------------- write ports ----------------
  always_comb begin
    ldm1_we    = keep && (dst == MEM_LDM1);
    ldm1_waddr = AW'(list_cnt);
    ldm1_wdata = in;
    ext_we     = keep && (dst == MEM_EXT);
    ext_waddr  = list_cnt;
    ext_wdata  = in;
    scr_we     = 1'b0;
    scr_waddr  = AW'(list_cnt);
    scr_wdata  = in;
    if (clr_valid) begin
      scr_we         = 1'b1;
      scr_waddr      = clr_addr;
      scr_wdata      = '0;
      scr_wdata.row  = IDX_W'({clr_addr, ID});
    end else if (d1_valid) begin
      scr_we         = 1'b1;
      scr_waddr      = d1_addr;
      scr_wdata.row  = d1.row;
      scr_wdata.col  = '0;
      scr_wdata.val  = sum;
    end else begin
      scr_we         = keep && (dst == MEM_SCR);
    end
  end

  assign done = (in_valid && op == PE_TP) || d1_valid;

endmodule
