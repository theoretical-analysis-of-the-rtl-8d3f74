// tb_read_arbiter: self-checking test of the host-read router.
//
// Models the 16 PEs' state buffers as registered-read memories filled with
// known tuples, issues random reads of global index r, and checks that only
// PE r mod P is read, at address r / P, and that the response arrives exactly
// one cycle after the request (rd_data_valid) with the tuple of index r, also
// when reads come back to back from different PEs and while the next
// request is already on the inputs.
module tb_read_arbiter;
  import qea_pkg::*;

  localparam int unsigned NUM_PE = 16;
  localparam int unsigned AW = 12;
  localparam int unsigned LOCAL = 64;

  logic             clk = 1'b0, rst_n = 1'b0;
  logic             rd_valid = 1'b0;
  logic [IDX_W-1:0] rd_index = '0;
  logic             hr_en   [NUM_PE];
  logic [AW-1:0]    hr_addr [NUM_PE];
  coo_t             hr_data [NUM_PE];
  logic             rd_data_valid;
  coo_t             rd_data;
  int checks = 0, failures = 0;

  read_arbiter dut (.*);

  always #5 clk = ~clk;

  function automatic coo_t word_of(input int r);
    return '{row: r, col: 0, val: '{re: r * 7 + 1, im: -r}};
  endfunction

  // bank models: registered read of word_of(global index)
  for (genvar p = 0; p < NUM_PE; p++) begin : g_bank
    initial hr_data[p] = '0;
    always_ff @(posedge clk)
      if (hr_en[p]) hr_data[p] <= word_of(int'(hr_addr[p]) * NUM_PE + p);
  end

  initial begin
    int prev;
    bit prev_v;
    prev_v = 0; prev = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 3000; i++) begin
      int r, n_en;
      @(negedge clk);
      // next request first, so the previous response must not depend on it
      r = int'($urandom_range(NUM_PE * LOCAL - 1));
      rd_valid = ($urandom_range(3) != 0);
      rd_index = IDX_W'(r);
      #1;
      // response of the previous cycle's request
      checks++;
      if (rd_data_valid != prev_v) begin
        failures++; $display("FAIL: step %0d valid %0b expected %0b", i, rd_data_valid, prev_v);
      end else if (prev_v && rd_data !== word_of(prev)) begin
        failures++; $display("FAIL: step %0d index %0d wrong data", i, prev);
      end
      n_en = 0;
      for (int p = 0; p < NUM_PE; p++) if (hr_en[p]) n_en++;
      checks++;
      if (rd_valid && (n_en != 1 || !hr_en[r % NUM_PE] || int'(hr_addr[r % NUM_PE]) != r / NUM_PE)) begin
        failures++; $display("FAIL: index %0d routed wrongly", r);
      end else if (!rd_valid && n_en != 0) begin
        failures++; $display("FAIL: read enable without request");
      end
      prev_v = rd_valid; prev = r;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
