// tb_write_arbiter: self-checking test of the host-write router.
//
// Sends random state tuples (k, 0, alpha) through write_arbiter at its
// default 16 PEs and checks, combinationally in the same cycle, that exactly
// the write enable of PE k mod P is raised, that the local address is k / P,
// that the tuple itself reaches the PEs unchanged, and that nothing is enabled
// while wr_valid is low.
module tb_write_arbiter;
  import qea_pkg::*;

  localparam int unsigned NUM_PE = 16;
  localparam int unsigned AW = 12;

  logic          wr_valid = 1'b0;
  coo_t          wr_tuple = '0;
  logic          hw_en   [NUM_PE];
  logic [AW-1:0] hw_addr [NUM_PE];
  coo_t          hw_data;
  int checks = 0, failures = 0;

  write_arbiter dut (.*);

  initial begin
    for (int i = 0; i < 2000; i++) begin
      int k, n_en;
      k = int'($urandom_range(NUM_PE * (1 << AW) - 1));
      wr_valid = ($urandom_range(4) != 0);
      wr_tuple = '{row: k, col: 0, val: '{re: $urandom, im: $urandom}};
      #1;
      n_en = 0;
      for (int p = 0; p < NUM_PE; p++) begin
        if (hw_en[p]) n_en++;
        checks++;
        if (hw_en[p] != (wr_valid && p == k % NUM_PE)) begin
          failures++;
          $display("FAIL: index %0d, PE %0d enable %0b", k, p, hw_en[p]);
        end
        if (p == k % NUM_PE) begin
          checks++;
          if (int'(hw_addr[p]) != k / NUM_PE) begin
            failures++;
            $display("FAIL: index %0d address %0d", k, hw_addr[p]);
          end
        end
      end
      checks++;
      if (n_en != (wr_valid ? 1 : 0) || hw_data !== wr_tuple) begin
        failures++;
        $display("FAIL: index %0d: %0d enables or data changed", k, n_en);
      end
      #1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
