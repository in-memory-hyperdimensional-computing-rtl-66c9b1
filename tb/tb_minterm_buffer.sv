// tb_minterm_buffer: closes the loop between a minterm buffer (d = 64) and a
// behavioural crossbar row read in the testbench (SA = row AND gate lines),
// runs n-cycle sequences (n = 1..6) and checks the final content against
// B[1] & rho(B[2]) & ... & rho^(n-1)(B[n]) computed independently, with rho
// a 1-bit non-circular shift towards higher components. Also checks the gate
// lines during start (all ones) and the hold when load is low.
`include "tb_check.svh"
module tb_minterm_buffer;
  localparam int D = 64;
  logic clk = 0, rst_n = 0, start = 0, load = 0;
  logic [D-1:0] sa_in, gate_lines, minterm;
  logic [D-1:0] row;
  int checks = 0, failures = 0;

  minterm_buffer #(.D(D)) dut (.*);

  assign sa_in = row & gate_lines;
  always #5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [D-1:0] b [8];
    logic [D-1:0] expect_v;
    row = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 60; it++) begin
      int n = 1 + (it % 6);
      for (int k = 1; k <= n; k++) b[k] = {$urandom(), $urandom()};
      // cycle j reads B[n-j+1]
      for (int j = 1; j <= n; j++) begin
        @(negedge clk);
        start = (j == 1); load = 1; row = b[n-j+1];
        #1;
        if (j == 1) `CHECK(gate_lines == '1, "gate lines all on during start")
      end
      @(negedge clk);
      start = 0; load = 0;
      #1;
      expect_v = '1;
      for (int k = 1; k <= n; k++) expect_v &= (b[k] << (k-1));
      `CHECK(minterm == expect_v, $sformatf("n=%0d minterm %h want %h", n, minterm, expect_v))
      `CHECK(gate_lines == (minterm << 1), "gate lines = shifted buffer")
      row = ~row;
      @(negedge clk);
      `CHECK(minterm == expect_v, "buffer holds when load is low")
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
