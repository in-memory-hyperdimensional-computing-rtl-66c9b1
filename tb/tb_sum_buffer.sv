// tb_sum_buffer: feeds f = 4 rounds of random ADC results (c = 6) through a
// random placement table and checks each class register against the sum of
// the ADC values of its row, including the restart on acc_first and the
// hold while acc_en is low.
`include "tb_check.svh"
module tb_sum_buffer;
  localparam int D = 400, C = 6, F = 4, S = D / F;
  logic clk = 0, rst_n = 0, acc_en = 0, acc_first = 0;
  logic [6:0] adc_in [C];
  logic [2:0] row_of_class [C];
  logic [8:0] sums [C];
  int model [C];
  int perm [C];
  int checks = 0, failures = 0;

  sum_buffer #(.D(D), .C(C), .F(F)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic feed();
    for (int r = 0; r < C; r++) adc_in[r] = 7'($urandom_range(0, S));
    for (int c = 0; c < C; c++) model[c] += int'(adc_in[perm[c]]);
  endtask

  initial begin
    for (int c = 0; c < C; c++) begin adc_in[c] = '0; row_of_class[c] = 3'(c); end
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int q = 0; q < 20; q++) begin
      for (int c = 0; c < C; c++) perm[c] = c;
      perm.shuffle();
      for (int c = 0; c < C; c++) row_of_class[c] = 3'(perm[c]);
      for (int c = 0; c < C; c++) model[c] = 0;
      for (int p = 0; p < F; p++) begin
        @(negedge clk);
        acc_en = 1; acc_first = (p == 0);
        feed();
        if (p == 1) begin
          // an idle cycle in the middle: the registers must hold
          @(negedge clk);
          acc_en = 0;
          adc_in[0] = 7'd99;
        end
      end
      @(negedge clk);
      acc_en = 0;
      for (int c = 0; c < C; c++)
        `CHECK(int'(sums[c]) == model[c], $sformatf("class %0d: %0d want %0d", c, sums[c], model[c]))
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
