// tb_am_crossbar: programs every row of a reduced AM crossbar (d = 80,
// c = 5, f = 4, so 20 rows of 20 columns) with random bits, then for random
// query segments and every partition checks each ADC output against a
// bit-by-bit count of (segment AND row p*c + r).
`include "tb_check.svh"
module tb_am_crossbar;
  localparam int D = 80, C = 5, F = 4, S = D / F, R = C * F;
  logic clk = 0, prog_we = 0;
  logic [4:0] prog_row = '0;
  logic [S-1:0] prog_data = '0, wl_in = '0;
  logic [1:0] part_sel = '0;
  logic [4:0] adc_out [C];
  logic [S-1:0] model [R];
  int checks = 0, failures = 0;

  am_crossbar #(.D(D), .C(C), .F(F)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int r = 0; r < R; r++) begin
      @(negedge clk);
      prog_we = 1; prog_row = 5'(r); prog_data = S'($urandom()); model[r] = prog_data;
    end
    @(negedge clk);
    prog_we = 0;
    for (int it = 0; it < 40; it++) begin
      wl_in = (it == 0) ? '1 : S'($urandom());
      for (int p = 0; p < F; p++) begin
        part_sel = 2'(p);
        #1;
        for (int r = 0; r < C; r++) begin
          int e;
          e = 0;
          for (int b = 0; b < S; b++) e += int'(wl_in[b] & model[p*C + r][b]);
          `CHECK(int'(adc_out[r]) == e, $sformatf("partition %0d row %0d: %0d want %0d", p, r, adc_out[r], e))
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
