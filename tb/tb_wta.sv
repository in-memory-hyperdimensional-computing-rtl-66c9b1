// tb_wta: random similarity vectors at the default size (c = 22, 14-bit
// values), with deliberate ties, checked against an independent scan that
// returns the first index of the maximum.
`include "tb_check.svh"
module tb_wta;
  localparam int C = 22, W = 14;
  logic [W-1:0] vals [C];
  logic [4:0] win_idx;
  logic [W-1:0] win_val;
  int checks = 0, failures = 0;

  wta #(.C(C), .W(W)) dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int it = 0; it < 300; it++) begin
      int best, bi;
      for (int c = 0; c < C; c++) vals[c] = W'($urandom_range(0, (it % 3 == 0) ? 20 : 10000));
      if (it % 5 == 0) begin
        int a = $urandom_range(0, C-1);
        int b = $urandom_range(0, C-1);
        vals[a] = 14'd10000; vals[b] = 14'd10000;
      end
      best = -1; bi = 0;
      for (int c = 0; c < C; c++) if (int'(vals[c]) > best) begin best = int'(vals[c]); bi = c; end
      #1;
      `CHECK(int'(win_idx) == bi && int'(win_val) == best, $sformatf("winner %0d/%0d want %0d/%0d", win_idx, win_val, bi, best))
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
