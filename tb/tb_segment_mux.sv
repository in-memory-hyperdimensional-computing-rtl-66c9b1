// tb_segment_mux: applies random hypervectors (d = 60, f = 6) and checks
// that every select value returns components p*d/f+1 .. (p+1)*d/f.
`include "tb_check.svh"
module tb_segment_mux;
  localparam int D = 60, F = 6, S = D / F;
  logic [D-1:0] hv;
  logic [2:0] sel;
  logic [S-1:0] seg;
  int checks = 0, failures = 0;

  segment_mux #(.D(D), .F(F)) dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int it = 0; it < 50; it++) begin
      hv = {$urandom(), $urandom()};
      for (int p = 0; p < F; p++) begin
        logic [S-1:0] e;
        sel = 3'(p);
        for (int b = 0; b < S; b++) e[b] = hv[p*S + b];
        #1;
        `CHECK(seg == e, $sformatf("segment %0d", p))
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
