// tb_bundler: bundles random n-gram hypervectors (d = 48) into the counters,
// then binarises with a random threshold and checks every output bit
// against (threshold < count) from an independent count; checks that the
// counters restart from zero after query_end and that the output holds.
`include "tb_check.svh"
module tb_bundler;
  localparam int D = 48, LEN_W = 10;
  logic clk = 0, rst_n = 0, ngram_end = 0, query_end = 0;
  logic [D-1:0] ngram = '0, query_hv;
  logic [LEN_W-1:0] threshold = '0;
  int cnt [D];
  int checks = 0, failures = 0;

  bundler #(.D(D), .LEN_W(LEN_W)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [D-1:0] exp_q;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int q = 0; q < 12; q++) begin
      int len = $urandom_range(1, 60);
      for (int i = 0; i < D; i++) cnt[i] = 0;
      for (int t = 0; t < len; t++) begin
        @(negedge clk);
        ngram_end = ($urandom_range(0, 4) != 0);
        ngram = {$urandom(), $urandom()};
        if (ngram_end) for (int i = 0; i < D; i++) cnt[i] += int'(ngram[i]);
      end
      @(negedge clk);
      ngram_end = 0; query_end = 1;
      threshold = LEN_W'($urandom_range(0, len/2));
      for (int i = 0; i < D; i++) exp_q[i] = (int'(threshold) < cnt[i]);
      @(negedge clk);
      query_end = 0;
      `CHECK(query_hv == exp_q, $sformatf("query %0d: %h want %h", q, query_hv, exp_q))
      @(negedge clk);
      `CHECK(query_hv == exp_q, "output holds")
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
