// tb_am_search: the AM search module at reduced size (d = 80, c = 5, f = 4).
// The host sets a random placement table and programs random prototypes
// segment by segment into the rows it assigns; random queries must then
// return argmax_c popcount(Q & P_c) (lowest index on a tie), f + 2 cycles
// after query_valid. A training run then overwrites one class with the
// presented hypervector, and later searches must see the new prototype.
`include "tb_check.svh"
module tb_am_search;
  import hdc_pkg::*;
  localparam int D = 80, C = 5, F = 4, S = D / F;
  logic clk = 0, rst_n = 0;
  logic [D-1:0] query_hv = '0;
  logic query_valid = 0;
  hdc_mode_e q_mode = MODE_INFER;
  logic [2:0] q_label = '0;
  logic am_prog_we = 0;
  logic [4:0] am_prog_row = '0;
  logic [S-1:0] am_prog_data = '0;
  logic map_we = 0;
  logic [2:0] map_class = '0, map_row = '0;
  logic busy, result_valid, train_done;
  logic [2:0] result_class;
  logic [D-1:0] proto [C];
  int place [C];
  int checks = 0, failures = 0;

  am_search #(.D(D), .C(C), .F(F)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [D-1:0] rnd();
    logic [D-1:0] v;
    for (int i = 0; i < D; i += 32) v[i +: 32] = $urandom();
    return v;
  endfunction

  function automatic int ref_class(logic [D-1:0] q);
    int best = -1, bi = 0;
    for (int c = 0; c < C; c++) begin
      int s;
      s = $countones(q & proto[c]);
      if (s > best) begin best = s; bi = c; end
    end
    return bi;
  endfunction

  task automatic search(logic [D-1:0] q);
    int lat, want;
    want = ref_class(q);
    @(negedge clk);
    query_hv = q; query_valid = 1; q_mode = MODE_INFER;
    @(negedge clk);
    query_valid = 0;
    lat = 1;
    while (!result_valid && lat < 50) begin @(negedge clk); lat++; end
    `CHECK(lat == F + 2, $sformatf("latency %0d want %0d", lat, F + 2))
    `CHECK(int'(result_class) == want, $sformatf("class %0d want %0d", result_class, want))
  endtask

  initial begin
    logic [D-1:0] q;
    for (int c = 0; c < C; c++) place[c] = c;
    place.shuffle();
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int c = 0; c < C; c++) begin
      @(negedge clk);
      map_we = 1; map_class = 3'(c); map_row = 3'(place[c]);
    end
    @(negedge clk);
    map_we = 0;
    for (int c = 0; c < C; c++) begin
      proto[c] = rnd();
      for (int p = 0; p < F; p++) begin
        @(negedge clk);
        am_prog_we = 1; am_prog_row = 5'(p*C + place[c]); am_prog_data = proto[c][p*S +: S];
      end
    end
    @(negedge clk);
    am_prog_we = 0;
    for (int it = 0; it < 30; it++) begin
      q = rnd();
      if (it % 4 == 0) q = proto[it % C] ^ (rnd() & rnd() & rnd());
      search(q);
    end
    // training: store a new prototype for class 3 through the AM write path
    q = rnd();
    @(negedge clk);
    query_hv = q; query_valid = 1; q_mode = MODE_TRAIN; q_label = 3'd3;
    @(negedge clk);
    query_valid = 0; q_mode = MODE_INFER;
    repeat (F) @(negedge clk);
    `CHECK(train_done, "train_done after f cycles")
    proto[3] = q;
    search(q);
    `CHECK(result_class == 3'd3, "trained prototype wins for its own hypervector")
    for (int it = 0; it < 10; it++) search(rnd());
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
