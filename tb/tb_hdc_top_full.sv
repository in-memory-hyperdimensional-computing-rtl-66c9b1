// tb_hdc_top_full: the engine at its default size (d = 10,000, h = 27,
// c = 22, f = 10, n-gram depth 8), taken through complete operations.
// Random basis hypervectors are programmed into the IM; 22 class prototypes,
// each encoded in software from a 300-symbol text of its class, are written
// by the host into a shuffled placement of the AM. One class is then
// retrained on the chip (training mode, n = 4), and inference queries of
// 80 symbols are run; each predicted class must equal the software model of
// the same 2-minterm encoder and dotp search. The AM search latency
// (f + 2 cycles from query_valid to result_valid) is checked.
`include "tb_check.svh"
module tb_hdc_top_full;
  import hdc_pkg::*;
  localparam int D = 10000, H = 27, C = 22, F = 10, S = D / F;
  localparam int N = 4;
  logic clk = 0, rst_n = 0;
  logic im_prog_we = 0;
  logic [4:0] im_prog_row = '0;
  logic [D-1:0] im_prog_data = '0;
  logic am_prog_we = 0;
  logic [7:0] am_prog_row = '0;
  logic [S-1:0] am_prog_data = '0;
  logic map_we = 0;
  logic [4:0] map_class = '0, map_row = '0;
  logic cfg_we = 0;
  logic [3:0] cfg_n = '0;
  logic [20:0] cfg_len = '0;
  hdc_mode_e seq_mode = MODE_INFER;
  logic [4:0] seq_label = '0;
  logic sym_valid = 0, sym_ready;
  logic [4:0] sym_idx = '0;
  logic result_valid, train_done, enc_busy, am_busy;
  logic [4:0] result_class;

  hdc_top dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  logic [D-1:0] im [H];
  logic [D-1:0] proto [C];
  int succ [C][H];
  int place [C];

  initial begin
    #50000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [D-1:0] rnd();
    logic [D-1:0] v;
    for (int i = 0; i < D; i += 32) v[i +: 32] = $urandom();
    return v;
  endfunction

  function automatic logic [D-1:0] ref_encode(int seq[], int n);
    int cnt [D];
    int l = seq.size();
    logic [D-1:0] q;
    for (int i = 0; i < D; i++) cnt[i] = 0;
    for (int t = n - 1; t < l; t++) begin
      logic [D-1:0] m1, m0;
      m1 = '1; m0 = '1;
      for (int k = 1; k <= n; k++) begin
        m1 &= im[seq[t - n + k]] << (k - 1);
        m0 &= (~im[seq[t - n + k]]) << (k - 1);
      end
      for (int i = 0; i < D; i++) cnt[i] += int'(m1[i] | m0[i]);
    end
    for (int i = 0; i < D; i++) q[i] = ((l >> (n - 1)) < cnt[i]);
    return q;
  endfunction

  function automatic int ref_search(logic [D-1:0] q);
    int best = -1, bi = 0;
    for (int c = 0; c < C; c++) begin
      int s;
      s = $countones(q & proto[c]);
      if (s > best) begin best = s; bi = c; end
    end
    return bi;
  endfunction

  function automatic void gen_seq(int cls, int l, ref int seq[]);
    seq = new[l];
    seq[0] = $urandom_range(0, H - 1);
    for (int i = 1; i < l; i++)
      seq[i] = ($urandom_range(0, 9) < 7) ? succ[cls][seq[i-1]] : $urandom_range(0, H - 1);
  endfunction

  task automatic configure(int l);
    while (enc_busy || am_busy) @(negedge clk);
    cfg_we = 1; cfg_n = 4'(N); cfg_len = 21'(l);
    @(negedge clk);
    cfg_we = 0;
  endtask

  task automatic stream(int seq[], hdc_mode_e m, int lbl);
    int k = 0;
    seq_mode = m; seq_label = 5'(lbl);
    while (k < seq.size()) begin
      sym_valid = 1; sym_idx = 5'(seq[k]);
      @(posedge clk);
      if (sym_ready) k++;
      @(negedge clk);
    end
    sym_valid = 0;
  endtask

  initial begin
    int seq[];
    for (int c = 0; c < C; c++)
      for (int s = 0; s < H; s++) succ[c][s] = $urandom_range(0, H - 1);
    for (int c = 0; c < C; c++) place[c] = c;
    place.shuffle();
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int r = 0; r < H; r++) begin
      @(negedge clk);
      im_prog_we = 1; im_prog_row = 5'(r); im_prog_data = rnd(); im[r] = im_prog_data;
    end
    @(negedge clk);
    im_prog_we = 0;
    for (int c = 0; c < C; c++) begin
      @(negedge clk);
      map_we = 1; map_class = 5'(c); map_row = 5'(place[c]);
    end
    @(negedge clk);
    map_we = 0;
    // host programming of the AM with software-trained prototypes
    for (int c = 0; c < C; c++) begin
      gen_seq(c, 300, seq);
      proto[c] = ref_encode(seq, N);
      for (int p = 0; p < F; p++) begin
        @(negedge clk);
        am_prog_we = 1; am_prog_row = 8'(p*C + place[c]); am_prog_data = proto[c][p*S +: S];
      end
    end
    @(negedge clk);
    am_prog_we = 0;

    // on-chip training of class 5
    configure(300);
    gen_seq(5, 300, seq);
    proto[5] = ref_encode(seq, N);
    stream(seq, MODE_TRAIN, 5);
    begin
      int g = 0;
      while (!train_done && g < 1000) begin @(negedge clk); g++; end
      `CHECK(train_done, "on-chip training finished")
    end

    // inference
    configure(80);
    for (int qi = 0; qi < 4; qi++) begin
      int cls, want, lat;
      cls = (qi == 0) ? 5 : $urandom_range(0, C - 1);
      gen_seq(cls, 80, seq);
      want = ref_search(ref_encode(seq, N));
      stream(seq, MODE_INFER, 0);
      lat = 0;
      while (!dut.query_valid && lat < 1000) begin @(negedge clk); lat++; end
      lat = 0;
      while (!result_valid && lat < 1000) begin @(posedge clk); #1; lat++; end
      `CHECK(lat == F + 2, $sformatf("AM search latency %0d want %0d", lat, F + 2))
      `CHECK(int'(result_class) == want, $sformatf("query %0d: class %0d want %0d (source %0d)", qi, result_class, want, cls))
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
