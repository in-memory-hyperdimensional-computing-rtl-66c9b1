// tb_hdc_top: end-to-end test of the whole engine at reduced size
// (d = 200, h = 27, c = 5, f = 10, depth 8).
//
// Each class is a "language": a random first-order symbol source with its
// own preferred successors. The test
//   1. programs random basis hypervectors and a shuffled placement table,
//   2. trains classes 0..3 on the chip (training mode, n = 4): the encoded
//      prototype is written into the AM by the AM search controller,
//   3. programs class 4 from the host with a prototype from the software
//      model (host AM write path),
//   4. streams inference queries back to back (so the encoder must wait for
//      the AM search), some with gaps in the symbol stream, and checks every
//      predicted class against a software model of the same 2-minterm
//      encoder and dotp search,
//   5. switches the n-gram size to 5, retrains and checks again.
// It counts how often each mechanism happened (training write, host write,
// inference result, input stall, output stall, n-gram size switch) and
// fails a mechanism that never occurred. Accuracy against the true source
// class is printed for information only.
`include "tb_check.svh"
module tb_hdc_top;
  import hdc_pkg::*;
  localparam int D = 200, H = 27, C = 5, F = 10, NMAX = 8, LEN_W = 12;
  localparam int S = D / F;
  logic clk = 0, rst_n = 0;
  logic im_prog_we = 0;
  logic [4:0] im_prog_row = '0;
  logic [D-1:0] im_prog_data = '0;
  logic am_prog_we = 0;
  logic [5:0] am_prog_row = '0;
  logic [S-1:0] am_prog_data = '0;
  logic map_we = 0;
  logic [2:0] map_class = '0, map_row = '0;
  logic cfg_we = 0;
  logic [3:0] cfg_n = '0;
  logic [LEN_W-1:0] cfg_len = '0;
  hdc_mode_e seq_mode = MODE_INFER;
  logic [2:0] seq_label = '0;
  logic sym_valid = 0, sym_ready;
  logic [4:0] sym_idx = '0;
  logic result_valid, train_done, enc_busy, am_busy;
  logic [2:0] result_class;

  hdc_top #(.D(D), .H(H), .C(C), .F(F), .NMAX(NMAX), .LEN_W(LEN_W)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  logic [D-1:0] im [H];
  logic [D-1:0] proto [C];
  int succ [C][H];          // preferred successor of each symbol, per class
  int place [C];

  initial begin
    #20000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- mechanism counters ----------------
  int n_train = 0, n_result = 0, n_in_stall = 0, n_out_stall = 0, n_host = 0, n_switch = 0;
  int results[$];
  logic [3:0] last_n = 4'd4;
  always @(posedge clk) if (rst_n) begin
    if (train_done) n_train++;
    if (dut.u_enc.u_ctrl.n_q != last_n) begin n_switch++; last_n = dut.u_enc.u_ctrl.n_q; end
    if (result_valid) begin n_result++; results.push_back(int'(result_class)); end
    if (enc_busy && sym_ready && !sym_valid) n_in_stall++;
    if (am_busy && int'(dut.u_enc.u_ctrl.state_q) == 2 && !dut.u_enc.u_ctrl.ngram_end) n_out_stall++;
  end

  // ---------------- software model ----------------
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

  // ---------------- stimulus helpers ----------------
  task automatic configure(int n, int l);
    while (enc_busy || am_busy) @(negedge clk);
    cfg_we = 1; cfg_n = 4'(n); cfg_len = LEN_W'(l);
    @(negedge clk);
    cfg_we = 0;
  endtask

  // stream one sequence; no idle cycle before or after unless gappy
  task automatic stream(int seq[], hdc_mode_e m, int lbl, bit gappy);
    int k = 0;
    seq_mode = m; seq_label = 3'(lbl);
    while (k < seq.size()) begin
      sym_valid = !gappy || ($urandom_range(0, 3) != 0);
      sym_idx = 5'(seq[k]);
      @(posedge clk);
      if (sym_valid && sym_ready) k++;
      @(negedge clk);
    end
    sym_valid = 0;
  endtask

  task automatic wait_idle();
    int g = 0;
    repeat (3) @(negedge clk);
    while ((enc_busy || am_busy) && g < 100000) begin @(negedge clk); g++; end
    repeat (3) @(negedge clk);
  endtask

  task automatic train_all(int n, int l);
    int seq[];
    configure(n, l);
    for (int c = 0; c < C - 1; c++) begin
      int t0 = n_train;
      gen_seq(c, l, seq);
      proto[c] = ref_encode(seq, n);
      stream(seq, MODE_TRAIN, c, 0);
      wait_idle();
      `CHECK(n_train == t0 + 1, $sformatf("training of class %0d finished", c))
    end
    // last class from the host
    gen_seq(C - 1, l, seq);
    proto[C-1] = ref_encode(seq, n);
    for (int p = 0; p < F; p++) begin
      @(negedge clk);
      am_prog_we = 1; am_prog_row = 6'(p*C + place[C-1]); am_prog_data = proto[C-1][p*S +: S];
      n_host++;
    end
    @(negedge clk);
    am_prog_we = 0;
  endtask

  task automatic infer_batch(int n, int l, int nq, bit gappy);
    int seq[];
    int want[$], truth[$];
    int r0, correct;
    configure(n, l);
    r0 = results.size();
    for (int i = 0; i < nq; i++) begin
      int cls = $urandom_range(0, C - 1);
      gen_seq(cls, l, seq);
      want.push_back(ref_search(ref_encode(seq, n)));
      truth.push_back(cls);
      stream(seq, MODE_INFER, 0, gappy && (i % 2 == 1));
    end
    wait_idle();
    `CHECK(results.size() - r0 == nq, $sformatf("%0d results for %0d queries", results.size() - r0, nq))
    correct = 0;
    for (int i = 0; i < nq && r0 + i < results.size(); i++) begin
      `CHECK(results[r0 + i] == want[i], $sformatf("query %0d: class %0d want %0d", i, results[r0 + i], want[i]))
      if (results[r0 + i] == truth[i]) correct++;
    end
    $display("n=%0d l=%0d: %0d of %0d queries assigned to their source class", n, l, correct, nq);
  endtask

  initial begin
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
      map_we = 1; map_class = 3'(c); map_row = 3'(place[c]);
    end
    @(negedge clk);
    map_we = 0;

    train_all(4, 400);
    infer_batch(4, 40, 12, 1);
    // short queries back to back: the encoder has to wait for the AM search
    infer_batch(4, 4, 8, 0);
    train_all(5, 400);
    infer_batch(5, 50, 10, 1);

    `CHECK(n_train > 0, "mechanism: training write into the AM")
    `CHECK(n_host > 0, "mechanism: host AM programming")
    `CHECK(n_result > 0, "mechanism: inference result")
    `CHECK(n_in_stall > 0, "mechanism: input stall (symbol stream gap)")
    `CHECK(n_out_stall > 0, "mechanism: output stall (AM search busy)")
    `CHECK(n_switch > 0, "mechanism: n-gram size switch")
    $display("mechanisms: train=%0d host_rows=%0d results=%0d in_stall=%0d out_stall=%0d n_switch=%0d",
             n_train, n_host, n_result, n_in_stall, n_out_stall, n_switch);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
