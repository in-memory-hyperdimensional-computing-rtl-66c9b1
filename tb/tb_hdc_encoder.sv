// tb_hdc_encoder: the encoder at reduced dimension (d = 64, h = 27, depth 8).
// Random basis hypervectors are programmed; random symbol sequences of
// several lengths and n-gram sizes are streamed in, with and without gaps.
// Each resulting hypervector is compared with a software model that forms
// every 2-minterm n-gram
//   (&_k B[s_k] << (k-1)) | (&_k ~B[s_k] << (k-1))
// (shift towards higher components, zeros shifted in), counts them per
// component and sets the bits whose count exceeds l >> (n-1).
`include "tb_check.svh"
module tb_hdc_encoder;
  import hdc_pkg::*;
  localparam int D = 64, H = 27, C = 22, NMAX = 8, LEN_W = 12;
  logic clk = 0, rst_n = 0;
  logic im_prog_we = 0;
  logic [4:0] im_prog_row = '0;
  logic [D-1:0] im_prog_data = '0;
  logic cfg_we = 0;
  logic [3:0] cfg_n = '0;
  logic [LEN_W-1:0] cfg_len = '0;
  hdc_mode_e seq_mode = MODE_INFER;
  logic [4:0] seq_label = '0;
  logic sym_valid = 0, sym_ready;
  logic [4:0] sym_idx = '0;
  logic am_busy = 0;
  logic [D-1:0] query_hv;
  logic query_valid, busy;
  hdc_mode_e q_mode;
  logic [4:0] q_label;
  logic [D-1:0] im [H];
  int checks = 0, failures = 0;

  hdc_encoder #(.D(D), .H(H), .C(C), .NMAX(NMAX), .LEN_W(LEN_W)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #5000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [D-1:0] ref_query(int seq[], int n);
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

  task automatic run(int n, int l, bit gappy, hdc_mode_e m, int lbl);
    int seq[];
    int k, guard;
    logic [D-1:0] want;
    seq = new[l];
    // a biased alphabet makes the counts spread around the threshold
    for (int i = 0; i < l; i++) seq[i] = ($urandom_range(0, 1) == 0) ? $urandom_range(0, 3) : $urandom_range(0, H - 1);
    want = ref_query(seq, n);
    @(negedge clk);
    cfg_we = 1; cfg_n = 4'(n); cfg_len = LEN_W'(l);
    @(negedge clk);
    cfg_we = 0;
    seq_mode = m; seq_label = 5'(lbl);
    k = 0; guard = 0;
    while (!query_valid && guard < 100000) begin
      sym_valid = (k < l) && (!gappy || $urandom_range(0, 2) == 0);
      sym_idx = (k < l) ? 5'(seq[k]) : '0;
      @(posedge clk);
      if (sym_valid && sym_ready) k++;
      @(negedge clk);
      guard++;
    end
    sym_valid = 0;
    `CHECK(query_valid, "query_valid reached")
    `CHECK(query_hv == want, $sformatf("n=%0d l=%0d: %h want %h", n, l, query_hv, want))
    `CHECK(q_mode == m && int'(q_label) == lbl, "mode and label")
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int r = 0; r < H; r++) begin
      @(negedge clk);
      im_prog_we = 1; im_prog_row = 5'(r); im_prog_data = {$urandom(), $urandom()}; im[r] = im_prog_data;
    end
    @(negedge clk);
    im_prog_we = 0;
    run(4, 40, 0, MODE_INFER, 0);
    run(5, 60, 1, MODE_TRAIN, 7);
    run(4, 12, 1, MODE_INFER, 21);
    run(3, 30, 0, MODE_INFER, 2);
    run(2, 25, 0, MODE_TRAIN, 5);
    run(1, 20, 1, MODE_INFER, 1);
    run(8, 50, 0, MODE_INFER, 3);
    run(6, 6, 0, MODE_INFER, 4);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
