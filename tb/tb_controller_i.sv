// tb_controller_i: drives the encoder controller (depth 8) through sequences
// with several n-gram sizes and lengths, with a continuous and a gappy
// symbol stream and with the AM search held busy. A cycle monitor checks
// that every n-gram is n cycles of mt_load with rd_ptr = 0..n-1 and
// ngram_start only on the first, that ngram_end follows each one by a cycle,
// that a sequence of l symbols yields l shifts, l-n+1 n-grams, one
// query_end (never with ngram_end or with am_busy) and a query_valid one
// cycle later, that a steady stream gives one n-gram per n cycles, and that
// the threshold is l >> (n-1). Mode and label must travel to q_mode/q_label.
`include "tb_check.svh"
module tb_controller_i;
  import hdc_pkg::*;
  localparam int NMAX = 8, C = 22, LEN_W = 12;
  logic clk = 0, rst_n = 0;
  logic cfg_we = 0;
  logic [3:0] cfg_n = '0;
  logic [LEN_W-1:0] cfg_len = '0;
  hdc_mode_e seq_mode = MODE_INFER;
  logic [4:0] seq_label = '0;
  logic sym_valid = 0, sym_ready, am_busy = 0;
  logic ngram_shift, ngram_start, mt_load, ngram_end, query_end, query_valid, busy;
  logic [2:0] rd_ptr;
  hdc_mode_e q_mode;
  logic [4:0] q_label;
  logic [LEN_W-1:0] threshold;
  int checks = 0, failures = 0;

  controller_i #(.NMAX(NMAX), .C(C), .LEN_W(LEN_W)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // cycle monitor
  int cur_n = 4;
  int j = -1;
  int n_shift = 0, n_end = 0, n_qend = 0, n_qvalid = 0, n_stall_out = 0;
  logic last_enc_q = 0, qend_q = 0;
  int last_end_cycle = -1, cycle = 0, min_gap = 1000;
  always @(posedge clk) if (rst_n) begin
    cycle++;
    if (ngram_shift) n_shift++;
    `CHECK(ngram_end == last_enc_q, "ngram_end one cycle after the n-th encoding cycle")
    `CHECK(query_valid == qend_q, "query_valid one cycle after query_end")
    if (ngram_end) begin
      n_end++;
      if (last_end_cycle >= 0 && cycle - last_end_cycle < min_gap) min_gap = cycle - last_end_cycle;
      last_end_cycle = cycle;
    end
    if (query_end) begin
      n_qend++;
      `CHECK(!ngram_end && !am_busy, "query_end never with ngram_end or busy AM")
    end
    if (query_valid) n_qvalid++;
    if (am_busy && int'(dut.state_q) == 2 && !ngram_end) n_stall_out++;
    last_enc_q = 1'b0;
    if (mt_load) begin
      if (ngram_start) j = 0; else j++;
      `CHECK(int'(rd_ptr) == j, $sformatf("rd_ptr %0d want %0d", rd_ptr, j))
      `CHECK(ngram_start == (j == 0), "ngram_start only in the first cycle")
      if (j == cur_n - 1) last_enc_q = 1'b1;
    end
    qend_q = query_end;
  end

  task automatic run_seq(int n, int len, bit gappy, bit hold_am, hdc_mode_e m, int lbl);
    int s0, e0, q0, v0, got;
    cur_n = n;
    @(negedge clk);
    cfg_we = 1; cfg_n = 4'(n); cfg_len = LEN_W'(len);
    @(negedge clk);
    cfg_we = 0;
    `CHECK(threshold == LEN_W'(len >> (n-1)), "threshold = l >> (n-1)")
    s0 = n_shift; e0 = n_end; q0 = n_qend; v0 = n_qvalid;
    seq_mode = m; seq_label = 5'(lbl);
    am_busy = hold_am;
    got = 0;
    min_gap = 1000;
    while (got < len) begin
      sym_valid = gappy ? ($urandom_range(0, 2) == 0) : 1'b1;
      @(posedge clk);
      if (sym_valid && sym_ready) got++;
      @(negedge clk);
      if (got > 0) begin seq_mode = MODE_INFER; seq_label = '0; end
    end
    sym_valid = 0;
    if (hold_am) begin
      repeat (3 * n + 6) @(negedge clk);
      `CHECK(n_qend == q0, "query_end held while AM busy")
      am_busy = 0;
    end
    repeat (3 * n + 6) @(negedge clk);
    `CHECK(n_shift - s0 == len, $sformatf("shifts %0d want %0d", n_shift - s0, len))
    `CHECK(n_end - e0 == len - n + 1, $sformatf("n-grams %0d want %0d", n_end - e0, len - n + 1))
    `CHECK(n_qend - q0 == 1 && n_qvalid - v0 == 1, "one query_end and one query_valid")
    `CHECK(q_mode == m && int'(q_label) == lbl, $sformatf("mode and label travel with the query: %0d %0d want %0d %0d", q_mode, q_label, m, lbl))
    if (!gappy && len - n + 1 >= 2)
      `CHECK(min_gap == n, $sformatf("steady stream: one n-gram every %0d cycles, want %0d", min_gap, n))
    `CHECK(!busy, "controller idle after the sequence")
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    run_seq(4, 10, 0, 0, MODE_INFER, 3);
    run_seq(5, 12, 0, 0, MODE_TRAIN, 7);
    run_seq(3, 9, 1, 0, MODE_INFER, 21);
    run_seq(1, 5, 0, 0, MODE_TRAIN, 1);
    run_seq(8, 8, 0, 1, MODE_INFER, 2);
    run_seq(2, 7, 1, 1, MODE_TRAIN, 11);
    `CHECK(n_stall_out > 0, "output stall exercised")
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
