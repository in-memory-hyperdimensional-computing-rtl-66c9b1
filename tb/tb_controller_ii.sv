// tb_controller_ii: drives the AM search controller (c = 4, f = 3) with
// inference and training requests. Checks that partition_select steps
// 0..f-1 on consecutive cycles, that the sum buffer is told to load on the
// first partition and add on the others, that result_valid comes f + 2
// cycles after query_valid with the WTA index captured, that a training run
// writes rows p*c + row_of_class[label] for p = 0..f-1 and ends with
// train_done f + 1 cycles after the request, and that the placement table
// resets to identity and takes host writes.
`include "tb_check.svh"
module tb_controller_ii;
  import hdc_pkg::*;
  localparam int C = 4, F = 3;
  logic clk = 0, rst_n = 0;
  logic query_valid = 0;
  hdc_mode_e q_mode = MODE_INFER;
  logic [1:0] q_label = '0;
  logic map_we = 0;
  logic [1:0] map_class = '0, map_row = '0;
  logic [1:0] row_of_class [C];
  logic [1:0] part_sel;
  logic acc_en, acc_first, am_we;
  logic [3:0] am_row;
  logic [1:0] wta_idx = '0;
  logic busy, result_valid, train_done;
  logic [1:0] result_class;
  int checks = 0, failures = 0;

  controller_ii #(.C(C), .F(F)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic infer(int win);
    @(negedge clk);
    query_valid = 1; q_mode = MODE_INFER; wta_idx = 2'(win);
    @(negedge clk);
    query_valid = 0;
    for (int p = 0; p < F; p++) begin
      `CHECK(busy && acc_en && !am_we && int'(part_sel) == p && acc_first == (p == 0),
             $sformatf("inference step %0d", p))
      `CHECK(!result_valid, "no early result")
      @(negedge clk);
    end
    `CHECK(!result_valid && !acc_en, "WTA cycle")
    @(negedge clk);
    // f + 2 cycles after query_valid
    `CHECK(result_valid && int'(result_class) == win, $sformatf("result %0d want %0d", result_class, win))
    @(negedge clk);
    `CHECK(!result_valid && !busy, "result pulse is one cycle")
  endtask

  task automatic train(int lbl);
    @(negedge clk);
    query_valid = 1; q_mode = MODE_TRAIN; q_label = 2'(lbl);
    @(negedge clk);
    query_valid = 0; q_mode = MODE_INFER; q_label = '0;
    for (int p = 0; p < F; p++) begin
      `CHECK(am_we && !acc_en && int'(part_sel) == p && int'(am_row) == p*C + int'(row_of_class[lbl]),
             $sformatf("training write %0d row %0d", p, am_row))
      `CHECK(!train_done, "no early train_done")
      @(negedge clk);
    end
    `CHECK(train_done && !am_we && !result_valid, "train_done after f writes")
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int c = 0; c < C; c++) `CHECK(int'(row_of_class[c]) == c, "identity placement after reset")
    infer(2);
    infer(0);
    train(1);
    // permute the placement: class c -> row (c + 1) mod C
    for (int c = 0; c < C; c++) begin
      @(negedge clk);
      map_we = 1; map_class = 2'(c); map_row = 2'((c + 1) % C);
    end
    @(negedge clk);
    map_we = 0;
    for (int c = 0; c < C; c++) `CHECK(int'(row_of_class[c]) == (c + 1) % C, "placement table write")
    train(3);
    train(0);
    infer(3);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
