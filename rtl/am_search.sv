// am_search: the associative-memory search module with the dotp similarity
// metric and coarse-grained randomised partitioning.
//
// The c prototype hypervectors are stored in an AM crossbar of c*f rows by
// d/f columns: partition p holds segment p of every prototype, in the row
// given by the placement table. For a query, the controller applies the f
// query segments one per cycle through the segment multiplexers; the ADC
// results of the enabled partition are added class by class in the sum
// buffer; a winner-take-all circuit then picks the class with the largest
// dot product Q . P_c. In training the same segments are written into the
// rows of the label's class instead.
//
// Interface: `query_*` from the encoder; `am_prog_*` lets the host program a
// row directly (prototypes trained elsewhere), and is ignored while a
// training write is in progress; `map_*` programs the placement table.
// Timing: see controller_ii (inference f + 2 cycles from query_valid to
// result_valid).
//
// The structure follows the original design; only the dotp metric (one
// crossbar, no complementary array) is built, as in its main configuration.
module am_search #(
  parameter int unsigned D  = hdc_pkg::D_DEF,
  parameter int unsigned C  = hdc_pkg::C_DEF,
  parameter int unsigned F  = hdc_pkg::F_DEF,
  localparam int unsigned S  = D / F,
  localparam int unsigned R  = C * F,
  localparam int unsigned RW = (R > 1) ? $clog2(R) : 1,
  localparam int unsigned FW = (F > 1) ? $clog2(F) : 1,
  localparam int unsigned CW = (C > 1) ? $clog2(C) : 1,
  localparam int unsigned AW = $clog2(S + 1),
  localparam int unsigned SW = $clog2(D + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [D-1:0]  query_hv,
  input  logic          query_valid,
  input  hdc_pkg::hdc_mode_e q_mode,
  input  logic [CW-1:0] q_label,
  input  logic          am_prog_we,
  input  logic [RW-1:0] am_prog_row,
  input  logic [S-1:0]  am_prog_data,
  input  logic          map_we,
  input  logic [CW-1:0] map_class,
  input  logic [CW-1:0] map_row,
  output logic          busy,
  output logic          result_valid,
  output logic [CW-1:0] result_class,
  output logic          train_done
);

  logic [FW-1:0] part_sel;
  logic [S-1:0]  seg;
  logic          acc_en, acc_first, ctl_we;
  logic [RW-1:0] ctl_row;
  logic [CW-1:0] row_of_class [C];
  logic [AW-1:0] adc [C];
  logic [SW-1:0] sums [C];
  logic [CW-1:0] wta_idx;
  logic          xb_we;
  logic [RW-1:0] xb_row;
  logic [S-1:0]  xb_data;

  controller_ii #(.C(C), .F(F)) u_ctrl (
    .clk, .rst_n, .query_valid, .q_mode, .q_label,
    .map_we, .map_class, .map_row, .row_of_class,
    .part_sel, .acc_en, .acc_first, .am_we(ctl_we), .am_row(ctl_row),
    .wta_idx, .busy, .result_valid, .result_class, .train_done
  );

  segment_mux #(.D(D), .F(F)) u_mux (.hv(query_hv), .sel(part_sel), .seg);

  // Training writes from the controller take precedence over host writes.
  assign xb_we   = ctl_we | am_prog_we;
  assign xb_row  = ctl_we ? ctl_row : am_prog_row;
  assign xb_data = ctl_we ? seg     : am_prog_data;

  am_crossbar #(.D(D), .C(C), .F(F)) u_xbar (
    .clk, .prog_we(xb_we), .prog_row(xb_row), .prog_data(xb_data),
    .part_sel, .wl_in(seg), .adc_out(adc)
  );

  sum_buffer #(.D(D), .C(C), .F(F)) u_sum (
    .clk, .rst_n, .acc_en, .acc_first, .adc_in(adc), .row_of_class, .sums
  );

  wta #(.C(C), .W(SW)) u_wta (.vals(sums), .win_idx(wta_idx), .win_val());

endmodule
