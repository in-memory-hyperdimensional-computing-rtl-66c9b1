// hdc_top: complete in-memory hyperdimensional computing engine: a 2-minterm
// in-memory n-gram encoder feeding an AM search engine (dotp metric,
// partition factor f).
//
// A sequence of l symbol indices enters on sym_valid/sym_ready. The encoder
// builds one query hypervector from it; in inference the AM search returns
// the index of the most similar class prototype on result_class with a
// one-cycle result_valid. In training (seq_mode = MODE_TRAIN at the first
// symbol, class in seq_label) the encoded prototype is written into the AM
// rows of that class instead, signalled by train_done.
//
// Before use the host programs the h basis hypervectors (im_prog_*; the
// complementary crossbar receives the complement automatically), optionally
// the c prototypes (am_prog_*, one d/f-bit row of partition p, row r at
// address p*c + r) and the placement table (map_*), and sets the n-gram size
// and sequence length (cfg_*) while the encoder is idle.
//
// Timing: n cycles per n-gram once the index buffer holds n symbols; the
// query is ready 3 cycles after the last n-gram's encoding; the AM search
// takes f + 2 cycles more. The encoder stalls its last step while the AM
// search still reads the previous query.
module hdc_top #(
  parameter int unsigned D     = hdc_pkg::D_DEF,
  parameter int unsigned H     = hdc_pkg::H_DEF,
  parameter int unsigned C     = hdc_pkg::C_DEF,
  parameter int unsigned F     = hdc_pkg::F_DEF,
  parameter int unsigned NMAX  = hdc_pkg::NMAX_DEF,
  parameter int unsigned LEN_W = hdc_pkg::LEN_W_DEF,
  localparam int unsigned S    = D / F,
  localparam int unsigned IW   = (H > 1) ? $clog2(H) : 1,
  localparam int unsigned NW   = $clog2(NMAX + 1),
  localparam int unsigned CW   = (C > 1) ? $clog2(C) : 1,
  localparam int unsigned RW   = (C * F > 1) ? $clog2(C * F) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  // IM programming
  input  logic             im_prog_we,
  input  logic [IW-1:0]    im_prog_row,
  input  logic [D-1:0]     im_prog_data,
  // AM programming
  input  logic             am_prog_we,
  input  logic [RW-1:0]    am_prog_row,
  input  logic [S-1:0]     am_prog_data,
  input  logic             map_we,
  input  logic [CW-1:0]    map_class,
  input  logic [CW-1:0]    map_row,
  // configure interface
  input  logic             cfg_we,
  input  logic [NW-1:0]    cfg_n,
  input  logic [LEN_W-1:0] cfg_len,
  input  hdc_pkg::hdc_mode_e seq_mode,
  input  logic [CW-1:0]    seq_label,
  // symbol stream
  input  logic             sym_valid,
  output logic             sym_ready,
  input  logic [IW-1:0]    sym_idx,
  // results
  output logic             result_valid,
  output logic [CW-1:0]    result_class,
  output logic             train_done,
  output logic             enc_busy,
  output logic             am_busy
);

  logic [D-1:0]       query_hv;
  logic               query_valid;
  hdc_pkg::hdc_mode_e q_mode;
  logic [CW-1:0]      q_label;

  hdc_encoder #(.D(D), .H(H), .C(C), .NMAX(NMAX), .LEN_W(LEN_W)) u_enc (
    .clk, .rst_n, .im_prog_we, .im_prog_row, .im_prog_data,
    .cfg_we, .cfg_n, .cfg_len, .seq_mode, .seq_label,
    .sym_valid, .sym_ready, .sym_idx,
    .am_busy, .query_hv, .query_valid, .q_mode, .q_label, .busy(enc_busy)
  );

  am_search #(.D(D), .C(C), .F(F)) u_am (
    .clk, .rst_n, .query_hv, .query_valid, .q_mode, .q_label,
    .am_prog_we, .am_prog_row, .am_prog_data, .map_we, .map_class, .map_row,
    .busy(am_busy), .result_valid, .result_class, .train_done
  );

endmodule
