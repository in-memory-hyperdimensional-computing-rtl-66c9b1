// hdc_encoder: the in-memory 2-minterm n-gram encoder with its bundler.
//
// A stream of symbol indices is turned into one d-bit hypervector per
// sequence of l symbols: the query hypervector in inference, the class
// prototype in training. For every window of n consecutive symbols s[1..n]
// it computes the 2-minterm approximation of the n-gram
//   G = (B[1] & rho(B[2]) & ... & rho^(n-1)(B[n]))
//     | (~B[1] & rho(~B[2]) & ... & rho^(n-1)(~B[n]))
// where B[k] is the basis hypervector of s[k] and rho is a 1-bit
// non-circular shift. The basis hypervectors live in the original IM
// crossbar and their complements in the complementary IM crossbar; each AND
// is an in-memory read with the minterm buffer (shifted) on the gate lines,
// so an n-gram takes n cycles, newest symbol first. The two minterm buffers
// are combined by an OR array and bundled.
//
// Interface: `im_prog_*` writes basis hypervector `im_prog_data` into row
// `im_prog_row` of the original IM and its complement into the same row of
// the complementary IM. `cfg_*`, `seq_*`, `sym_*` and `am_busy` are those of
// controller_i. `query_hv` is valid from the cycle `query_valid` pulses until
// the next sequence ends; `q_mode` / `q_label` travel with it.
//
// The structure (index buffer, two IM crossbars with sense amplifiers, two
// minterm buffers, OR array, bundler, controller) follows the original
// design; widths and handshakes are choices of this design.
module hdc_encoder #(
  parameter int unsigned D     = hdc_pkg::D_DEF,
  parameter int unsigned H     = hdc_pkg::H_DEF,
  parameter int unsigned C     = hdc_pkg::C_DEF,
  parameter int unsigned NMAX  = hdc_pkg::NMAX_DEF,
  parameter int unsigned LEN_W = hdc_pkg::LEN_W_DEF,
  localparam int unsigned IW   = (H > 1) ? $clog2(H) : 1,
  localparam int unsigned NW   = $clog2(NMAX + 1),
  localparam int unsigned CW   = (C > 1) ? $clog2(C) : 1,
  localparam int unsigned PW   = (NMAX > 1) ? $clog2(NMAX) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  // IM programming
  input  logic             im_prog_we,
  input  logic [IW-1:0]    im_prog_row,
  input  logic [D-1:0]     im_prog_data,
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
  // to the AM search
  input  logic             am_busy,
  output logic [D-1:0]     query_hv,
  output logic             query_valid,
  output hdc_pkg::hdc_mode_e q_mode,
  output logic [CW-1:0]    q_label,
  output logic             busy
);

  logic             ngram_shift, ngram_start, mt_load, ngram_end, query_end;
  logic [PW-1:0]    rd_ptr;
  logic [IW-1:0]    row_idx;
  logic [LEN_W-1:0] threshold;
  logic [D-1:0]     gate_o, gate_c, sa_o, sa_c, mt_o, mt_c, ngram_hv;

  controller_i #(.NMAX(NMAX), .C(C), .LEN_W(LEN_W)) u_ctrl (
    .clk, .rst_n, .cfg_we, .cfg_n, .cfg_len, .seq_mode, .seq_label,
    .sym_valid, .sym_ready, .am_busy,
    .ngram_shift, .rd_ptr, .ngram_start, .mt_load, .ngram_end, .query_end,
    .query_valid, .q_mode, .q_label, .threshold, .busy
  );

  index_buffer #(.H(H), .NMAX(NMAX)) u_idx (
    .clk, .rst_n, .shift(ngram_shift), .sym_idx, .rd_ptr, .rd_idx(row_idx)
  );

  im_crossbar #(.D(D), .H(H)) u_im_orig (
    .clk, .prog_we(im_prog_we), .prog_row(im_prog_row), .prog_data(im_prog_data),
    .row_sel(row_idx), .gate_lines(gate_o), .sa_out(sa_o)
  );

  im_crossbar #(.D(D), .H(H)) u_im_comp (
    .clk, .prog_we(im_prog_we), .prog_row(im_prog_row), .prog_data(~im_prog_data),
    .row_sel(row_idx), .gate_lines(gate_c), .sa_out(sa_c)
  );

  minterm_buffer #(.D(D)) u_mt_orig (
    .clk, .rst_n, .start(ngram_start), .load(mt_load), .sa_in(sa_o),
    .gate_lines(gate_o), .minterm(mt_o)
  );

  minterm_buffer #(.D(D)) u_mt_comp (
    .clk, .rst_n, .start(ngram_start), .load(mt_load), .sa_in(sa_c),
    .gate_lines(gate_c), .minterm(mt_c)
  );

  // OR array: merge the two minterms into the n-gram hypervector.
  assign ngram_hv = mt_o | mt_c;

  bundler #(.D(D), .LEN_W(LEN_W)) u_bundler (
    .clk, .rst_n, .ngram_end, .ngram(ngram_hv), .query_end, .threshold, .query_hv
  );

endmodule
