// im_crossbar: behavioural model of one item-memory (IM) PCM crossbar with
// its row decoder and sense-amplifier (SA) array.
//
// The real part is an analog array of h x d phase-change memory cells, each
// with an access transistor whose gate is driven by a per-column gate line.
// Row `row_sel` is read: a column carries current only if its cell is
// crystalline (logic 1) and its gate line is on, so the SA output is the
// component-wise AND of the stored row and the gate lines ("in-memory read
// logic"). This model stores the cells as bits and returns that AND directly;
// device variability, drift and SA offsets are not modelled. The model is
// written in synthesizable style, but stands for an analog macro.
//
// Programming (`prog_we`) writes one whole row in one clock, in place of the
// SET/RESET pulse sequence of the real array. Reading is combinational: the
// SA result is registered by the minterm buffer downstream. The encoder uses
// two instances, one holding the basis hypervectors B_i and one their
// complements. Cells are not reset (non-volatile); they must be programmed
// before use.
module im_crossbar #(
  parameter int unsigned D  = hdc_pkg::D_DEF,
  parameter int unsigned H  = hdc_pkg::H_DEF,
  localparam int unsigned IW = (H > 1) ? $clog2(H) : 1
) (
  input  logic          clk,
  // programming port
  input  logic          prog_we,
  input  logic [IW-1:0] prog_row,
  input  logic [D-1:0]  prog_data,
  // in-memory read logic
  input  logic [IW-1:0] row_sel,     // row decoder input s[k]
  input  logic [D-1:0]  gate_lines,  // one gate control line per column
  output logic [D-1:0]  sa_out       // sense-amplifier outputs
);

  logic [D-1:0] cells [H];

  always_ff @(posedge clk) begin
    if (prog_we) cells[prog_row] <= prog_data;
  end

  always_comb begin
    sa_out = '0;
    if (int'(row_sel) < int'(H)) sa_out = cells[row_sel] & gate_lines;
  end

endmodule
