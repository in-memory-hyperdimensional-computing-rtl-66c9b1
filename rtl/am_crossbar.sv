// am_crossbar: behavioural model of the associative-memory (AM) PCM crossbar
// with its gate-enable logic and A/D converters.
//
// The real part is an analog array of c*f rows by d/f columns. It is divided
// into f partitions r_1..r_f of c rows each; row r of partition p holds the
// p-th d/f-component segment of one prototype hypervector (which class is
// placed in which row is decided by the placement table of the AM search
// controller). A query segment applied as voltages on the column wordlines
// makes each row of the enabled partition carry a current equal to the dot
// product of the segment with the stored bits (Ohm's and Kirchhoff's laws),
// which the ADC of that row digitises. This model stores the cells as bits
// and returns the exact dot product, a popcount of (segment AND row), for
// the c rows of partition `part_sel`; conductance variation, drift and ADC
// quantisation are not modelled. It is written in synthesizable style but
// stands for an analog macro.
//
// Programming (`prog_we`) writes one row (address p*c + r) in one clock in
// place of the SET/RESET pulses of the real array. The dot products are
// combinational; the sum buffer registers them. Cells are not reset.
module am_crossbar #(
  parameter int unsigned D  = hdc_pkg::D_DEF,
  parameter int unsigned C  = hdc_pkg::C_DEF,
  parameter int unsigned F  = hdc_pkg::F_DEF,
  localparam int unsigned S  = D / F,
  localparam int unsigned R  = C * F,
  localparam int unsigned RW = (R > 1) ? $clog2(R) : 1,
  localparam int unsigned FW = (F > 1) ? $clog2(F) : 1,
  localparam int unsigned AW = $clog2(S + 1)
) (
  input  logic          clk,
  // programming port
  input  logic          prog_we,
  input  logic [RW-1:0] prog_row,
  input  logic [S-1:0]  prog_data,
  // in-memory dot product
  input  logic [FW-1:0] part_sel,        // partition_select
  input  logic [S-1:0]  wl_in,           // query segment on the wordline drivers
  output logic [AW-1:0] adc_out [C]      // one ADC result per row of the partition
);

  logic [S-1:0] cells [R];

  always_ff @(posedge clk) begin
    if (prog_we) cells[prog_row] <= prog_data;
  end

  always_comb begin
    for (int r = 0; r < int'(C); r++) begin
      adc_out[r] = '0;
      if (int'(part_sel) < int'(F))
        adc_out[r] = AW'($countones(cells[int'(part_sel)*int'(C) + r] & wl_in));
    end
  end

endmodule
