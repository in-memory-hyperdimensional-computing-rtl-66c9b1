// sum_buffer: class-wise accumulation of the partial dot products.
//
// One SUM_W-bit register per class. In a cycle with `acc_en` high, register
// c takes the ADC result of the partition row that holds class c
// (`row_of_class[c]`) and adds it to its content, or replaces its content
// when `acc_first` is also high (first partition of a query). After the f-th
// partition each register holds the full dot product Q . P_c, at most d.
//
// The routing by class and the accumulation over the f partitions follow the
// original design; the load-on-first-partition scheme and the widths are
// choices of this design. Reset clears the registers.
module sum_buffer #(
  parameter int unsigned D  = hdc_pkg::D_DEF,
  parameter int unsigned C  = hdc_pkg::C_DEF,
  parameter int unsigned F  = hdc_pkg::F_DEF,
  localparam int unsigned S  = D / F,
  localparam int unsigned AW = $clog2(S + 1),
  localparam int unsigned SW = $clog2(D + 1),
  localparam int unsigned CW = (C > 1) ? $clog2(C) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          acc_en,
  input  logic          acc_first,
  input  logic [AW-1:0] adc_in [C],
  input  logic [CW-1:0] row_of_class [C],
  output logic [SW-1:0] sums [C]
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int c = 0; c < int'(C); c++) sums[c] <= '0;
    end else if (acc_en) begin
      for (int c = 0; c < int'(C); c++)
        sums[c] <= (acc_first ? SW'(0) : sums[c]) + SW'(adc_in[row_of_class[c]]);
    end
  end

endmodule
