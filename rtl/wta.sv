// wta: winner-take-all over the class similarities.
//
// Returns the index of the largest of the C inputs and its value,
// combinationally. On a tie the lowest index wins (a choice of this design;
// the original only says the WTA finds the maximum and gives its index).
// It is a linear compare chain.
module wta #(
  parameter int unsigned C  = hdc_pkg::C_DEF,
  parameter int unsigned W  = $clog2(hdc_pkg::D_DEF + 1),
  localparam int unsigned CW = (C > 1) ? $clog2(C) : 1
) (
  input  logic [W-1:0]  vals [C],
  output logic [CW-1:0] win_idx,
  output logic [W-1:0]  win_val
);

  always_comb begin
    win_idx = '0;
    win_val = vals[0];
    for (int c = 1; c < int'(C); c++) begin
      if (vals[c] > win_val) begin
        win_idx = CW'(c);
        win_val = vals[c];
      end
    end
  end

endmodule
