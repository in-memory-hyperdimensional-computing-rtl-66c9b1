// segment_mux: the array of multiplexers between the encoder output register
// and the wordline drivers of the AM crossbar.
//
// The d-bit query hypervector is split into f segments of d/f components;
// segment p (p = 0..f-1, components p*d/f+1 .. (p+1)*d/f) is the part of the
// query that meets partition r_(p+1) of the AM. `sel` picks the segment;
// the output is combinational. The contiguous split follows the original
// design ("split query hypervector Q into f subvectors of equal length");
// bit i of the vectors is component i+1. d must be a multiple of f.
module segment_mux #(
  parameter int unsigned D  = hdc_pkg::D_DEF,
  parameter int unsigned F  = hdc_pkg::F_DEF,
  localparam int unsigned S  = D / F,
  localparam int unsigned FW = (F > 1) ? $clog2(F) : 1
) (
  input  logic [D-1:0]  hv,
  input  logic [FW-1:0] sel,
  output logic [S-1:0]  seg
);

  always_comb begin
    seg = '0;
    for (int p = 0; p < int'(F); p++)
      if (int'(sel) == p) seg = hv[p*S +: S];
  end

endmodule
