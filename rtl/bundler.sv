// bundler: accumulates n-gram hypervectors into a sum hypervector and
// binarises it into the query (inference) or prototype (training)
// hypervector.
//
// There is one LEN_W-bit counter per component. In a cycle with `ngram_end`
// high every counter whose n-gram bit is 1 is incremented. In a cycle with
// `query_end` high each component of the output register becomes
//   1 if threshold < sum, else 0,
// and all counters are cleared for the next sequence. The threshold,
// l / 2^(n - log2 k) for a sequence of l symbols and k = 2 minterms, is
// computed by the controller and given as an input. The output register
// holds its value until the next `query_end`, so the AM search can read it
// while the next sequence is being bundled.
//
// Counters, threshold comparators and output register follow the original
// design; the strict comparison and the counter width (enough for the
// longest training text, about 2 million symbols) are choices of this design.
// The counters cannot overflow because a sequence is limited to 2^LEN_W - 1
// symbols. Reset clears counters and output.
module bundler #(
  parameter int unsigned D     = hdc_pkg::D_DEF,
  parameter int unsigned LEN_W = hdc_pkg::LEN_W_DEF
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             ngram_end,   // accumulate `ngram`
  input  logic [D-1:0]     ngram,       // n-gram hypervector G
  input  logic             query_end,   // binarise and clear
  input  logic [LEN_W-1:0] threshold,
  output logic [D-1:0]     query_hv     // query / prototype hypervector
);

  logic [LEN_W-1:0] sum_q [D];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < int'(D); i++) sum_q[i] <= '0;
      query_hv <= '0;
    end else if (query_end) begin
      for (int i = 0; i < int'(D); i++) begin
        query_hv[i] <= (threshold < sum_q[i]);
        sum_q[i]    <= '0;
      end
    end else if (ngram_end) begin
      for (int i = 0; i < int'(D); i++)
        sum_q[i] <= sum_q[i] + LEN_W'(ngram[i]);
    end
  end

endmodule
