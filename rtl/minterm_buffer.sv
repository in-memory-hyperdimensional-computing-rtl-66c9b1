// minterm_buffer: the register downstream of an IM crossbar's sense
// amplifiers, together with the gate-line logic that feeds it back.
//
// Every cycle in which `load` is high the SA outputs are registered. The gate
// lines of the crossbar are driven with the buffer content shifted by one
// component (component i takes component i-1, component 1 takes 0), which
// approximates the permutation rho of the n-gram by a non-circular 1-bit
// shift, as the original design does. While `start` is high all gate lines are
// on, so the first cycle of an n-gram loads the plain basis hypervector of the
// newest symbol. After j cycles the buffer holds
//   B[n] rho-shifted j-1 times AND ... AND B[n-j+1],
// i.e. after n cycles the minterm B[1] & rho(B[2]) & ... & rho^(n-1)(B[n]).
//
// Bit i of the vectors is component i+1. The original describes the shift as
// "to the right" for the original IM and "to the left" for the complementary
// IM; its figure draws the complementary array with its columns in reverse
// order, so both are the same shift in component index and one module serves
// both. Reset clears the buffer.
module minterm_buffer #(
  parameter int unsigned D = hdc_pkg::D_DEF
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,       // ngram_start: all gate lines on
  input  logic         load,        // register the SA outputs this cycle
  input  logic [D-1:0] sa_in,
  output logic [D-1:0] gate_lines,  // to the crossbar gate lines
  output logic [D-1:0] minterm      // buffer content
);

  logic [D-1:0] buf_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)    buf_q <= '0;
    else if (load) buf_q <= sa_in;
  end

  assign gate_lines = start ? '1 : {buf_q[D-2:0], 1'b0};
  assign minterm    = buf_q;

endmodule
