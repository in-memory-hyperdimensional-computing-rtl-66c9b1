// index_buffer: holds the indices of the most recent symbols of the input
// sequence and feeds one of them to the row decoders of both IM crossbars.
//
// It is a shift register of NMAX entries of clog2(H) bits. When `shift` is
// high the incoming symbol index enters entry 0 and every entry moves one
// place back, so entry k holds the symbol that arrived k symbols ago.
// `rd_ptr` selects the entry driven on `rd_idx` combinationally. With an
// n-gram window s[1..n] (s[n] newest), s[n-j+1] is entry j-1, which is the
// index the encoder needs in its j-th cycle.
//
// The original description only says the buffer keeps the symbol indices and
// feeds them into the crossbar rows, shifted by `ngram_shift`; the
// shift-register organisation and the depth NMAX are choices of this design.
// Reset clears all entries to 0.
module index_buffer #(
  parameter int unsigned H    = hdc_pkg::H_DEF,
  parameter int unsigned NMAX = hdc_pkg::NMAX_DEF,
  localparam int unsigned IW  = (H > 1) ? $clog2(H) : 1,
  localparam int unsigned PW  = (NMAX > 1) ? $clog2(NMAX) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          shift,    // ngram_shift: push sym_idx
  input  logic [IW-1:0] sym_idx,
  input  logic [PW-1:0] rd_ptr,   // 0 = newest symbol
  output logic [IW-1:0] rd_idx
);

  logic [IW-1:0] buf_q [NMAX];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < int'(NMAX); i++) buf_q[i] <= '0;
    end else if (shift) begin
      buf_q[0] <= sym_idx;
      for (int i = 1; i < int'(NMAX); i++) buf_q[i] <= buf_q[i-1];
    end
  end

  assign rd_idx = buf_q[rd_ptr];

endmodule
