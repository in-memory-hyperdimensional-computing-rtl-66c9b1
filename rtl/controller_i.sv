// controller_i: control unit of the encoder ("Controller I").
//
// It is configured through `cfg_we` with the n-gram size n (1..NMAX) and the
// sequence length l (symbols per query or per training text), and for each
// sequence with the mode (inference or training) and the class label, taken
// from `seq_mode` / `seq_label` when the first symbol is accepted.
// Symbols arrive on a valid/ready handshake. The controller then generates:
//   ngram_shift  push the accepted symbol into the index buffer
//   rd_ptr       which index-buffer entry drives the IM row decoders
//   ngram_start  first encoding cycle: all crossbar gate lines on
//   mt_load      register the SA outputs in the minterm buffers
//   ngram_end    the minterm buffers hold a finished n-gram: bundle it
//   query_end    binarise the sum hypervector into the output register
//   query_valid  the output register holds a new query / prototype
//
// Timing: the first n-1 symbols only fill the index buffer. From the n-th
// symbol on, each symbol costs n encoding cycles (j = 1..n reads s[n-j+1],
// i.e. entry j-1), and the next symbol is accepted during the last of them,
// so a steady stream encodes one n-gram every n cycles; `ngram_end` is high
// the cycle after the n-th cycle, overlapping the next n-gram's first cycle.
// When the input is empty the controller waits with `sym_ready` high (an
// input stall). After the l-th symbol's n-gram is bundled, `query_end` is
// issued one cycle later, but only when the AM search is not reading the
// output register (`am_busy` low); otherwise it waits (an output stall).
// `query_valid` follows `query_end` by one cycle.
//
// The n-cycle encoding sequence and the threshold formula follow the original
// design; the handshakes, the overlap of symbol intake with encoding and the
// stall on a busy AM are choices of this design. The threshold is
// l >> (n - log2(k)) with k = 2 minterms, i.e. l >> (n-1).
module controller_i #(
  parameter int unsigned NMAX  = hdc_pkg::NMAX_DEF,
  parameter int unsigned C     = hdc_pkg::C_DEF,
  parameter int unsigned LEN_W = hdc_pkg::LEN_W_DEF,
  localparam int unsigned PW   = (NMAX > 1) ? $clog2(NMAX) : 1,
  localparam int unsigned NW   = $clog2(NMAX + 1),
  localparam int unsigned CW   = (C > 1) ? $clog2(C) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  // configure interface
  input  logic             cfg_we,
  input  logic [NW-1:0]    cfg_n,
  input  logic [LEN_W-1:0] cfg_len,
  // per-sequence attributes
  input  hdc_pkg::hdc_mode_e seq_mode,
  input  logic [CW-1:0]    seq_label,
  // symbol stream
  input  logic             sym_valid,
  output logic             sym_ready,
  // AM search side
  input  logic             am_busy,
  // control outputs
  output logic             ngram_shift,
  output logic [PW-1:0]    rd_ptr,
  output logic             ngram_start,
  output logic             mt_load,
  output logic             ngram_end,
  output logic             query_end,
  output logic             query_valid,
  output hdc_pkg::hdc_mode_e q_mode,
  output logic [CW-1:0]    q_label,
  output logic [LEN_W-1:0] threshold,
  output logic             busy
);
  import hdc_pkg::*;

  typedef enum logic [1:0] {S_FILL, S_ENC, S_QEND} state_e;

  state_e           state_q, state_d;
  logic [NW-1:0]    n_q;
  logic [LEN_W-1:0] len_q;
  logic [LEN_W-1:0] sym_cnt_q, sym_cnt_d;
  logic [PW-1:0]    j_q, j_d;
  logic             last_enc;
  logic             accept;

  assign last_enc = (state_q == S_ENC) && (32'(j_q) == 32'(n_q) - 1);

  always_comb begin
    state_d     = state_q;
    sym_cnt_d   = sym_cnt_q;
    j_d         = j_q;
    sym_ready   = 1'b0;
    ngram_start = 1'b0;
    mt_load     = 1'b0;
    query_end   = 1'b0;
    rd_ptr      = j_q;
    accept      = 1'b0;
    unique case (state_q)
      S_FILL: begin
        sym_ready = 1'b1;
        if (sym_valid) begin
          accept    = 1'b1;
          sym_cnt_d = sym_cnt_q + 1'b1;
          j_d       = '0;
          if (32'(sym_cnt_q) + 1 >= 32'(n_q)) state_d = S_ENC;
          else if (sym_cnt_q + 1'b1 == len_q) state_d = S_QEND;
        end
      end
      S_ENC: begin
        mt_load     = 1'b1;
        ngram_start = (j_q == '0);
        if (last_enc) begin
          if (sym_cnt_q == len_q) begin
            state_d = S_QEND;
          end else begin
            sym_ready = 1'b1;
            if (sym_valid) begin
              accept    = 1'b1;
              sym_cnt_d = sym_cnt_q + 1'b1;
              j_d       = '0;
            end else begin
              state_d = S_FILL;
            end
          end
        end else begin
          j_d = j_q + 1'b1;
        end
      end
      S_QEND: begin
        // ngram_end of the last n-gram is high in the first S_QEND cycle
        if (!ngram_end && !am_busy && !query_valid) begin
          query_end = 1'b1;
          sym_cnt_d = '0;
          state_d   = S_FILL;
        end
      end
      default: state_d = S_FILL;
    endcase
  end

  assign ngram_shift = accept;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q     <= S_FILL;
      n_q         <= NW'(4);
      len_q       <= LEN_W'(4);
      sym_cnt_q   <= '0;
      j_q         <= '0;
      ngram_end   <= 1'b0;
      query_valid <= 1'b0;
      q_mode      <= MODE_INFER;
      q_label     <= '0;
    end else begin
      state_q     <= state_d;
      sym_cnt_q   <= sym_cnt_d;
      j_q         <= j_d;
      ngram_end   <= last_enc;
      query_valid <= query_end;
      if (cfg_we && !busy) begin
        n_q   <= cfg_n;
        len_q <= cfg_len;
      end
      if (accept && sym_cnt_q == '0) begin
        q_mode  <= seq_mode;
        q_label <= seq_label;
      end
    end
  end

  assign busy      = (state_q != S_FILL) || (sym_cnt_q != '0) || query_valid;
  assign threshold = len_q >> (n_q - NW'($clog2(MINTERMS)));

  // The configured n-gram size must be within the index buffer.
  a_n_range: assert property (@(posedge clk) disable iff (!rst_n)
                               n_q >= 1 && 32'(n_q) <= NMAX)
    else $error("n-gram size out of range");

endmodule
