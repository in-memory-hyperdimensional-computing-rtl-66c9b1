// controller_ii: control unit of the AM search module ("Controller II").
//
// On `query_valid` it steps `part_sel` (partition_select) through the f
// partitions, one per cycle: the segment multiplexers apply query segment p
// to partition r_(p+1) of the AM crossbar.
//   Inference: the sum buffer accumulates the f partial dot products
//   (`acc_first` on partition 0), and in the following cycle the WTA output
//   is registered as `result_class` with a one-cycle `result_valid`.
//   Latency from query_valid to result_valid: f + 2 cycles.
//   Training: segment p of the prototype is written into row
//   p*c + row_of_class[label] of the AM (`am_we`, `am_row`), which stores a
//   learned prototype into the rows of its class; `train_done` pulses after
//   the f-th write. Latency f + 1 cycles.
// `busy` is high from the cycle after `query_valid` until the run ends.
//
// The placement table row_of_class[c] gives the row inside every partition
// that holds class c. It implements the random permutation E of the
// coarse-grained randomised partitioning; the host writes it through
// `map_we` (default after reset: identity). One table serves all partitions.
//
// Stepping the partitions and routing results by class follow the original
// design; the table, the cycle-per-partition timing and the training write
// sequence are choices of this design.
module controller_ii #(
  parameter int unsigned C  = hdc_pkg::C_DEF,
  parameter int unsigned F  = hdc_pkg::F_DEF,
  localparam int unsigned R  = C * F,
  localparam int unsigned RW = (R > 1) ? $clog2(R) : 1,
  localparam int unsigned FW = (F > 1) ? $clog2(F) : 1,
  localparam int unsigned CW = (C > 1) ? $clog2(C) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  // from the encoder
  input  logic          query_valid,
  input  hdc_pkg::hdc_mode_e q_mode,
  input  logic [CW-1:0] q_label,
  // placement table programming
  input  logic          map_we,
  input  logic [CW-1:0] map_class,
  input  logic [CW-1:0] map_row,
  output logic [CW-1:0] row_of_class [C],
  // datapath control
  output logic [FW-1:0] part_sel,
  output logic          acc_en,
  output logic          acc_first,
  output logic          am_we,
  output logic [RW-1:0] am_row,
  input  logic [CW-1:0] wta_idx,
  // results
  output logic          busy,
  output logic          result_valid,
  output logic [CW-1:0] result_class,
  output logic          train_done
);
  import hdc_pkg::*;

  typedef enum logic [1:0] {S_IDLE, S_RUN, S_WTA} state_e;

  state_e     state_q;
  hdc_mode_e  mode_q;
  logic [CW-1:0] label_q;
  logic [FW-1:0] p_q;
  logic       last_p;

  assign last_p    = (32'(p_q) == F - 1);
  assign part_sel  = p_q;
  assign acc_en    = (state_q == S_RUN) && (mode_q == MODE_INFER);
  assign acc_first = (p_q == '0);
  assign am_we     = (state_q == S_RUN) && (mode_q == MODE_TRAIN);
  assign am_row    = RW'(32'(p_q) * C + 32'(row_of_class[label_q]));
  assign busy      = (state_q != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q      <= S_IDLE;
      mode_q       <= MODE_INFER;
      label_q      <= '0;
      p_q          <= '0;
      result_valid <= 1'b0;
      result_class <= '0;
      train_done   <= 1'b0;
      for (int c = 0; c < int'(C); c++) row_of_class[c] <= CW'(c);
    end else begin
      result_valid <= 1'b0;
      train_done   <= 1'b0;
      if (map_we && state_q == S_IDLE) row_of_class[map_class] <= map_row;
      unique case (state_q)
        S_IDLE: if (query_valid) begin
          state_q <= S_RUN;
          mode_q  <= q_mode;
          label_q <= q_label;
          p_q     <= '0;
        end
        S_RUN: begin
          if (last_p) begin
            p_q <= '0;
            if (mode_q == MODE_TRAIN) begin
              state_q    <= S_IDLE;
              train_done <= 1'b1;
            end else begin
              state_q <= S_WTA;
            end
          end else begin
            p_q <= p_q + 1'b1;
          end
        end
        S_WTA: begin
          result_class <= wta_idx;
          result_valid <= 1'b1;
          state_q      <= S_IDLE;
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end

  // A new query may only arrive while the AM search is idle.
  a_no_overlap: assert property (@(posedge clk) disable iff (!rst_n) !(query_valid && busy))
    else $error("query_valid while AM search busy");

endmodule
