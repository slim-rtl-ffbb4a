// sparsity_thresholder: turns low-rank predictor scores into the list of
// activated FFN neurons.
//
// The predictor output for neuron j is y_j = (X . L . R)_j. Neuron j is
// activated when |y_j| > threshold (paper Eq. 3), and only activated
// neurons have their weights fetched from flash. The threshold is not
// fixed: a small table holds one threshold per sparsity level (filled from
// calibration, paper Sec. 3.2 step 3) and the runtime selects a level, so
// sparsity can be changed between tokens without touching the model. No
// sorter is needed, unlike a top-k selection.
//
// Interface:
//   tbl_we/tbl_addr/tbl_wdata  write one threshold table entry
//   level                      selected sparsity level, held during a pass
//   s_valid/s_ready/s_score/s_last
//                              scores of neurons 0,1,2,... in order;
//                              s_last marks the last neuron of the layer
//   a_valid/a_ready/a_idx      indices of activated neurons, in order
//   done                       one-cycle pulse after the last score
//   n_seen, n_active           neurons scored / activated in this pass
// Timing: one score per cycle, output registered (one cycle latency).
// The table size, score width and handshake are this design's choices.
module sparsity_thresholder
  import slim_pkg::*;
#(
  parameter int unsigned LEVELS = 16,
  parameter int unsigned IDX_W  = 16,
  localparam int unsigned LW    = $clog2(LEVELS)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             tbl_we,
  input  logic [LW-1:0]    tbl_addr,
  input  score_t           tbl_wdata,
  input  logic [LW-1:0]    level,
  input  logic             s_valid,
  output logic             s_ready,
  input  score_t           s_score,
  input  logic             s_last,
  output logic             a_valid,
  input  logic             a_ready,
  output logic [IDX_W-1:0] a_idx,
  output logic             done,
  output logic [IDX_W-1:0] n_seen,
  output logic [IDX_W-1:0] n_active
);

  score_t           thr_tbl [LEVELS];
  logic [IDX_W-1:0] idx;
  logic [16:0]      mag, thr;
  logic             hit, take;

  always_ff @(posedge clk) begin
    if (tbl_we) thr_tbl[tbl_addr] <= tbl_wdata;
  end

  // |y| in 17 bits so that -32768 compares correctly; negative table
  // entries count as zero (every neuron activated).
  assign mag     = s_score[15] ? 17'(-$signed({s_score[15], s_score})) : {1'b0, s_score};
  assign thr     = thr_tbl[level][15] ? '0 : {1'b0, thr_tbl[level]};
  assign hit     = mag > thr;
  assign s_ready = !a_valid || a_ready;
  assign take    = s_valid && s_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      a_valid  <= 1'b0;
      a_idx    <= '0;
      idx      <= '0;
      done     <= 1'b0;
      n_seen   <= '0;
      n_active <= '0;
    end else begin
      done <= 1'b0;
      if (a_valid && a_ready) a_valid <= 1'b0;
      if (take) begin
        if (hit) begin
          a_valid <= 1'b1;
          a_idx   <= idx;
        end
        idx    <= s_last ? '0 : idx + 1'b1;
        done   <= s_last;
        n_seen <= (idx == '0) ? IDX_W'(1) : n_seen + 1'b1;
        if (idx == '0) n_active <= IDX_W'(hit);
        else           n_active <= n_active + IDX_W'(hit);
      end
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n)
                   a_valid && !a_ready |=> a_valid && $stable(a_idx));

endmodule
