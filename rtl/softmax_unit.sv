// softmax_unit: softmax over the attention scores of one head.
//
// In the attention flow (paper Sec. 4.3 and Fig. 9(b)) the DRAM array forms
// the products of the query with every cached key, the bit-serial adder
// tree sums them into L scores, and this unit turns the scores into
// attention weights before they go back to the array to weight the values.
// The paper gives only the place of the unit and its 16-bit width; the
// arithmetic below is this design's own choice.
//
// Scores are signed Q8.8. Three passes over a local score memory:
//   1. load the L scores and track the maximum m;
//   2. e_i = 2^((s_i - m) * log2 e), with log2 e = 369/256, evaluated as
//      2^floor(t) * (1 + frac(t)) (a linear fraction, within 6 %), stored as
//      unsigned Q1.15 in place of s_i, and summed;
//   3. one division r = floor(2^31 / sum), then p_i = min(e_i * r >> 15,
//      65535), an unsigned Q0.16 probability, streamed out.
// Subtracting the maximum keeps every exponent at or below zero, so no
// overflow is possible and the largest score always gets e = 1.0.
//
// Interface: in_valid/in_score/in_last (taken whenever in_ready),
// out_valid/out_ready/out_prob/out_last, and busy, high from the last
// score until the last probability has been taken.
// Timing: L cycles to load, L + 2 to exponentiate, 1 to divide, then one
// probability every two cycles (one memory read each).
module softmax_unit
  import slim_pkg::*;
#(
  parameter int unsigned LMAX = 2048,      // sequence length of the paper's runs
  localparam int unsigned AW  = $clog2(LMAX)
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   in_valid,
  output logic   in_ready,
  input  score_t in_score,
  input  logic   in_last,
  output logic   out_valid,
  input  logic   out_ready,
  output prob_t  out_prob,
  output logic   out_last,
  output logic   busy
);

  typedef enum logic [2:0] {S_LOAD, S_EXP, S_DIV, S_OUT} state_e;
  state_e       state;
  logic [15:0]  mem [LMAX];
  logic [AW:0]  len, ra, wa;
  logic [15:0]  rdata;
  logic         rvalid;
  score_t       smax;
  logic [31:0]  sum, recip;

  // ------------------------------------------------ 2^x approximation
  function automatic logic [15:0] exp_q15(input score_t s, input score_t m);
    logic signed [17:0] d;
    logic signed [27:0] t;      // Q.8 of log2 domain, <= 0
    logic signed [19:0] ip;
    logic [7:0]         fr;
    logic [15:0]        mant;
    d  = 18'(s) - 18'(m);
    t  = (28'(d) * 28'sd369) >>> 8;
    ip = 20'(t >>> 8);          // floor
    fr = t[7:0];
    mant = {1'b1, fr, 7'b0};              // (1 + fr/256) in Q1.15
    if (ip < -20'sd15) return 16'd0;
    else               return mant >> (-ip);
  endfunction

  assign in_ready = (state == S_LOAD);
  assign busy     = (state != S_LOAD);

  // score memory, synchronous read
  logic [AW-1:0] mem_ra;
  always_comb begin
    mem_ra = AW'(ra);
  end

  logic          we;
  logic [AW-1:0] mem_wa;
  logic [15:0]   mem_wd;
  always_comb begin
    we     = 1'b0;
    mem_wa = AW'(wa);
    mem_wd = '0;
    if (state == S_LOAD && in_valid) begin
      we = 1'b1; mem_wa = AW'(len); mem_wd = in_score;
    end else if (state == S_EXP && rvalid) begin
      we = 1'b1; mem_wd = exp_q15(score_t'(rdata), smax);
    end
  end

  always_ff @(posedge clk) begin
    if (we) mem[mem_wa] <= mem_wd;
    rdata <= mem[mem_ra];
  end

  logic out_fire, out_pend;
  assign out_fire = out_valid && out_ready;

  logic [47:0] pscaled;               // e * recip, back to 0.16
  assign pscaled = (48'(rdata) * 48'(recip)) >> 15;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_LOAD;
      len       <= '0;
      ra        <= '0;
      wa        <= '0;
      rvalid    <= 1'b0;
      smax      <= '0;
      sum       <= '0;
      recip     <= '0;
      out_valid <= 1'b0;
      out_prob  <= '0;
      out_last  <= 1'b0;
      out_pend  <= 1'b0;
    end else begin
      unique case (state)
        S_LOAD: if (in_valid) begin
          smax <= (len == '0 || in_score > smax) ? in_score : smax;
          len  <= len + 1'b1;
          if (in_last) begin
            state <= S_EXP;
            ra    <= '0;
            wa    <= '0;
            sum   <= '0;
          end
        end
        S_EXP: begin
          // read address ra issued this cycle, data and write next cycle
          rvalid <= (ra < len);
          if (ra < len) ra <= ra + 1'b1;
          if (rvalid) begin
            sum <= sum + 32'(exp_q15(score_t'(rdata), smax));
            wa  <= wa + 1'b1;
            if (wa == len - 1'b1) begin
              state  <= S_DIV;
              rvalid <= 1'b0;
            end
          end
        end
        S_DIV: begin
          recip    <= 32'h8000_0000 / sum;
          state    <= S_OUT;
          ra       <= '0;
          out_pend <= 1'b0;
        end
        S_OUT: begin
          // keep one read in flight; present it when the output is free
          if (out_fire) out_valid <= 1'b0;
          if (!out_pend && ra < len && (!out_valid || out_fire)) begin
            out_pend <= 1'b1;
            ra       <= ra + 1'b1;
          end else if (out_pend) begin
            out_prob  <= (pscaled > 48'hffff) ? 16'hffff : pscaled[15:0];
            out_valid <= 1'b1;
            out_last  <= (ra == len);
            out_pend  <= 1'b0;
          end
          if (out_fire && out_last) begin
            state <= S_LOAD;
            len   <= '0;
          end
        end
        default: state <= S_LOAD;
      endcase
    end
  end

endmodule
