// nsp_pe: near-storage processing engine that computes a sparse, fused FFN.
//
// One engine sits next to each NAND die (die-level design; the channel-level
// variant is the same module with MACS=64 and a 128 KB SRAM). It holds the
// broadcast FFN input x in its input SRAM and the output-stationary partial
// sums of FFN(x) in its output SRAM. Weights arrive from the die as a stream
// of "fused vectors", one per activated neuron j: column j of Wg, column j
// of Wu, then row j of Wd, each DIM = dim_words*MACS bytes long. For each
// fused vector the engine computes
//     g = x . Wg[:,j]      u = x . Wu[:,j]      h = act(g) * u
//     psum[k] += h * Wd[j,k]   for every k
// so no dim_h-long intermediate vector is ever stored (paper Fig. 11(a)).
// The same MACS multipliers serve the two dot products (MACS products per
// beat, summed by an adder tree) and the scaled row update of the down
// projection (MACS partial sums updated per beat).
//
// Fixed point (this design's choice; the paper only says weights and
// activations are 8 bit): g and u are 32-bit sums, scaled to 8 bit by an
// arithmetic right shift of qshift and saturated. g is read as Q4.4 and
// goes through a hard-swish approximation of SiLU,
//     act(g) = g * clamp(g + 3, 0, 6) / 6,
// because the paper does not say how SiLU is evaluated in hardware. h is the
// Q4.4 x int8 product shifted right by 4 and saturated to 8 bit. Partial
// sums are 32 bit.
//
// Interface:
//   in_we/in_waddr/in_wdata  broadcast write of x into the input SRAM
//                            (MACS bytes per word). The input SRAM has its
//                            own write port, so the next token's input can
//                            be written into another slot while computing.
//   clr_start                zero dim_words partial-sum words at out_base
//   w_valid/w_ready/w_data   weight stream from the NAND data register,
//                            MACS bytes per beat; w_data must hold while
//                            w_valid is high and w_ready low
//   rd_en/rd_addr/rd_data    read port of the output SRAM for the reducer,
//                            data one cycle after rd_en
// SRAM split (this design's choice; the paper gives only the 64 KB total):
// a quarter holds inputs, three quarters hold 32-bit partial sums, so two
// input streams of dim_e up to 6144 fit side by side (Llama-2-13B: 5120).
// Timing: one weight beat per cycle, plus one cycle per neuron to form h:
// a fused vector takes 3*dim_words + 1 cycles. Clearing takes dim_words.
module nsp_pe
  import slim_pkg::*;
#(
  parameter int unsigned MACS       = PE_MACS,          // 16 for die level
  parameter int unsigned SRAM_BYTES = PE_SRAM_BYTES,    // 64 KB
  parameter int unsigned IN_WORDS   = SRAM_BYTES / 4 / MACS,          // 16 KB
  parameter int unsigned OUT_WORDS  = SRAM_BYTES * 3 / 4 / (MACS * 4),  // 48 KB
  localparam int unsigned IAW = $clog2(IN_WORDS),
  localparam int unsigned OAW = $clog2(OUT_WORDS)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // configuration, held stable while busy
  input  logic [OAW:0]            dim_words,   // dim_e / MACS
  input  logic [IAW-1:0]          in_base,     // input slot (batch entry)
  input  logic [OAW-1:0]          out_base,    // partial-sum slot
  input  logic [4:0]              qshift,
  // input broadcast
  input  logic                    in_we,
  input  logic [IAW-1:0]          in_waddr,
  input  logic [MACS*8-1:0]       in_wdata,
  // partial-sum clear
  input  logic                    clr_start,
  // weight stream
  input  logic                    w_valid,
  output logic                    w_ready,
  input  logic [MACS*8-1:0]       w_data,
  // result read port
  input  logic                    rd_en,
  input  logic [OAW-1:0]          rd_addr,
  output logic [MACS*32-1:0]      rd_data,
  // status
  output logic                    idle,
  output logic [31:0]             neuron_cnt
);

  typedef enum logic [2:0] {S_G, S_U, S_H, S_D, S_CLR} state_e;

  state_e          state, state_n;
  logic [OAW:0]    beat, beat_n;
  logic            fire;
  logic            vec_active;        // a fused vector is in progress

  logic [MACS*8-1:0]  in_mem  [IN_WORDS];
  logic [MACS*32-1:0] out_mem [OUT_WORDS];

  logic [MACS*8-1:0]  x_q;            // input word of the current beat
  logic [MACS*32-1:0] p_q;            // psum word of the current beat
  logic signed [31:0] acc_g, acc_u;
  act_t               h_q;

  // ---------------------------------------------------------------- control
  assign w_ready = (state == S_G || state == S_U || state == S_D);
  assign fire    = w_valid && w_ready;
  assign idle    = (state == S_G) && (beat == '0) && !vec_active;

  always_comb begin
    state_n = state;
    beat_n  = beat;
    unique case (state)
      S_G, S_U, S_D: if (fire) begin
        if (beat == dim_words - 1'b1) begin
          beat_n  = '0;
          state_n = (state == S_G) ? S_U : (state == S_U) ? S_H : S_G;
        end else begin
          beat_n = beat + 1'b1;
        end
      end else if (state == S_G && beat == '0 && clr_start) begin
        state_n = S_CLR;
      end
      S_H: state_n = S_D;
      S_CLR: begin
        if (beat == dim_words - 1'b1) begin
          beat_n  = '0;
          state_n = S_G;
        end else begin
          beat_n = beat + 1'b1;
        end
      end
      default: state_n = S_G;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_G;
      beat       <= '0;
      vec_active <= 1'b0;
      neuron_cnt <= '0;
    end else begin
      state <= state_n;
      beat  <= beat_n;
      if (state == S_G && fire) vec_active <= 1'b1;
      if (state == S_D && fire && beat == dim_words - 1'b1) begin
        vec_active <= 1'b0;
        neuron_cnt <= neuron_cnt + 1;
      end
    end
  end

  // ------------------------------------------------------------ input SRAM
  // Read address follows the next beat so the word is ready with the beat.
  always_ff @(posedge clk) begin
    if (in_we) in_mem[in_waddr] <= in_wdata;
    x_q <= in_mem[in_base + IAW'(beat_n)];
  end

  // --------------------------------------------------------- MAC array
  logic signed [15:0] prod [MACS];
  logic signed [31:0] dot;
  always_comb begin
    dot = '0;
    for (int k = 0; k < MACS; k++) begin
      act_t a, b;
      b = w_data[k*8 +: 8];
      a = (state == S_D) ? h_q : act_t'(x_q[k*8 +: 8]);
      prod[k] = a * b;
      dot += 32'(prod[k]);
    end
  end

  // ------------------------------------------------ activation and gating
  function automatic act_t sat8(input logic signed [31:0] v);
    if (v > 32'sd127)       return 8'sd127;
    else if (v < -32'sd128) return -8'sd128;
    else                    return act_t'(v);
  endfunction

  act_t               g8, u8, s8;
  logic signed [15:0] gs;
  logic signed [15:0] hprod;
  always_comb begin
    g8 = sat8(acc_g >>> qshift);
    u8 = sat8(acc_u >>> qshift);
    // hard swish in Q4.4: 3.0 = 48, 6.0 = 96
    gs = 16'(g8) + 16'sd48;
    if (gs < 0)        gs = 16'sd0;
    else if (gs > 96)  gs = 16'sd96;
    s8    = act_t'((32'(g8) * 32'(gs)) / 32'sd96);
    hprod = 16'(s8) * 16'(u8);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc_g <= '0;
      acc_u <= '0;
      h_q   <= '0;
    end else begin
      if (state == S_G && fire) acc_g <= (beat == '0) ? dot : acc_g + dot;
      if (state == S_U && fire) acc_u <= (beat == '0) ? dot : acc_u + dot;
      if (state == S_H)         h_q   <= sat8(32'(hprod >>> 4));
    end
  end

  // ------------------------------------------------------ output SRAM
  logic [OAW-1:0]       p_raddr;
  logic [MACS*32-1:0]   p_new;
  always_comb begin
    for (int k = 0; k < MACS; k++)
      p_new[k*32 +: 32] = p_q[k*32 +: 32] + 32'(prod[k]);
  end
  assign p_raddr = rd_en ? rd_addr : out_base + OAW'(beat_n);

  always_ff @(posedge clk) begin
    if (state == S_D && fire)
      out_mem[out_base + OAW'(beat)] <= p_new;
    else if (state == S_CLR)
      out_mem[out_base + OAW'(beat)] <= '0;
    p_q <= out_mem[p_raddr];
  end
  assign rd_data = p_q;

  // ------------------------------------------------------------ checks
  // Stream rule: a beat offered and not taken stays put.
  assert property (@(posedge clk) disable iff (!rst_n)
                   w_valid && !w_ready && state != S_H |=> w_valid);
  // The read port is only used while idle.
  assert property (@(posedge clk) disable iff (!rst_n) rd_en |-> idle);

endmodule
