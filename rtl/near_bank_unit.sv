// near_bank_unit: the per-bank logic that SLIM adds next to each PIM DRAM bank.
//
// The DRAM arrays compute bit-serially with majority operations. Two jobs
// are left to logic next to each bank (paper Sec. 4.3, Fig. 9(a)):
// bringing data into the bit-serial layout fast, and reducing bit-serial
// results to numbers. The unit sits on the bank's 64-bit internal column
// bus, eight times wider than the DQ pins, and holds
//   - a 256 KB data buffer (paper hardware table), written and read by the
//     host byte by byte through the 8-bit DQ path;
//   - a transpose unit that turns buffer words into bit-planes;
//   - the bit-serial adder tree with its accumulation register;
//   - a softmax unit for the attention scores.
// Commands (slim_pkg::nb_cmd_t):
//   NB_LAYOUT  for each of count column groups g: read ew buffer words from
//              buf_addr + g*ew, transpose, and write plane k to bank row
//              row+k, column col+g (64 elements per group).
//   NB_ACCUM   for each group g and bit k: read bank row row+k, column col+g
//              and add the plane into the accumulator (the sign plane is
//              subtracted when sgn). The 16-bit score is put out on
//              res_valid/res_score, written to buffer word buf_addr, and,
//              when to_sm, passed to the softmax unit (sm_last ends the
//              sequence).
//   NB_SMBASE  softmax results are written to consecutive buffer words from
//              buf_addr on (low 16 bits of each word).
// The command set, the buffer word format and the single outstanding bank
// access are this design's choices; the paper gives the parts and the bus
// widths (64-bit internal, 8-bit DQ, 16-bit adder-tree output).
//
// Lint notes: the op field of the latched command is not read again (the
// state encodes it), and only the saturated 16-bit result of the adder
// tree is used, not its wide accumulator.
//
// Bank port: bk_valid/bk_ready request with bk_we, bk_row, bk_col,
// bk_wdata; read data returns on bk_rvalid/bk_rdata, in order.
// Timing: the host may use the DQ port only while busy is low. A layout
// group takes about 3*ew cycles plus bank write time; an accumulation
// takes ew bank reads per group.
module near_bank_unit
  import slim_pkg::*;
#(
  parameter int unsigned BUF_BYTES = 262144,
  parameter int unsigned LMAX      = 2048,
  localparam int unsigned BW       = $clog2(BUF_BYTES / 8),
  localparam int unsigned RW       = $clog2(DRAM_ROWS),
  localparam int unsigned CW       = $clog2(DRAM_COLS)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // DQ side
  input  logic                 dq_we,
  input  logic                 dq_re,
  input  logic [BW+2:0]        dq_addr,
  input  logic [DQ_BITS-1:0]   dq_wdata,
  output logic [DQ_BITS-1:0]   dq_rdata,
  // commands
  input  logic                 cmd_valid,
  output logic                 cmd_ready,
  input  nb_cmd_t              cmd,
  // bank internal bus
  output logic                 bk_valid,
  input  logic                 bk_ready,
  output logic                 bk_we,
  output logic [RW-1:0]        bk_row,
  output logic [CW-1:0]        bk_col,
  output logic [63:0]          bk_wdata,
  input  logic                 bk_rvalid,
  input  logic [63:0]          bk_rdata,
  // results
  output logic                 res_valid,
  output score_t               res_score,
  output logic                 sm_valid,
  output prob_t                sm_prob,
  output logic                 sm_last_o,
  output logic                 busy
);

  typedef enum logic [3:0] {
    S_IDLE, S_L_RD, S_L_PUSH, S_L_WR, S_A_REQ, S_A_WAIT, S_A_SUM, S_A_RES, S_A_SM
  } state_e;

  state_e        state;
  nb_cmd_t       c;
  logic [7:0]    grp;
  logic [4:0]    k;
  logic [4:0]    ew;
  logic [BW-1:0] sm_ptr;

  assign ew = c.ew16 ? 5'd16 : 5'd8;

  // ------------------------------------------------------- data buffer
  logic [63:0]   buf_mem [BUF_BYTES / 8];
  logic [BW-1:0] b_addr;
  logic [63:0]   b_rdata;
  logic [2:0]    dq_lane_q;

  // one port: DQ byte access, command reads, result writes
  logic          b_we;
  logic [63:0]   b_wdata;
  logic [7:0]    b_wmask;
  logic          sm_wr;
  logic          res_wr;
  prob_t         sm_prob_i;
  logic          sm_out_valid, sm_out_last;

  assign sm_wr  = sm_out_valid && !res_wr;
  assign res_wr = (state == S_A_RES);

  always_comb begin
    b_we    = 1'b0;
    b_wmask = '0;
    b_wdata = '0;
    b_addr  = c.buf_addr[BW-1:0] + BW'(grp) * BW'(ew) + BW'(k);
    if (dq_we || dq_re) begin
      b_addr  = dq_addr[BW+2:3];
      b_we    = dq_we;
      b_wmask = 8'(1) << dq_addr[2:0];
      b_wdata = {8{dq_wdata}};
    end else if (res_wr) begin
      b_addr  = c.buf_addr[BW-1:0];
      b_we    = 1'b1;
      b_wmask = 8'b0000_0011;
      b_wdata = 64'(res_score);
    end else if (sm_wr) begin
      b_addr  = sm_ptr;
      b_we    = 1'b1;
      b_wmask = 8'b0000_0011;
      b_wdata = 64'(sm_prob_i);
    end
  end

  always_ff @(posedge clk) begin
    for (int i = 0; i < 8; i++)
      if (b_we && b_wmask[i]) buf_mem[b_addr][i*8 +: 8] <= b_wdata[i*8 +: 8];
    b_rdata   <= buf_mem[b_addr];
    dq_lane_q <= dq_addr[2:0];
  end
  assign dq_rdata = b_rdata[dq_lane_q*8 +: 8];

  // ---------------------------------------------------- transpose unit
  logic        tu_in_valid, tu_in_ready, tu_out_valid, tu_out_ready, tu_out_last;
  logic [63:0] tu_plane;
  logic [4:0]  tu_bit;

  assign tu_in_valid  = (state == S_L_PUSH);
  assign tu_out_ready = (state == S_L_WR) && bk_ready;

  transpose_unit #(.LANES(64), .EW_MAX(16)) u_tu (
    .clk, .rst_n, .ew16(c.ew16),
    .in_valid(tu_in_valid), .in_ready(tu_in_ready), .in_data(b_rdata),
    .out_valid(tu_out_valid), .out_ready(tu_out_ready), .out_plane(tu_plane),
    .out_bit(tu_bit), .out_last(tu_out_last)
  );

  // The FSM pushes a group only after the previous group's planes are all
  // written, so the single-buffered transpose unit is always ready for it.
  assert property (@(posedge clk) disable iff (!rst_n) tu_in_valid |-> tu_in_ready);

  // ------------------------------------------------- bit-serial adder tree
  logic                bsa_valid, bsa_clr;
  logic signed [39:0]  bsa_acc;

  assign bsa_valid = (state == S_A_WAIT) && bk_rvalid;
  assign bsa_clr   = bsa_valid && grp == '0 && k == '0;

  bitserial_accumulator #(.LANES(64), .ACC_W(40)) u_bsa (
    .clk, .rst_n, .clr(bsa_clr), .in_valid(bsa_valid), .plane(bk_rdata),
    .bitpos(k), .neg(c.sgn && k == ew - 1'b1), .oshift(c.oshift),
    .acc(bsa_acc), .out16(res_score)
  );

  // ---------------------------------------------------------- softmax
  logic sm_in_valid, sm_in_ready, sm_busy;
  assign sm_in_valid = (state == S_A_SM);

  softmax_unit #(.LMAX(LMAX)) u_sm (
    .clk, .rst_n, .in_valid(sm_in_valid), .in_ready(sm_in_ready),
    .in_score(res_score), .in_last(c.sm_last),
    .out_valid(sm_out_valid), .out_ready(!res_wr), .out_prob(sm_prob_i),
    .out_last(sm_out_last), .busy(sm_busy)
  );

  assign sm_valid  = sm_wr;
  assign sm_prob   = sm_prob_i;
  assign sm_last_o = sm_wr && sm_out_last;

  // ----------------------------------------------------------- bank port
  always_comb begin
    bk_valid = 1'b0;
    bk_we    = 1'b0;
    bk_row   = c.row + RW'(k);
    bk_col   = c.col + CW'(grp);
    bk_wdata = tu_plane;
    if (state == S_L_WR) begin
      bk_valid = tu_out_valid;
      bk_we    = 1'b1;
      bk_row   = c.row + RW'(tu_bit);
    end else if (state == S_A_REQ) begin
      bk_valid = 1'b1;
    end
  end

  // ---------------------------------------------------------- sequencer
  assign cmd_ready = (state == S_IDLE);
  assign busy      = (state != S_IDLE) || sm_busy;
  assign res_valid = res_wr;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state  <= S_IDLE;
      c      <= '0;
      grp    <= '0;
      k      <= '0;
      sm_ptr <= '0;
    end else begin
      if (sm_wr) sm_ptr <= sm_ptr + 1'b1;
      unique case (state)
        S_IDLE: if (cmd_valid) begin
          c   <= cmd;
          grp <= '0;
          k   <= '0;
          unique case (cmd.op)
            NB_LAYOUT: state <= S_L_RD;
            NB_ACCUM:  state <= S_A_REQ;
            NB_SMBASE: sm_ptr <= cmd.buf_addr[BW-1:0];
            default:   state <= S_IDLE;
          endcase
        end
        // layout: read word k of group grp, push it, after ew words write
        S_L_RD:   state <= S_L_PUSH;
        S_L_PUSH: begin
          if (k == ew - 1'b1) begin
            k     <= '0;
            state <= S_L_WR;
          end else begin
            k     <= k + 1'b1;
            state <= S_L_RD;
          end
        end
        S_L_WR: if (tu_out_valid && bk_ready && tu_out_last) begin
          if (grp == c.count - 1'b1) state <= S_IDLE;
          else begin
            grp   <= grp + 1'b1;
            state <= S_L_RD;
          end
        end
        // accumulate: one outstanding bank read at a time
        S_A_REQ:  if (bk_ready) state <= S_A_WAIT;
        S_A_WAIT: if (bk_rvalid) begin
          if (k == ew - 1'b1) begin
            k <= '0;
            if (grp == c.count - 1'b1) state <= S_A_SUM;
            else begin
              grp   <= grp + 1'b1;
              state <= S_A_REQ;
            end
          end else begin
            k     <= k + 1'b1;
            state <= S_A_REQ;
          end
        end
        S_A_SUM:  state <= S_A_RES;       // accumulator settles
        S_A_RES:  state <= c.to_sm ? S_A_SM : S_IDLE;
        S_A_SM:   if (sm_in_ready) state <= S_IDLE;
        default:  state <= S_IDLE;
      endcase
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) (dq_we || dq_re) |-> state == S_IDLE);
  assert property (@(posedge clk) disable iff (!rst_n) bk_rvalid |-> state == S_A_WAIT);

endmodule
