// psum_reducer: the reduce-and-collect step of the near-storage FFN.
//
// Every engine holds a partial sum of the FFN output over the neurons that
// lived on its die. After the last weight vector, the partial sums are read
// out over the shared bus (channel bus for die-level engines) and added up
// word by word; the sum is the FFN output for the token (paper Sec. 4.4,
// step 4). Words are MACS partial sums wide. For each output word the unit
// reads that word from engine 0, 1, ..., N_PE-1 in turn and accumulates,
// then emits the finished word. The serial order over engines models one
// shared bus; it is this design's choice, as is the read protocol.
//
// Interface:
//   start, dim_words, out_base   begin a reduction of dim_words words
//   pe_rd_en[p], pe_rd_addr      read request to engine p (one at a time)
//   pe_rd_data[p]                engine p's data, one cycle after the read
//   o_valid/o_word/o_data        one finished output word (no back-pressure)
//   busy, done                   status; done pulses after the last word
// Timing: N_PE + 1 cycles per output word.
module psum_reducer
  import slim_pkg::*;
#(
  parameter int unsigned N_PE      = SSD_CHANNELS * SSD_CHIPS,
  parameter int unsigned MACS      = PE_MACS,
  parameter int unsigned OUT_WORDS = PE_SRAM_BYTES * 3 / 4 / (PE_MACS * 4),  // 48 KB of psums
  localparam int unsigned OAW      = $clog2(OUT_WORDS),
  localparam int unsigned PW       = (N_PE > 1) ? $clog2(N_PE) : 1
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  start,
  input  logic [OAW:0]          dim_words,
  input  logic [OAW-1:0]        out_base,
  output logic [N_PE-1:0]       pe_rd_en,
  output logic [OAW-1:0]        pe_rd_addr,
  input  logic [MACS*32-1:0]    pe_rd_data [N_PE],
  output logic                  o_valid,
  output logic [OAW-1:0]        o_word,
  output logic [MACS*32-1:0]    o_data,
  output logic                  busy,
  output logic                  done
);

  logic [OAW:0]         word;
  logic [PW:0]          pe;          // engine being read this cycle
  logic                 rd_pend;     // a read was issued last cycle
  logic [PW-1:0]        pe_q;
  logic [MACS*32-1:0]   acc;
  logic                 last_rd, last_q;
  logic [OAW:0]         word_q;

  assign last_rd    = busy && (pe == (PW+1)'(N_PE - 1));
  assign pe_rd_addr = out_base + OAW'(word);
  always_comb begin
    pe_rd_en = '0;
    if (busy && pe < (PW+1)'(N_PE)) pe_rd_en[pe[PW-1:0]] = 1'b1;
  end

  // adder of MACS lanes: running sum plus the word read from engine pe_q
  logic [MACS*32-1:0] sum;
  always_comb
    for (int k = 0; k < MACS; k++)
      sum[k*32 +: 32] = ((pe_q == '0) ? 32'd0 : acc[k*32 +: 32])
                        + pe_rd_data[pe_q][k*32 +: 32];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy    <= 1'b0;
      word    <= '0;
      pe      <= '0;
      rd_pend <= 1'b0;
      pe_q    <= '0;
      word_q  <= '0;
      last_q  <= 1'b0;
      acc     <= '0;
      o_valid <= 1'b0;
      o_word  <= '0;
      o_data  <= '0;
      done    <= 1'b0;
    end else begin
      o_valid <= 1'b0;
      done    <= 1'b0;
      rd_pend <= 1'b0;
      last_q  <= 1'b0;
      if (start && !busy) begin
        busy <= 1'b1;
        word <= '0;
        pe   <= '0;
      end else if (busy) begin
        rd_pend <= 1'b1;
        pe_q    <= pe[PW-1:0];
        word_q  <= word;
        last_q  <= last_rd;
        if (last_rd) begin
          pe <= '0;
          if (word == dim_words - 1'b1) busy <= 1'b0;
          else                          word <= word + 1'b1;
        end else begin
          pe <= pe + 1'b1;
        end
      end
      // accumulate the data of last cycle's read
      if (rd_pend) begin
        acc <= sum;
        if (last_q) begin
          o_valid <= 1'b1;
          o_data  <= sum;
          o_word  <= OAW'(word_q);
          done    <= (word_q == dim_words - 1'b1);
        end
      end
    end
  end

endmodule
