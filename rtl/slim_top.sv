// slim_top: the SLIM accelerator, PIM DRAM and near-storage FFN engines.
//
// SLIM runs the decoder of a large language model inside an SSD. The FFN
// (or MoE) weights, most of the model, stay in NAND flash and are used in
// place by one engine per flash die; attention, QKVO and a low-rank
// sparsity predictor run in the SSD's DRAM, made processing-in-memory.
// Only the FFN neurons whose predicted magnitude |x . L . R| exceeds a
// runtime-selected threshold are read from flash at all.
//
// This module connects:
//   DRAM side   N_BANK near_bank_unit instances (32 chips x 16 banks by
//               default), one per PIM bank. The DRAM arrays themselves are
//               outside: each unit's 64-bit bank bus is a port. The host
//               addresses one unit at a time (nb_sel) through the 8-bit DQ
//               path and a command port.
//   Predictor   scores produced by the selected unit's adder tree while
//               pred_en is high go to sparsity_thresholder; the activated
//               neuron indices are kept in one list per input stream.
//   SSD side    when pipeline_ctrl starts the SSD phase of stream s: the
//               partial-sum slot s of every engine is cleared, the list of
//               stream s is replayed through ffn_addr_gen and tsu, the page
//               reads leave on the per-die NAND request ports and the pages
//               come back on the per-die data ports straight into the
//               engines (nsp_pe). When every listed neuron has been
//               computed, psum_reducer adds the engines' partial sums and
//               the FFN output leaves on ffn_valid/ffn_word/ffn_data; then
//               the SSD phase is reported done.
//   Scheduling  pipeline_ctrl interleaves DRAM phases (run by the host,
//               reported with dram_done) and SSD phases of two inputs, or
//               runs them one after the other.
// The input x of the FFN is broadcast to all engines with x_we (slot s at
// words s*dim_words ...), as in step 1 of the paper's NSP flow.
//
// The lint report that rst_n is both synchronous and asynchronous: the flops
// all reset asynchronously, the synchronous use is only the assertions'
// disable condition.
//
// The per-stream activated lists, the SSD-phase sequencing and the
// host-driven DRAM phase are this design's choices; the arithmetic for
// attention in the DRAM array (majority-command sequences) is outside, as
// is the flash itself, the flash controllers and the NVMe host interface.
module slim_top
  import slim_pkg::*;
#(
  parameter int unsigned N_BANK     = DRAM_BANKS * DRAM_CHIPS,     // 512
  parameter int unsigned N_DIE      = SSD_CHANNELS * SSD_CHIPS,    // 64
  parameter int unsigned MACS       = PE_MACS,                     // 16
  parameter int unsigned PE_BYTES   = PE_SRAM_BYTES,               // 64 KB
  parameter int unsigned NB_BYTES   = 262144,                      // 256 KB
  parameter int unsigned LMAX       = 2048,
  parameter int unsigned LIST_DEPTH = 16384,                       // dim_h up to 14K
  localparam int unsigned IN_WORDS  = PE_BYTES / 4 / MACS,
  localparam int unsigned OUT_WORDS = PE_BYTES * 3 / 4 / (MACS * 4),
  localparam int unsigned IAW       = $clog2(IN_WORDS),
  localparam int unsigned OAW       = $clog2(OUT_WORDS),
  localparam int unsigned NBW       = $clog2(N_BANK),
  localparam int unsigned BW        = $clog2(NB_BYTES / 8),
  localparam int unsigned RW        = $clog2(DRAM_ROWS),
  localparam int unsigned CW        = $clog2(DRAM_COLS),
  localparam int unsigned LAW       = $clog2(LIST_DEPTH)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // ---- configuration, held during a run
  input  logic [OAW:0]         cfg_dim_words,     // dim_e / MACS
  input  logic [4:0]           cfg_qshift,
  input  logic [31:0]          cfg_base_page,
  input  logic [15:0]          cfg_vec_bytes,
  input  logic [15:0]          cfg_ppv,
  input  logic [15:0]          cfg_vpp,
  input  logic [3:0]           cfg_level,         // sparsity level
  input  logic                 tbl_we,
  input  logic [3:0]           tbl_addr,
  input  score_t               tbl_wdata,
  // ---- run control and scheduling
  input  logic                 start,
  input  logic                 pipelined,
  input  logic [7:0]           n_layers,
  input  logic [1:0]           n_streams,
  output logic                 run_busy,
  output logic                 run_done,
  output logic                 dram_start,
  output logic                 dram_stream,
  output logic [7:0]           dram_layer,
  input  logic                 dram_done,
  output logic                 ssd_start,
  output logic                 ssd_stream,
  output logic [7:0]           ssd_layer,
  output logic                 ssd_done,
  output logic [31:0]          overlap_cycles,
  // ---- DRAM side, host access to the selected near-bank unit
  input  logic [NBW-1:0]       nb_sel,
  input  logic                 dq_we,
  input  logic                 dq_re,
  input  logic [BW+2:0]        dq_addr,
  input  logic [7:0]           dq_wdata,
  output logic [7:0]           dq_rdata,
  input  logic                 cmd_valid,
  output logic                 cmd_ready,
  input  nb_cmd_t              cmd,
  output logic                 nb_busy,
  output logic                 sm_valid,
  output prob_t                sm_prob,
  input  logic                 pred_en,
  input  logic                 pred_last,
  output logic                 pred_done,         // last score of the pass taken
  // ---- DRAM bank buses (the PIM arrays are outside)
  output logic                 bk_valid  [N_BANK],
  input  logic                 bk_ready  [N_BANK],
  output logic                 bk_we     [N_BANK],
  output logic [RW-1:0]        bk_row    [N_BANK],
  output logic [CW-1:0]        bk_col    [N_BANK],
  output logic [63:0]          bk_wdata  [N_BANK],
  input  logic                 bk_rvalid [N_BANK],
  input  logic [63:0]          bk_rdata  [N_BANK],
  // ---- FFN input broadcast
  input  logic                 x_we,
  input  logic [IAW-1:0]       x_addr,
  input  logic [MACS*8-1:0]    x_wdata,
  // ---- NAND dies: page-read requests and page data
  output logic                 nand_req_valid [N_DIE],
  input  logic                 nand_req_ready [N_DIE],
  output nand_txn_t            nand_req       [N_DIE],
  input  logic                 nand_valid     [N_DIE],
  output logic                 nand_ready     [N_DIE],
  input  logic [MACS*8-1:0]    nand_data      [N_DIE],
  // ---- FFN output
  output logic                 ffn_valid,
  output logic [OAW-1:0]       ffn_word,
  output logic [MACS*32-1:0]   ffn_data,
  output logic                 ffn_busy,
  // ---- statistics
  output logic [15:0]          n_scored,
  output logic [15:0]          n_activated
);

  // ================================================================ DRAM
  logic        nb_cmd_ready [N_BANK];
  logic [7:0]  nb_dq_rdata  [N_BANK];
  logic        nb_res_valid [N_BANK];
  score_t      nb_res_score [N_BANK];
  logic        nb_sm_valid  [N_BANK];
  prob_t       nb_sm_prob   [N_BANK];
  logic        nb_busy_a    [N_BANK];

  for (genvar b = 0; b < N_BANK; b++) begin : g_bank
    logic sel, unused_sm_last;
    assign sel = (nb_sel == NBW'(b));
    near_bank_unit #(.BUF_BYTES(NB_BYTES), .LMAX(LMAX)) u_nbu (
      .clk, .rst_n,
      .dq_we(dq_we && sel), .dq_re(dq_re && sel), .dq_addr, .dq_wdata,
      .dq_rdata(nb_dq_rdata[b]),
      .cmd_valid(cmd_valid && sel), .cmd_ready(nb_cmd_ready[b]), .cmd,
      .bk_valid(bk_valid[b]), .bk_ready(bk_ready[b]), .bk_we(bk_we[b]),
      .bk_row(bk_row[b]), .bk_col(bk_col[b]), .bk_wdata(bk_wdata[b]),
      .bk_rvalid(bk_rvalid[b]), .bk_rdata(bk_rdata[b]),
      .res_valid(nb_res_valid[b]), .res_score(nb_res_score[b]),
      .sm_valid(nb_sm_valid[b]), .sm_prob(nb_sm_prob[b]), .sm_last_o(unused_sm_last),
      .busy(nb_busy_a[b])
    );
  end

  assign dq_rdata  = nb_dq_rdata[nb_sel];
  assign cmd_ready = nb_cmd_ready[nb_sel];
  assign nb_busy   = nb_busy_a[nb_sel];
  assign sm_valid  = nb_sm_valid[nb_sel];
  assign sm_prob   = nb_sm_prob[nb_sel];

  // =========================================================== scheduling
  logic pc_dram_stream, pc_ssd_stream;
  pipeline_ctrl #(.N_STREAMS(2)) u_pipe (
    .clk, .rst_n, .start, .pipelined, .n_layers, .n_streams,
    .dram_start, .dram_stream(pc_dram_stream), .dram_layer, .dram_done,
    .ssd_start, .ssd_stream(pc_ssd_stream), .ssd_layer, .ssd_done,
    .busy(run_busy), .done(run_done), .overlap_cycles
  );
  assign dram_stream = pc_dram_stream;
  assign ssd_stream  = pc_ssd_stream;

  // ============================================================ predictor
  logic        th_s_ready, th_a_valid;
  logic [15:0] th_a_idx;
  sparsity_thresholder #(.LEVELS(16), .IDX_W(16)) u_thr (
    .clk, .rst_n, .tbl_we, .tbl_addr, .tbl_wdata, .level(cfg_level),
    .s_valid(pred_en && nb_res_valid[nb_sel]), .s_ready(th_s_ready),
    .s_score(nb_res_score[nb_sel]), .s_last(pred_last),
    .a_valid(th_a_valid), .a_ready(1'b1), .a_idx(th_a_idx), .done(pred_done),
    .n_seen(n_scored), .n_active(n_activated)
  );

  // activated-neuron lists, one per stream, filled in the DRAM phase
  logic [15:0] list_mem [2][LIST_DEPTH];
  logic [LAW:0] list_len [2];
  logic         cur_pred_stream;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      list_len[0]     <= '0;
      list_len[1]     <= '0;
      cur_pred_stream <= 1'b0;
    end else begin
      if (dram_start) begin
        cur_pred_stream            <= pc_dram_stream;
        list_len[pc_dram_stream]   <= '0;
      end else if (th_a_valid) begin
        list_len[cur_pred_stream]  <= list_len[cur_pred_stream] + 1'b1;
      end
    end
  end
  always_ff @(posedge clk) begin
    if (th_a_valid) list_mem[cur_pred_stream][list_len[cur_pred_stream][LAW-1:0]] <= th_a_idx;
  end

  // ============================================================ SSD phase
  typedef enum logic [2:0] {F_IDLE, F_CLR, F_ISSUE, F_DRAIN, F_RED, F_WAIT} fstate_e;
  fstate_e      fst;
  logic         fs;                  // stream of the running SSD phase
  logic [LAW:0] rp;
  logic [OAW:0] clr_cnt;
  logic [31:0]  base_cnt, total_cnt;

  logic        ag_n_valid, ag_n_ready, ag_t_valid, ag_t_ready;
  nand_txn_t   ag_t_txn;
  logic        tsu_empty;
  logic        red_start, red_done;

  assign ag_n_valid = (fst == F_ISSUE) && (rp < list_len[fs]);

  ffn_addr_gen #(.N_DIE(N_DIE)) u_ag (
    .clk, .rst_n, .base_page(cfg_base_page), .vec_bytes(cfg_vec_bytes),
    .ppv(cfg_ppv), .vpp(cfg_vpp),
    .n_valid(ag_n_valid), .n_ready(ag_n_ready), .n_idx(list_mem[fs][rp[LAW-1:0]]),
    .t_valid(ag_t_valid), .t_ready(ag_t_ready), .t_txn(ag_t_txn)
  );

  tsu #(.N_DIE(N_DIE), .DEPTH(4)) u_tsu (
    .clk, .rst_n, .t_valid(ag_t_valid), .t_ready(ag_t_ready), .t_txn(ag_t_txn),
    .q_valid(nand_req_valid), .q_ready(nand_req_ready), .q_txn(nand_req),
    .empty(tsu_empty)
  );

  // ---- engines
  logic [N_DIE-1:0]   pe_idle, pe_rd_en;
  logic [31:0]        pe_cnt [N_DIE];
  logic [MACS*32-1:0] pe_rd_data [N_DIE];
  logic [OAW-1:0]     pe_rd_addr;
  logic [OAW-1:0]     slot_base;
  logic               pe_clr;

  assign slot_base = fs ? OAW'(cfg_dim_words) : '0;
  assign pe_clr    = (fst == F_CLR) && (clr_cnt == '0);

  for (genvar d = 0; d < N_DIE; d++) begin : g_die
    nsp_pe #(.MACS(MACS), .SRAM_BYTES(PE_BYTES)) u_pe (
      .clk, .rst_n, .dim_words(cfg_dim_words),
      .in_base(fs ? IAW'(cfg_dim_words) : '0), .out_base(slot_base),
      .qshift(cfg_qshift),
      .in_we(x_we), .in_waddr(x_addr), .in_wdata(x_wdata),
      .clr_start(pe_clr),
      .w_valid(nand_valid[d]), .w_ready(nand_ready[d]), .w_data(nand_data[d]),
      .rd_en(pe_rd_en[d]), .rd_addr(pe_rd_addr), .rd_data(pe_rd_data[d]),
      .idle(pe_idle[d]), .neuron_cnt(pe_cnt[d])
    );
  end

  always_comb begin
    total_cnt = '0;
    for (int d = 0; d < N_DIE; d++) total_cnt += pe_cnt[d];
  end

  psum_reducer #(.N_PE(N_DIE), .MACS(MACS), .OUT_WORDS(OUT_WORDS)) u_red (
    .clk, .rst_n, .start(red_start), .dim_words(cfg_dim_words), .out_base(slot_base),
    .pe_rd_en, .pe_rd_addr, .pe_rd_data,
    .o_valid(ffn_valid), .o_word(ffn_word), .o_data(ffn_data),
    .busy(ffn_busy), .done(red_done)
  );

  assign red_start = (fst == F_RED);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      fst      <= F_IDLE;
      fs       <= 1'b0;
      rp       <= '0;
      clr_cnt  <= '0;
      base_cnt <= '0;
      ssd_done <= 1'b0;
    end else begin
      ssd_done <= 1'b0;
      unique case (fst)
        F_IDLE: if (ssd_start) begin
          fs      <= pc_ssd_stream;
          fst     <= F_CLR;
          clr_cnt <= '0;
          rp      <= '0;
        end
        F_CLR: begin
          // one cycle to start the clear, then wait for it to finish
          clr_cnt <= clr_cnt + 1'b1;
          if (clr_cnt > (OAW+1)'(1) && &pe_idle) begin
            fst      <= F_ISSUE;
            base_cnt <= total_cnt;
          end
        end
        F_ISSUE: begin
          if (ag_n_valid && ag_n_ready) rp <= rp + 1'b1;
          if (rp == list_len[fs]) fst <= F_DRAIN;
        end
        F_DRAIN: if (total_cnt - base_cnt == 32'(list_len[fs]) && &pe_idle &&
                     tsu_empty && !ag_t_valid)
          fst <= F_RED;
        F_RED:  fst <= F_WAIT;
        F_WAIT: if (red_done) begin
          fst      <= F_IDLE;
          ssd_done <= 1'b1;
        end
        default: fst <= F_IDLE;
      endcase
    end
  end

  // A score must never be offered while the thresholder is stalled.
  assert property (@(posedge clk) disable iff (!rst_n)
                   (pred_en && nb_res_valid[nb_sel]) |-> th_s_ready);
  // The host must not start a new DRAM phase while predictor output is
  // still being listed for the previous one.
  assert property (@(posedge clk) disable iff (!rst_n) !(dram_start && th_a_valid));

endmodule
