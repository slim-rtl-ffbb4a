// End-to-end testbench for slim_top at reduced size: 2 near-bank units
// (banks 0 and 1 backed by DRAM bank models), 4 flash dies with their
// engines, dim_e = 64, 64 FFN neurons per layer.
//
// The testbench plays the host. Before a run it lays out, in bank s, one
// 64-element signed column per neuron that stands for the predictor
// product (X . L . R) of input stream s, and broadcasts the FFN input x of
// both streams to the engines. In every DRAM phase that the scheduler
// starts, it accumulates the 64 columns bit-serially (one score per neuron)
// with the scores routed into the thresholder, runs a short softmax over
// four scores, and reports the phase done. Meanwhile the design runs SSD
// phases on its own: it reads the activated neurons' fused vectors from the
// die models and reduces the engines' partial sums.
//
// Checked against values computed here: every FFN output element of every
// (stream, layer) against an integer model of the fused FFN over exactly the
// neurons whose |score| exceeds the selected level's threshold, with the
// weights taken from the die models' hash at the address the page-aligned
// mapping gives; the activated counts; the softmax outputs summing to one;
// transactions reaching the right die.
// Two runs: pipelined with two streams and two layers at different
// sparsity levels, vectors packed several to a 4 KB page; then sequential
// with vectors spread over two 128-byte pages. Mechanisms counted, each
// must happen: skipped neurons, sparsity-level switch, DRAM/SSD overlap,
// sequential execution, scheduler stalls on full die queues, packed reads,
// multi-page reads, softmax outputs, reduced outputs.
module slim_top_tb;
  import slim_pkg::*;
  localparam int NB = 2, ND = 4, MACS = 16, DW = 4, DIM = DW * MACS, NH = 64;
  localparam int TR = 20;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [10:0] cfg_dim_words = DW; logic [4:0] cfg_qshift = 10;
  logic [31:0] cfg_base_page = 0; logic [15:0] cfg_vec_bytes = 3 * DIM, cfg_ppv = 1, cfg_vpp = 1;
  logic [3:0] cfg_level = 0;
  logic tbl_we = 0; logic [3:0] tbl_addr = 0; score_t tbl_wdata = 0;
  logic start = 0, pipelined = 0; logic [7:0] n_layers = 1; logic [1:0] n_streams = 1;
  logic run_busy, run_done, dram_start, dram_stream, ssd_start, ssd_stream, ssd_done;
  logic [7:0] dram_layer, ssd_layer; logic [31:0] overlap_cycles;
  logic dram_done = 0;
  logic [0:0] nb_sel = 0;
  logic dq_we = 0, dq_re = 0; logic [17:0] dq_addr = 0; logic [7:0] dq_wdata = 0, dq_rdata;
  logic cmd_valid = 0, cmd_ready, nb_busy, sm_valid; nb_cmd_t cmd = '0; prob_t sm_prob;
  logic pred_en = 0, pred_last = 0;
  logic bk_valid [NB], bk_ready [NB], bk_we [NB], bk_rvalid [NB];
  logic [13:0] bk_row [NB]; logic [6:0] bk_col [NB]; logic [63:0] bk_wdata [NB], bk_rdata [NB];
  logic x_we = 0; logic [9:0] x_addr = 0; logic [MACS*8-1:0] x_wdata = 0;
  logic nand_req_valid [ND], nand_req_ready [ND], nand_valid [ND], nand_ready [ND];
  nand_txn_t nand_req [ND]; logic [MACS*8-1:0] nand_data [ND];
  logic ffn_valid; logic [9:0] ffn_word; logic [MACS*32-1:0] ffn_data;
  logic [15:0] n_scored, n_activated; logic pred_done, ffn_busy;

  slim_top #(.N_BANK(NB), .N_DIE(ND), .LIST_DEPTH(256)) dut (.*);

  int unsigned page_bytes = 4096;
  int n_maj [NB];
  for (genvar b = 0; b < NB; b++) begin : g_bank
    dram_bank_model #(.ROWS(64), .COLS(128)) u_bank (
      .clk, .bk_valid(bk_valid[b]), .bk_ready(bk_ready[b]), .bk_we(bk_we[b]),
      .bk_row(bk_row[b][5:0]), .bk_col(bk_col[b]), .bk_wdata(bk_wdata[b]),
      .bk_rvalid(bk_rvalid[b]), .bk_rdata(bk_rdata[b]), .maj_valid(1'b0),
      .maj_a(6'd0), .maj_b(6'd0), .maj_c(6'd0), .maj_dst(6'd0), .n_maj(n_maj[b]));
  end

  int n_txn [ND], n_pages [ND], n_misr [ND], n_multi [ND], n_pack [ND];
  for (genvar d = 0; d < ND; d++) begin : g_die
    nand_die_model #(.DIE(d), .MACS(MACS), .T_READ(TR)) u_die (
      .clk, .rst_n, .page_bytes, .dim(DIM),
      .req_valid(nand_req_valid[d]), .req_ready(nand_req_ready[d]), .req(nand_req[d]),
      .d_valid(nand_valid[d]), .d_ready(nand_ready[d]), .d_data(nand_data[d]),
      .n_txn(n_txn[d]), .n_pages(n_pages[d]), .n_misrouted(n_misr[d]),
      .n_multi_page(n_multi[d]), .n_packed(n_pack[d]));
  end

  int checks = 0, failures = 0;
  // mechanism counters
  int m_skipped = 0, m_level_switch = 0, m_overlap = 0, m_sequential = 0, m_tsu_stall = 0;
  int m_packed = 0, m_multipage = 0, m_softmax = 0, m_reduced = 0, m_ssd_phases = 0;

  byte    xv   [2][DIM];          // FFN input of each stream
  byte    col  [2][NH][64];       // predictor columns of each stream
  int     thr  [16];
  longint exp_q [2][$];           // expected outputs, DIM per (stream, layer)
  int     exp_act [2][$];

  function automatic int sat8(longint v);
    return v > 127 ? 127 : v < -128 ? -128 : int'(v);
  endfunction
  function automatic byte wbyte(int unsigned d, longint unsigned a);
    longint unsigned h;
    h = a * 64'd2654435761 + d * 64'd40503 + 64'd12345;
    h = h ^ (h >> 13);
    return byte'(h ^ (h >> 7));
  endfunction
  function automatic int lvl_of(int layer);
    return (layer % 2 == 0) ? 3 : 8;
  endfunction

  // reference FFN output of stream s at sparsity level lv
  task automatic reference(int s, int lv);
    longint ps [DIM];
    int act;
    foreach (ps[k]) ps[k] = 0;
    act = 0;
    for (int j = 0; j < NH; j++) begin
      int sc, die, loc; longint unsigned a0, g, u; longint gs, us; int g8, u8, t, sw, h;
      sc = 0; for (int i = 0; i < 64; i++) sc += col[s][j][i];
      if ((sc < 0 ? -sc : sc) <= (thr[lv] < 0 ? 0 : thr[lv])) continue;
      act++;
      die = j % ND; loc = j / ND;
      if (cfg_vpp > 1)
        a0 = longint'(cfg_base_page + loc / cfg_vpp) * page_bytes + (loc % cfg_vpp) * cfg_vec_bytes;
      else
        a0 = longint'(cfg_base_page + loc * cfg_ppv) * page_bytes;
      gs = 0; us = 0;
      for (int k = 0; k < DIM; k++) begin
        gs += xv[s][k] * wbyte(die, a0 + k);
        us += xv[s][k] * wbyte(die, a0 + DIM + k);
      end
      g8 = sat8(gs >>> cfg_qshift); u8 = sat8(us >>> cfg_qshift);
      t = g8 + 48; if (t < 0) t = 0; if (t > 96) t = 96;
      sw = (g8 * t) / 96;
      h = sat8((sw * u8) >>> 4);
      for (int k = 0; k < DIM; k++) ps[k] += h * wbyte(die, a0 + 2 * DIM + k);
      g = 0; u = 0;
    end
    foreach (ps[k]) exp_q[s].push_back(ps[k]);
    exp_act[s].push_back(act);
  endtask

  // ---------------------------------------------------------- host access
  task automatic dq_write(int a, byte v);
    @(negedge clk); dq_we = 1; dq_addr = 18'(a); dq_wdata = v;
    @(negedge clk); dq_we = 0;
  endtask
  task automatic issue(nb_cmd_t x);
    @(negedge clk); cmd_valid = 1; cmd = x; #1;
    while (!cmd_ready) begin @(negedge clk); #1; end
    @(negedge clk); cmd_valid = 0;
    #1; while (nb_busy) begin @(negedge clk); #1; end
  endtask

  task automatic prepare(int s);
    nb_cmd_t x;
    nb_sel = 1'(s);
    for (int j = 0; j < NH; j++)
      for (int i = 0; i < 64; i++) begin
        col[s][j][i] = byte'($urandom);
        dq_write(j * 64 + i, col[s][j][i]);
      end
    x = '0; x.op = NB_LAYOUT; x.ew16 = 0; x.buf_addr = 0; x.row = 0; x.col = 0; x.count = NH;
    issue(x);
    for (int w = 0; w < DW; w++) begin
      logic [MACS*8-1:0] d;
      for (int k = 0; k < MACS; k++) begin
        xv[s][w * MACS + k] = byte'($urandom);
        d[k*8 +: 8] = xv[s][w * MACS + k];
      end
      @(negedge clk); x_we = 1; x_addr = 10'(s * DW + w); x_wdata = d;
      @(negedge clk); x_we = 0;
    end
  endtask

  // one DRAM phase: predictor scores, then a softmax over four scores
  int sm_cnt = 0; longint sm_sum = 0;
  always @(posedge clk) if (rst_n && sm_valid) begin sm_cnt++; sm_sum += sm_prob; end

  task automatic dram_phase(int s, int layer);
    nb_cmd_t x;
    int lv, prev_act;
    lv = lvl_of(layer);
    if (32'(cfg_level) != lv) m_level_switch++;
    cfg_level = 4'(lv);
    nb_sel = 1'(s);
    x = '0; x.op = NB_ACCUM; x.sgn = 1; x.count = 1; x.buf_addr = 15'(30000);
    pred_en = 1;
    for (int j = 0; j < NH; j++) begin
      x.col = 7'(j); pred_last = (j == NH - 1);
      issue(x);
    end
    pred_en = 0; pred_last = 0;
    repeat (3) @(negedge clk);
    reference(s, lv);
    prev_act = exp_act[s][$];
    checks++;
    if (n_scored != NH || 32'(n_activated) != prev_act) begin
      failures++; $display("scored %0d activated %0d expected %0d", n_scored, n_activated, prev_act);
    end
    if (prev_act < NH) m_skipped++;
    // attention-style softmax over four scores
    x = '0; x.op = NB_SMBASE; x.buf_addr = 15'(20000); issue(x);
    sm_cnt = 0; sm_sum = 0;
    for (int j = 0; j < 4; j++) begin
      x = '0; x.op = NB_ACCUM; x.sgn = 1; x.count = 1; x.col = 7'(j); x.oshift = 3;
      x.buf_addr = 15'(30000); x.to_sm = 1; x.sm_last = (j == 3);
      issue(x);
    end
    repeat (30) @(negedge clk);
    checks++;
    if (sm_cnt != 4 || sm_sum < 64200 || sm_sum > 66900) begin
      failures++; $display("softmax outputs %0d sum %0d", sm_cnt, sm_sum);
    end
    m_softmax += sm_cnt;
    @(negedge clk); dram_done = 1; @(negedge clk); dram_done = 0;
  endtask

  // host process serving DRAM phases
  bit host_on = 0;
  initial begin
    forever begin
      @(posedge clk);
      if (host_on && rst_n && dram_start) dram_phase(int'(dram_stream), int'(dram_layer));
    end
  end

  // SSD phase monitor
  int cur_ssd; longint got [DIM]; int got_words;
  always @(posedge clk) if (rst_n) begin
    if (ssd_start) begin cur_ssd = int'(ssd_stream); got_words = 0; end
    if (ffn_valid) begin
      for (int k = 0; k < MACS; k++) got[int'(ffn_word) * MACS + k] = $signed(ffn_data[k*32 +: 32]);
      got_words++; m_reduced++;
    end
    if (dut.ag_t_valid && !dut.ag_t_ready) m_tsu_stall++;
    if (ssd_done) begin
      m_ssd_phases++;
      checks++;
      if (got_words != DW || exp_q[cur_ssd].size() < DIM) begin
        failures++; $display("ssd phase: %0d words, %0d expected values", got_words, exp_q[cur_ssd].size());
      end else begin
        for (int k = 0; k < DIM; k++) begin
          longint e;
          e = exp_q[cur_ssd].pop_front();
          checks++;
          if (got[k] != e) begin
            failures++;
            if (failures < 6) $display("stream %0d out[%0d] = %0d expected %0d", cur_ssd, k, got[k], e);
          end
        end
      end
    end
  end

  task automatic run(bit pipe, int streams, int layers);
    int t0, txn0 [ND];
    pipelined = pipe; n_streams = 2'(streams); n_layers = 8'(layers);
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    t0 = $time;
    while (!run_done) @(posedge clk);
    @(negedge clk);
    $display("run pipelined=%0d streams=%0d layers=%0d: %0d cycles, overlap %0d",
             pipe, streams, layers, ($time - t0) / 10, overlap_cycles);
    if (pipe && overlap_cycles > 0) m_overlap++;
    if (!pipe) begin
      checks++;
      if (overlap_cycles != 0) failures++; else m_sequential++;
    end
  endtask

  initial begin
    int tot_multi, tot_pack, tot_misr;
    repeat (3) @(negedge clk); rst_n = 1;
    for (int l = 0; l < 16; l++) begin
      thr[l] = l * 100;
      @(negedge clk); tbl_we = 1; tbl_addr = 4'(l); tbl_wdata = score_t'(thr[l]);
      @(negedge clk); tbl_we = 0;
    end
    prepare(0);
    prepare(1);
    host_on = 1;
    // run 1: pipelined, vector packing (21 vectors of 192 bytes per 4 KB page)
    page_bytes = 4096; cfg_ppv = 1; cfg_vpp = 16'(4096 / (3 * DIM)); cfg_base_page = 7;
    run(1, 2, 2);
    foreach (n_pack[d]) m_packed += n_pack[d];
    // run 2: sequential, each vector over two 128-byte pages
    page_bytes = 128; cfg_ppv = 2; cfg_vpp = 1; cfg_base_page = 3;
    run(0, 2, 1);
    tot_multi = 0; tot_misr = 0;
    foreach (n_multi[d]) begin tot_multi += n_multi[d]; tot_misr += n_misr[d]; end
    m_multipage = tot_multi;
    checks++; if (tot_misr != 0) failures++;
    checks++; if (m_ssd_phases != 6) begin failures++; $display("ssd phases %0d", m_ssd_phases); end
    $display("mechanisms: skipped=%0d level_switch=%0d overlap=%0d sequential=%0d tsu_stall=%0d",
             m_skipped, m_level_switch, m_overlap, m_sequential, m_tsu_stall);
    $display("            packed=%0d multipage=%0d softmax=%0d reduced=%0d",
             m_packed, m_multipage, m_softmax, m_reduced);
    checks++; if (m_skipped == 0) failures++;
    checks++; if (m_level_switch == 0) failures++;
    checks++; if (m_overlap == 0) failures++;
    checks++; if (m_sequential == 0) failures++;
    checks++; if (m_tsu_stall == 0) failures++;
    checks++; if (m_packed == 0) failures++;
    checks++; if (m_multipage == 0) failures++;
    checks++; if (m_softmax == 0) failures++;
    checks++; if (m_reduced == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
