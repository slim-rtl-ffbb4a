// Self-checking testbench for near_bank_unit at its default size (256 KB
// buffer, 2048-entry softmax) with a reduced bank model. It writes element
// data through the 8-bit DQ path, lays it out bit-serially in the bank and
// checks every stored bit, accumulates bit-serial sums (signed 8-bit and
// unsigned 16-bit) and checks the scores, sends a short sequence of scores
// through the softmax and reads the probabilities back over DQ, comparing
// each with the fixed-point recipe computed here.
module near_bank_unit_tb;
  import slim_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic dq_we = 0, dq_re = 0; logic [17:0] dq_addr = 0; logic [7:0] dq_wdata = 0, dq_rdata;
  logic cmd_valid = 0, cmd_ready; nb_cmd_t cmd = '0;
  logic bk_valid, bk_ready, bk_we, bk_rvalid; logic [13:0] bk_row; logic [6:0] bk_col;
  logic [63:0] bk_wdata, bk_rdata;
  logic res_valid, sm_valid, sm_last_o, busy; score_t res_score; prob_t sm_prob;
  logic maj_valid = 0; int n_maj;

  near_bank_unit dut (.*);

  dram_bank_model #(.ROWS(16384), .COLS(128)) bank (
    .clk, .bk_valid, .bk_ready, .bk_we, .bk_row, .bk_col, .bk_wdata, .bk_rvalid,
    .bk_rdata, .maj_valid, .maj_a(14'd0), .maj_b(14'd0), .maj_c(14'd0), .maj_dst(14'd0), .n_maj);

  int checks = 0, failures = 0;
  int res_q [$];
  always @(posedge clk) if (rst_n && res_valid) res_q.push_back(res_score);

  task automatic dq_write(int a, byte v);
    @(negedge clk); dq_we = 1; dq_addr = 18'(a); dq_wdata = v;
    @(negedge clk); dq_we = 0;
  endtask
  task automatic dq_read(int a, output byte v);
    @(negedge clk); dq_re = 1; dq_addr = 18'(a);
    @(negedge clk); dq_re = 0; #1; v = dq_rdata;
  endtask
  task automatic issue(nb_cmd_t x);
    @(negedge clk); cmd_valid = 1; cmd = x; #1;
    while (!cmd_ready) begin @(negedge clk); #1; end
    @(negedge clk); cmd_valid = 0;
    #1; while (busy) begin @(negedge clk); #1; end
  endtask

  // element e of a region: ew-bit values laid out little-endian in bytes
  task automatic region(int word_base, int ngrp, bit w16, bit sgn, int row, int col,
                        int sh, bit to_sm, bit last, output longint total);
    int nb, v;
    nb_cmd_t x;
    int el [];
    nb = w16 ? 2 : 1;
    el = new[64 * ngrp];
    total = 0;
    foreach (el[i]) begin
      v = w16 ? $urandom_range(0, 900) : $urandom_range(0, 255);
      el[i] = v;
      total += (sgn && !w16) ? longint'($signed(8'(v))) : longint'(v);
      for (int b = 0; b < nb; b++) dq_write(word_base * 8 + i * nb + b, byte'(v >> (8 * b)));
    end
    x = '0; x.op = NB_LAYOUT; x.ew16 = w16; x.buf_addr = 15'(word_base);
    x.row = 14'(row); x.col = 7'(col); x.count = 8'(ngrp);
    issue(x);
    // every stored bit
    for (int g = 0; g < ngrp; g++)
      for (int k = 0; k < 8 * nb; k++)
        for (int i = 0; i < 64; i++) begin
          checks++;
          if (bank.mem[row + k][col + g][i] != el[g * 64 + i][k]) failures++;
        end
    x.op = NB_ACCUM; x.sgn = sgn; x.oshift = 5'(sh); x.to_sm = to_sm; x.sm_last = last;
    x.buf_addr = 15'(30000);
    issue(x);
  endtask

  function automatic int e15(int s, int m);
    int t, ip;
    t = ((s - m) * 369) >>> 8; ip = t >>> 8;
    if (ip < -15) return 0;
    return (32768 + (t & 255) * 128) >> (-ip);
  endfunction

  initial begin
    longint tot; int sc [6]; int m; longint sum, r; byte lo, hi;
    repeat (3) @(negedge clk); rst_n = 1;
    // signed 8-bit, 3 groups
    region(0, 3, 0, 1, 100, 5, 0, 0, 0, tot);
    checks++; if (res_q.size() != 1 || res_q[0] != int'(tot)) failures++;
    dq_read(30000 * 8, lo); dq_read(30000 * 8 + 1, hi);
    checks++; if ({hi, lo} != 16'(tot)) failures++;
    res_q.delete();
    // unsigned 16-bit, 2 groups, scaled by 4
    region(64, 2, 1, 0, 300, 20, 2, 0, 0, tot);
    checks++; if (res_q.size() != 1 || res_q[0] != int'(tot >>> 2)) failures++;
    res_q.delete();
    // six scores into the softmax
    begin
      nb_cmd_t x; x = '0; x.op = NB_SMBASE; x.buf_addr = 15'(20000); issue(x);
    end
    for (int s = 0; s < 6; s++) begin
      region(200 + s * 8, 1, 0, 1, 500 + 8 * s, 40, 0, 1, s == 5, tot);
      sc[s] = int'(tot);
    end
    repeat (40) @(negedge clk);
    m = sc[0]; foreach (sc[i]) if (sc[i] > m) m = sc[i];
    sum = 0; foreach (sc[i]) sum += e15(sc[i], m);
    r = 64'h8000_0000 / sum;
    for (int s = 0; s < 6; s++) begin
      longint p;
      p = (longint'(e15(sc[s], m)) * r) >> 15; if (p > 65535) p = 65535;
      dq_read((20000 + s) * 8, lo); dq_read((20000 + s) * 8 + 1, hi);
      checks++;
      if ({hi, lo} != 16'(p)) begin failures++; $display("prob %0d = %0d expected %0d", s, {hi, lo}, p); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
