// Self-checking testbench for sparsity_thresholder: fills the threshold
// table, streams random predictor scores (including the most negative
// value) at two sparsity levels, with and without back-pressure, and
// compares the activated-neuron list and counts with |y| > threshold
// computed here. Checks one score per cycle when the output is not stalled.
module sparsity_thresholder_tb;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic tbl_we = 0; logic [3:0] tbl_addr = 0; logic signed [15:0] tbl_wdata = 0;
  logic [3:0] level = 0;
  logic s_valid = 0, s_ready, s_last = 0; logic signed [15:0] s_score = 0;
  logic a_valid, a_ready = 1; logic [15:0] a_idx;
  logic done; logic [15:0] n_seen, n_active;

  sparsity_thresholder dut (.*);

  int checks = 0, failures = 0;
  localparam int N = 300;
  int thr_of [16];
  int exp_q [$];
  int got_q [$];
  bit stall_out;

  always @(posedge clk) if (rst_n && a_valid && a_ready) got_q.push_back(a_idx);
  always @(posedge clk) a_ready <= stall_out ? ($urandom_range(0, 1) == 1) : 1'b1;

  task automatic pass(int lv, bit stall);
    int sc [N]; int t0, t1, thr;
    stall_out = stall;
    level = 4'(lv);
    thr = thr_of[lv] < 0 ? 0 : thr_of[lv];
    exp_q.delete(); got_q.delete();
    for (int i = 0; i < N; i++) begin
      sc[i] = $signed(16'($urandom));
      if (i % 37 == 5) sc[i] = -32768;
      if ((sc[i] < 0 ? -sc[i] : sc[i]) > thr) exp_q.push_back(i);
    end
    @(posedge clk);
    t0 = $time;
    for (int i = 0; i < N; i++) begin
      @(negedge clk);
      s_valid = 1; s_score = 16'(sc[i]); s_last = (i == N - 1);
      #1;
      while (!s_ready) begin @(negedge clk); #1; end
      @(posedge clk);
    end
    t1 = $time;
    @(negedge clk);
    s_valid = 0; s_last = 0;
    repeat (4) @(negedge clk);
    if (!stall) begin
      checks++;
      if ((t1 - t0) / 10 != N) begin failures++; $display("rate: %0d cycles for %0d", (t1 - t0) / 10, N); end
    end
    checks++;
    if (got_q.size() != exp_q.size()) begin
      failures++; $display("level %0d: %0d activated, expected %0d", lv, got_q.size(), exp_q.size());
    end else
      foreach (exp_q[i]) begin
        checks++;
        if (got_q[i] != exp_q[i]) failures++;
      end
    checks++; if (n_active != 16'(exp_q.size())) failures++;
    checks++; if (n_seen != 16'(N)) failures++;
  endtask

  int done_cnt = 0;
  always @(posedge clk) if (rst_n && done) done_cnt++;

  initial begin
    repeat (3) @(negedge clk); rst_n = 1; @(negedge clk);
    for (int l = 0; l < 16; l++) begin
      thr_of[l] = (l == 15) ? -5 : l * 2000;
      tbl_we = 1; tbl_addr = 4'(l); tbl_wdata = 16'(thr_of[l]); @(negedge clk);
    end
    tbl_we = 0;
    pass(0, 0);
    pass(7, 1);
    pass(12, 0);
    pass(15, 1);
    checks++; if (done_cnt != 4) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
