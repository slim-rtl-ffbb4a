// Self-checking testbench for softmax_unit at its default LMAX of 2048.
// Streams random Q8.8 scores for several sequence lengths (up to the full
// 2048), checks each probability bit-exactly against the fixed-point recipe
// re-derived here, checks that it is within 7 % (plus 40 LSB) of the exact
// softmax computed with $exp, and that the probabilities add up to one
// within 2 %.
module softmax_unit_tb;
  import slim_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid = 0, in_ready, in_last = 0, out_valid, out_ready = 1, out_last, busy;
  score_t in_score = 0; prob_t out_prob;

  softmax_unit dut (.*);

  int checks = 0, failures = 0;

  function automatic int e15(int s, int m);
    int t, ip, fr;
    t  = ((s - m) * 369) >>> 8;
    ip = t >>> 8;
    fr = t & 255;
    if (ip < -15) return 0;
    return (32768 + fr * 128) >> (-ip);
  endfunction

  task automatic run(int len, int spread);
    int sc [], m, e [];
    longint sum, r, p;
    real ex, esum, got_sum;
    int n;
    sc = new[len]; e = new[len];
    m = -32768;
    for (int i = 0; i < len; i++) begin
      sc[i] = $signed(16'($urandom_range(0, spread))) - spread / 2;
      if (sc[i] > m) m = sc[i];
    end
    sum = 0; esum = 0;
    for (int i = 0; i < len; i++) begin
      e[i] = e15(sc[i], m); sum += e[i];
      esum += $exp((sc[i] - m) / 256.0);
    end
    r = 64'h8000_0000 / sum;
    for (int i = 0; i < len; i++) begin
      @(negedge clk);
      in_valid = 1; in_score = 16'(sc[i]); in_last = (i == len - 1);
      #1; while (!in_ready) begin @(negedge clk); #1; end
      @(posedge clk);
    end
    @(negedge clk); in_valid = 0; in_last = 0;
    n = 0; got_sum = 0;
    while (n < len) begin
      @(negedge clk);
      out_ready = ($urandom_range(0, 3) != 0);
      #1;
      if (out_valid && out_ready) begin
        real ideal;
        p = (longint'(e[n]) * r) >> 15; if (p > 65535) p = 65535;
        ideal = $exp((sc[n] - m) / 256.0) / esum * 65536.0;
        checks++;
        if (out_prob != 16'(p) || out_last != (n == len - 1)) begin
          failures++;
          if (failures < 5) $display("p[%0d] = %0d expected %0d", n, out_prob, p);
        end
        checks++;
        if ((out_prob - ideal) > 0.07 * ideal + 40.0 || (ideal - out_prob) > 0.07 * ideal + 40.0) begin
          failures++;
          if (failures < 5) $display("p[%0d] = %0d, exact %f", n, out_prob, ideal);
        end
        got_sum += out_prob;
        n++;
      end
    end
    checks++;
    if (got_sum < 0.98 * 65536 || got_sum > 1.02 * 65536) begin
      failures++; $display("sum of probabilities %f", got_sum / 65536.0);
    end
    @(negedge clk); out_ready = 1;
    repeat (3) @(negedge clk);
  endtask

  initial begin
    repeat (3) @(negedge clk); rst_n = 1;
    run(1, 100);
    run(7, 2000);
    run(64, 600);
    run(300, 4000);
    run(2048, 1500);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
