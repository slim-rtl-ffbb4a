// Self-checking testbench for bitserial_accumulator: random signed and
// unsigned 64-element groups (8 and 16 bit) are fed as bit-planes, over one
// or several groups before a clear, and the accumulator and its saturated
// 16-bit output are compared with the plain sums computed here. Checks the
// one-plane-per-cycle rate.
module bitserial_accumulator_tb;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic clr = 0, in_valid = 0, neg = 0; logic [63:0] plane = 0; logic [4:0] bitpos = 0, oshift = 0;
  logic signed [39:0] acc; logic signed [15:0] out16;

  bitserial_accumulator dut (.*);

  int checks = 0, failures = 0;

  task automatic dot(int ew, bit sgn, int groups, int sh);
    longint ref_sum = 0, sc; int t0;
    oshift = 5'(sh);
    t0 = $time;
    for (int g = 0; g < groups; g++) begin
      logic [15:0] el [64];
      for (int i = 0; i < 64; i++) begin
        el[i] = 16'($urandom);
        if (ew == 8) el[i] = {8'h0, el[i][7:0]};
        ref_sum += sgn ? (ew == 8 ? longint'($signed(el[i][7:0])) : longint'($signed(el[i])))
                       : longint'(el[i]);
      end
      for (int k = 0; k < ew; k++) begin
        @(negedge clk);
        for (int i = 0; i < 64; i++) plane[i] = el[i][k];
        in_valid = 1; bitpos = 5'(k); neg = sgn && (k == ew - 1);
        clr = (g == 0 && k == 0);
      end
    end
    @(negedge clk); in_valid = 0; clr = 0;
    checks++;
    if (($time - t0) / 10 != groups * ew + 1) failures++;
    checks++;
    if (acc != 40'(ref_sum)) begin failures++; $display("acc %0d expected %0d", acc, ref_sum); end
    sc = ref_sum >>> sh;
    if (sc > 32767) sc = 32767; if (sc < -32768) sc = -32768;
    checks++;
    if (out16 != 16'(sc)) failures++;
  endtask

  initial begin
    repeat (3) @(negedge clk); rst_n = 1;
    for (int r = 0; r < 40; r++) dot((r % 2) ? 16 : 8, r % 3 != 0, 1 + r % 4, r % 7);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
