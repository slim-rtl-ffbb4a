// Self-checking testbench for transpose_unit: random blocks of 64 elements
// of 8 and 16 bits go in as packed words; every output plane is compared
// with bit k of each element, computed here. Also checks the 2*ew cycles
// per block with a gap-free source and sink.
module transpose_unit_tb;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic ew16 = 0, in_valid = 0, in_ready, out_valid, out_ready = 1, out_last;
  logic [63:0] in_data = 0, out_plane; logic [4:0] out_bit;

  transpose_unit dut (.*);

  int checks = 0, failures = 0;
  logic [15:0] el [64];
  int nplanes;

  task automatic block(bit w16, bit stall);
    int ew, per, t0;
    ew = w16 ? 16 : 8; per = 64 / ew;
    ew16 = w16;
    for (int i = 0; i < 64; i++) el[i] = w16 ? 16'($urandom) : 16'($urandom & 8'hff);
    t0 = $time;
    for (int w = 0; w < ew; w++) begin
      logic [63:0] d;
      for (int j = 0; j < per; j++) d[j*ew +: 16] = 0;
      for (int j = 0; j < per; j++)
        if (w16) d[j*16 +: 16] = el[w*per + j]; else d[j*8 +: 8] = el[w*per + j][7:0];
      @(negedge clk); in_valid = 1; in_data = d; #1;
      while (!in_ready) begin @(negedge clk); #1; end
      @(posedge clk);
    end
    @(negedge clk); in_valid = 0;
    nplanes = 0;
    while (nplanes < ew) begin
      if (stall) out_ready = ($urandom_range(0, 1) == 1);
      #1;
      if (out_valid && out_ready) begin
        logic [63:0] e;
        for (int i = 0; i < 64; i++) e[i] = el[i][out_bit];
        checks++;
        if (out_plane != e || out_bit != 5'(nplanes) || out_last != (nplanes == ew - 1)) failures++;
        nplanes++;
      end
      @(negedge clk);
    end
    out_ready = 1;
    if (!stall) begin
      checks++;
      if (($time - t0) / 10 > 2 * ew + 1) begin failures++; $display("block took %0d", ($time - t0) / 10); end
    end
  endtask

  initial begin
    repeat (3) @(negedge clk); rst_n = 1;
    for (int r = 0; r < 6; r++) begin
      block(r % 2, r >= 2);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
