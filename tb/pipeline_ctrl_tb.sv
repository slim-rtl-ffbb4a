// Self-checking testbench for pipeline_ctrl. The DRAM and SSD engines are
// modelled here as fixed-latency units. For sequential and pipelined runs
// with one and two inputs it checks the dependency order of every input
// (DRAM of layer j, then SSD of layer j, then DRAM of layer j+1), that
// sequential mode never overlaps the engines, that pipelined mode does, and
// the total cycle counts against the timing of Fig. 12.
module pipeline_ctrl_tb;
  localparam int TD = 30, TS = 50;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start = 0, pipelined = 0; logic [7:0] n_layers = 4; logic [1:0] n_streams = 2;
  logic dram_start, ssd_start, dram_done = 0, ssd_done = 0;
  logic [0:0] dram_stream, ssd_stream; logic [7:0] dram_layer, ssd_layer;
  logic busy, done; logic [31:0] overlap_cycles;

  pipeline_ctrl dut (.*);

  int checks = 0, failures = 0;
  int dcnt, scnt, dram_busy_until, ssd_busy_until, both;
  int next_d [2], next_s [2];

  // engine models: done pulse after a fixed time
  always @(posedge clk) begin
    if (rst_n && dram_start) begin
      checks++;
      if (dram_layer != 8'(next_d[dram_stream]) || next_s[dram_stream] != next_d[dram_stream]) failures++;
      next_d[dram_stream]++;
      dcnt++;
      fork begin repeat (TD - 1) @(posedge clk); dram_done <= 1; @(posedge clk); dram_done <= 0; end join_none
    end
    if (rst_n && ssd_start) begin
      checks++;
      if (ssd_layer != 8'(next_s[ssd_stream]) || next_d[ssd_stream] != next_s[ssd_stream] + 1) failures++;
      next_s[ssd_stream]++;
      scnt++;
      fork begin repeat (TS - 1) @(posedge clk); ssd_done <= 1; @(posedge clk); ssd_done <= 0; end join_none
    end
  end

  task automatic run(bit pip, int ns, int nl, output int cycles);
    int t0;
    pipelined = pip; n_streams = 2'(ns); n_layers = 8'(nl);
    dcnt = 0; scnt = 0; next_d = '{0, 0}; next_s = '{0, 0};
    start = 1; t0 = $time; @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    cycles = ($time - t0) / 10;
    checks++; if (dcnt != ns * nl || scnt != ns * nl) failures++;
    checks++;
    if (!pip && overlap_cycles != 0) failures++;
    if (pip && ns == 2 && overlap_cycles == 0) failures++;
    repeat (3) @(negedge clk);
  endtask

  initial begin
    int cs, cp, c1;
    repeat (3) @(negedge clk); rst_n = 1; @(negedge clk);
    run(0, 2, 4, cs);
    run(1, 2, 4, cp);
    run(1, 1, 4, c1);
    $display("sequential %0d, pipelined %0d, single %0d cycles", cs, cp, c1);
    // sequential: every phase back to back, 2 inputs x 4 layers x (TD+TS)
    checks++; if (cs < 8 * (TD + TS) || cs > 8 * (TD + TS + 6)) failures++;
    // pipelined with 2 inputs: the SSD is the bottleneck, 8 x TS + one TD
    checks++; if (cp < 8 * TS + TD || cp > 8 * TS + TD + 8 * 4) failures++;
    // one input cannot overlap anything
    checks++; if (c1 < 4 * (TD + TS)) failures++;
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
