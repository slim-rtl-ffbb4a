// Self-checking testbench for nsp_pe at its default (die-level) size.
// Broadcasts a random input vector, clears a partial-sum slot, streams
// random fused vectors (Wg column, Wu column, Wd row) and compares the
// partial sums with an independent integer model of the fused FFN. Runs
// once with a gap-free stream to check the 3*dim_words+1 cycles per neuron,
// and once with random stalls on the weight stream.
module nsp_pe_tb;
  localparam int MACS = 16;
  localparam int DW   = 8;              // dim_e = 128
  localparam int DIM  = DW * MACS;
  localparam int NEU  = 6;

  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;

  logic [10:0] in_base = 0;
  logic [10:0] dim_words = DW;
  logic [9:0]  out_base = 0;
  logic [4:0]  qshift = 7;
  logic in_we = 0; logic [9:0] in_waddr = 0; logic [MACS*8-1:0] in_wdata = 0;
  logic clr_start = 0;
  logic w_valid = 0, w_ready; logic [MACS*8-1:0] w_data = 0;
  logic rd_en = 0; logic [9:0] rd_addr = 0; logic [MACS*32-1:0] rd_data;
  logic idle; logic [31:0] neuron_cnt;

  nsp_pe dut (.clk, .rst_n, .dim_words, .in_base(in_base[9:0]), .out_base,
              .qshift, .in_we, .in_waddr, .in_wdata, .clr_start, .w_valid,
              .w_ready, .w_data, .rd_en, .rd_addr, .rd_data, .idle, .neuron_cnt);

  int checks = 0, failures = 0;
  byte x [DIM];
  byte wg [NEU][DIM], wu [NEU][DIM], wd [NEU][DIM];
  longint ref_ps [DIM];

  function automatic int sat8(longint v);
    return v > 127 ? 127 : v < -128 ? -128 : int'(v);
  endfunction

  task automatic model(int qs);
    foreach (ref_ps[k]) ref_ps[k] = 0;
    for (int n = 0; n < NEU; n++) begin
      longint g = 0, u = 0; int g8, u8, t, s, h;
      for (int k = 0; k < DIM; k++) begin
        g += x[k] * wg[n][k];
        u += x[k] * wu[n][k];
      end
      g8 = sat8(g >>> qs); u8 = sat8(u >>> qs);
      t = g8 + 48; if (t < 0) t = 0; if (t > 96) t = 96;
      s = (g8 * t) / 96;           // hard swish, Q4.4
      h = sat8((s * u8) >>> 4);
      for (int k = 0; k < DIM; k++) ref_ps[k] += h * wd[n][k];
    end
  endtask

  // All stimulus changes at the falling edge, so the DUT samples stable
  // values at the rising edge. The caller is at a falling edge.
  task automatic send_word(input byte v [DIM], int w, bit stall);
    logic [MACS*8-1:0] d;
    for (int k = 0; k < MACS; k++) d[k*8 +: 8] = v[w*MACS + k];
    if (stall) while ($urandom_range(0, 2) == 0) @(negedge clk);
    w_valid = 1; w_data = d;
    while (!w_ready) @(negedge clk);
    @(negedge clk);             // the beat was taken at the rising edge
    w_valid = 0;
  endtask

  task automatic run(bit stall, int qs);
    int t0, t1;
    foreach (x[k]) x[k] = byte'($urandom);
    for (int n = 0; n < NEU; n++)
      for (int k = 0; k < DIM; k++) begin
        wg[n][k] = byte'($urandom); wu[n][k] = byte'($urandom); wd[n][k] = byte'($urandom);
      end
    qshift = 5'(qs);
    for (int w = 0; w < DW; w++) begin
      logic [MACS*8-1:0] d;
      for (int k = 0; k < MACS; k++) d[k*8 +: 8] = x[w*MACS + k];
      in_we = 1; in_waddr = 10'(w); in_wdata = d; @(negedge clk);
    end
    in_we = 0;
    clr_start = 1; @(negedge clk); clr_start = 0;
    repeat (DW + 1) @(negedge clk);
    t0 = $time;
    for (int n = 0; n < NEU; n++) begin
      for (int w = 0; w < DW; w++) send_word(wg[n], w, stall);
      for (int w = 0; w < DW; w++) send_word(wu[n], w, stall);
      for (int w = 0; w < DW; w++) send_word(wd[n], w, stall);
    end
    while (!idle) @(negedge clk);
    t1 = $time;
    if (!stall) begin
      checks++;
      // the beat-by-beat driver adds no gaps except the one h cycle
      if ((t1 - t0) / 2 != NEU * (3 * DW + 1)) begin
        failures++; $display("cycle count %0d expected %0d", (t1 - t0) / 2, NEU * (3 * DW + 1));
      end
    end
    model(qs);
    for (int w = 0; w < DW; w++) begin
      rd_en = 1; rd_addr = 10'(w); @(negedge clk); rd_en = 0;
      for (int k = 0; k < MACS; k++) begin
        checks++;
        if ($signed(rd_data[k*32 +: 32]) != 32'(ref_ps[w*MACS + k])) begin
          failures++;
          if (failures < 5) $display("psum[%0d] = %0d expected %0d", w*MACS + k,
                                     $signed(rd_data[k*32 +: 32]), ref_ps[w*MACS + k]);
        end
      end
    end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    run(0, 7);
    checks++; if (neuron_cnt != NEU) failures++;
    run(1, 9);
    run(1, 6);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
