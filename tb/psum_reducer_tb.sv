// Self-checking testbench for psum_reducer with 64 engines of 16 MACs
// (the default). Each engine's partial-sum memory is modelled here with a
// one-cycle read; the reduced words are compared with sums computed here,
// and the run must take N_PE cycles per word plus two cycles of latency.
module psum_reducer_tb;
  localparam int NP = 64, M = 16, OW = 768, DW = 6;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start = 0; logic [10:0] dim_words = DW; logic [9:0] out_base = 10'd40;
  logic [NP-1:0] pe_rd_en; logic [9:0] pe_rd_addr;
  logic [M*32-1:0] pe_rd_data [NP];
  logic o_valid; logic [9:0] o_word; logic [M*32-1:0] o_data;
  logic busy, done;

  psum_reducer dut (.*);

  logic [M*32-1:0] mem [NP][OW];
  always @(posedge clk)
    for (int p = 0; p < NP; p++) if (pe_rd_en[p]) pe_rd_data[p] <= mem[p][pe_rd_addr];

  int checks = 0, failures = 0, nwords = 0, t0, tdone;
  always @(posedge clk) begin
    if (o_valid && rst_n) begin
      nwords++;
      for (int k = 0; k < M; k++) begin
        logic [31:0] s;
        s = 0;
        for (int p = 0; p < NP; p++) s += mem[p][40 + o_word][k*32 +: 32];
        checks++;
        if (o_data[k*32 +: 32] != s) failures++;
      end
    end
    if (done && rst_n) tdone = $time;
  end

  initial begin
    for (int p = 0; p < NP; p++) begin
      pe_rd_data[p] = 0;
      for (int w = 0; w < OW; w++)
        for (int k = 0; k < M; k++) mem[p][w][k*32 +: 32] = $urandom;
    end
    repeat (3) @(negedge clk); rst_n = 1; @(negedge clk);
    start = 1; t0 = $time; @(negedge clk); start = 0;
    while (busy) @(negedge clk);
    repeat (4) @(negedge clk);
    checks++; if (nwords != DW) failures++;
    checks++;
    if ((tdone - t0) / 10 != DW * NP + 2) begin
      failures++; $display("took %0d cycles", (tdone - t0) / 10);
    end
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
