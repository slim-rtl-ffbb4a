// Self-checking testbench for ffn_addr_gen at the default 64 dies. Sends
// random activated neuron indices under two layer layouts taken from the
// evaluated models: dim_e = 4096 with 4 KB pages (a 12 KB fused vector
// spans 3 pages) and dim_e = 2048 with 16 KB pages (two 6 KB vectors packed
// per page). Each transaction is compared with the mapping computed here.
module ffn_addr_gen_tb;
  import slim_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [31:0] base_page = 0;
  logic [15:0] vec_bytes = 0, ppv = 1, vpp = 1;
  logic n_valid = 0, n_ready; logic [15:0] n_idx = 0;
  logic t_valid, t_ready = 1; nand_txn_t t_txn;

  ffn_addr_gen dut (.*);

  int checks = 0, failures = 0;
  nand_txn_t exp_q [$];

  always @(posedge clk) t_ready <= ($urandom_range(0, 3) != 0);
  always @(posedge clk) if (rst_n && t_valid && t_ready) begin
    nand_txn_t e;
    checks++;
    if (exp_q.size() == 0) begin failures++; end
    else begin
      e = exp_q.pop_front();
      if (t_txn !== e) begin
        failures++;
        $display("neuron %0d: die %0d page %0d n %0d off %0d, expected die %0d page %0d n %0d off %0d",
                 e.neuron, t_txn.die, t_txn.page, t_txn.npages, t_txn.offset,
                 e.die, e.page, e.npages, e.offset);
      end
    end
  end

  task automatic layer(int dim_e, int page_b, int base);
    int vb, p, v, j;
    vb = 3 * dim_e;
    p = (vb + page_b - 1) / page_b;
    v = (vb < page_b) ? page_b / vb : 1;
    base_page = 32'(base); vec_bytes = 16'(vb); ppv = 16'(p); vpp = 16'(v);
    j = 0;
    for (int k = 0; k < 200; k++) begin
      nand_txn_t e;
      j += $urandom_range(1, 40);
      e.die = 16'(j % 64);
      e.neuron = 16'(j);
      if (v > 1) begin
        e.page = 32'(base + (j / 64) / v); e.offset = 16'(((j / 64) % v) * vb); e.npages = 1;
      end else begin
        e.page = 32'(base + (j / 64) * p); e.offset = 0; e.npages = 16'(p);
      end
      exp_q.push_back(e);
      @(negedge clk);
      n_valid = 1; n_idx = 16'(j);
      #1;
      while (!n_ready) begin @(negedge clk); #1; end
      @(posedge clk);
    end
    @(negedge clk);
    n_valid = 0;
    repeat (20) @(negedge clk);
  endtask

  initial begin
    repeat (3) @(negedge clk); rst_n = 1; @(negedge clk);
    layer(4096, 4096, 1000);
    layer(2048, 16384, 77);
    layer(5120, 4096, 5);
    checks++; if (exp_q.size() != 0) failures++;
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
