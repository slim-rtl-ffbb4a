// Self-checking testbench for tsu at the default 64 dies. Pushes random
// transactions, drains the per-die queues with random readiness, and checks
// that every transaction reaches its own die, in order, none lost; also that
// the input stalls when a die's queue is full.
module tsu_tb;
  import slim_pkg::*;
  localparam int ND = 64;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic t_valid = 0, t_ready; nand_txn_t t_txn = '0;
  logic q_valid [ND]; logic q_ready [ND]; nand_txn_t q_txn [ND];
  logic empty;

  tsu dut (.*);

  int checks = 0, failures = 0, full_stalls = 0;
  slim_pkg::nand_txn_t sent [ND][$];
  bit drain_slow;

  always @(posedge clk)
    for (int d = 0; d < ND; d++) q_ready[d] <= drain_slow ? ($urandom_range(0, 7) == 0) : 1'b1;

  always @(posedge clk) begin
    for (int d = 0; d < ND; d++) if (rst_n && q_valid[d] && q_ready[d]) begin
      checks++;
      if (sent[d].size() == 0 || q_txn[d] !== sent[d][0] || q_txn[d].die != 16'(d)) failures++;
      if (sent[d].size() != 0) void'(sent[d].pop_front());
    end
    if (t_valid && !t_ready) full_stalls++;
  end

  initial begin
    repeat (3) @(negedge clk); rst_n = 1; @(negedge clk);
    for (int phase = 0; phase < 2; phase++) begin
      drain_slow = (phase == 0);
      for (int k = 0; k < 800; k++) begin
        nand_txn_t x;
        x.die = 16'(phase == 0 ? $urandom_range(0, 3) : $urandom_range(0, ND - 1));
        x.page = $urandom; x.npages = 16'($urandom); x.offset = 16'($urandom); x.neuron = 16'(k);
        @(negedge clk);
        t_valid = 1; t_txn = x;
        #1;
        while (!t_ready) begin @(negedge clk); #1; end
        sent[x.die].push_back(x);
        @(posedge clk);
      end
      @(negedge clk);
      t_valid = 0;
      drain_slow = 0;
      repeat (40) @(negedge clk);
    end
    for (int d = 0; d < ND; d++) begin checks++; if (sent[d].size() != 0) failures++; end
    checks++; if (!empty) failures++;
    checks++; if (full_stalls == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
