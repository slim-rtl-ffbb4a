// tsu: transaction scheduling unit between the address generator and the
// flash dies.
//
// Page-read transactions for activated neurons arrive in neuron order and
// are sorted into one small FIFO per die, so every die works through its own
// reads independently of the others; this is what lets the die-level engines
// use the bandwidth of all dies at once. The paper names the unit but not
// its insides; the per-die FIFOs, their depth and the handshakes are this
// design's choices.
//
// Interface:
//   t_valid/t_ready/t_txn        transactions in (t_txn.die selects the FIFO;
//                                t_ready is low while that FIFO is full)
//   q_valid[d]/q_ready[d]/q_txn[d]
//                                head of the FIFO of die d
//   empty                        all FIFOs empty
// Timing: a transaction can be taken every cycle and is visible at its
// die's head one cycle later.
module tsu
  import slim_pkg::*;
#(
  parameter int unsigned N_DIE = SSD_CHANNELS * SSD_CHIPS,
  parameter int unsigned DEPTH = 4,
  localparam int unsigned AW   = $clog2(DEPTH),
  localparam int unsigned DW   = $clog2(N_DIE)
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       t_valid,
  output logic       t_ready,
  input  nand_txn_t  t_txn,
  output logic       q_valid [N_DIE],
  input  logic       q_ready [N_DIE],
  output nand_txn_t  q_txn   [N_DIE],
  output logic       empty
);

  logic [N_DIE-1:0] nonempty;

  for (genvar d = 0; d < N_DIE; d++) begin : g_die
    nand_txn_t   mem [DEPTH];
    logic [AW:0] wp, rp;
    logic        full, push, pop;

    assign full  = (wp - rp) == (AW+1)'(DEPTH);
    assign push  = t_valid && t_ready && (t_txn.die == 16'(d));
    assign pop   = q_valid[d] && q_ready[d];
    assign q_valid[d]  = (wp != rp);
    assign q_txn[d]    = mem[rp[AW-1:0]];
    assign nonempty[d] = q_valid[d];

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        wp <= '0;
        rp <= '0;
      end else begin
        if (push) wp <= wp + 1'b1;
        if (pop)  rp <= rp + 1'b1;
      end
    end
    always_ff @(posedge clk) begin
      if (push) mem[wp[AW-1:0]] <= t_txn;
    end

    assert property (@(posedge clk) disable iff (!rst_n) !(push && full));
  end

  // ready when the FIFO of the addressed die has room
  logic [AW:0] occupancy [N_DIE];
  for (genvar d = 0; d < N_DIE; d++) begin : g_occ
    assign occupancy[d] = g_die[d].wp - g_die[d].rp;
  end
  assign t_ready = (t_txn.die < 16'(N_DIE)) &&
                   (occupancy[t_txn.die[DW-1:0]] != (AW+1)'(DEPTH));

  assign empty = (nonempty == '0);

endmodule
