// ffn_addr_gen: maps activated FFN neurons to NAND page reads.
//
// Weights are stored as fused vectors: for neuron j, column j of the gate
// and up projections and row j of the down projection lie together, 3*dim_e
// bytes, so one read brings everything the engine needs for that neuron
// (paper Fig. 11). Fused vectors are dealt round-robin over the dies, page
// aligned (paper Sec. 5.1): neuron j lives on die j mod N_DIE, as the
// (j div N_DIE)-th vector of that die. A vector that is longer than a page
// takes ppv consecutive pages starting on a page boundary. When a vector is
// shorter than a page, vpp consecutive vectors are packed into one page
// ("vector packing") and the read carries the byte offset of the vector.
//
// The paper places this function in the SSD firmware (the runtime's "Addr
// Gen"); here it is a hardware unit so that one transaction leaves per
// cycle. ppv and vpp are given by the host per layer, ceil(3*dim_e/page)
// and floor(page/(3*dim_e)), so the unit needs no divide by the page size;
// only the packing case divides the local index by vpp.
//
// Interface:
//   base_page, vec_bytes, ppv, vpp   layer configuration, held while busy
//   n_valid/n_ready/n_idx            activated neuron indices in
//   t_valid/t_ready/t_txn            page-read transactions out
// Timing: one transaction per cycle, one cycle latency.
module ffn_addr_gen
  import slim_pkg::*;
#(
  parameter int unsigned N_DIE = SSD_CHANNELS * SSD_CHIPS,   // 64 dies
  localparam int unsigned DW   = $clog2(N_DIE)
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic [31:0] base_page,
  input  logic [15:0] vec_bytes,
  input  logic [15:0] ppv,        // pages per vector (>= 1)
  input  logic [15:0] vpp,        // vectors per page (>= 1)
  input  logic        n_valid,
  output logic        n_ready,
  input  logic [15:0] n_idx,
  output logic        t_valid,
  input  logic        t_ready,
  output nand_txn_t   t_txn
);

  logic [15:0] local_idx, slot_page, slot_off;
  nand_txn_t   txn_d;

  assign local_idx = n_idx >> DW;
  always_comb begin
    if (vpp > 16'd1) begin
      slot_page = local_idx / vpp;
      slot_off  = 16'((local_idx % vpp) * vec_bytes);
    end else begin
      slot_page = 16'(local_idx * ppv);
      slot_off  = '0;
    end
    txn_d.die    = 16'(n_idx[DW-1:0]);
    txn_d.page   = base_page + 32'(slot_page);
    txn_d.npages = (vpp > 16'd1) ? 16'd1 : ppv;
    txn_d.offset = slot_off;
    txn_d.neuron = n_idx;
  end

  assign n_ready = !t_valid || t_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      t_valid <= 1'b0;
      t_txn   <= '0;
    end else begin
      if (t_valid && t_ready) t_valid <= 1'b0;
      if (n_valid && n_ready) begin
        t_valid <= 1'b1;
        t_txn   <= txn_d;
      end
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n)
                   t_valid && !t_ready |=> t_valid && $stable(t_txn));

endmodule
