// nand_die_model: behavioural model of one NAND flash die as seen by the
// near-storage engine of that die. Not synthesizable logic: flash arrays
// are analog parts that the design takes as given.
//
// It accepts one page-read transaction at a time (slim_pkg::nand_txn_t),
// waits T_READ cycles per page (the array read time tR, scaled down), and
// then streams the fused vector, 3*dim bytes starting at byte
// page*page_bytes + offset of this die, MACS bytes per beat on a
// valid/ready stream. The stored bytes are not kept in an array: byte a of
// die d is wbyte(d, a), a hash, so a testbench can work out any weight
// independently. It also checks that every transaction was routed to the
// right die, and counts pages and transactions.
module nand_die_model
  import slim_pkg::*;
#(
  parameter int unsigned DIE    = 0,
  parameter int unsigned MACS   = 16,
  parameter int unsigned T_READ = 20
) (
  input  logic              clk,
  input  logic              rst_n,
  input  int unsigned       page_bytes,
  input  int unsigned       dim,             // dim_e in bytes
  input  logic              req_valid,
  output logic              req_ready,
  input  nand_txn_t         req,
  output logic              d_valid,
  input  logic              d_ready,
  output logic [MACS*8-1:0] d_data,
  output int                n_txn,
  output int                n_pages,
  output int                n_misrouted,
  output int                n_multi_page,
  output int                n_packed
);
  function automatic byte wbyte(int unsigned d, longint unsigned a);
    longint unsigned h;
    h = a * 64'd2654435761 + d * 64'd40503 + 64'd12345;
    h = h ^ (h >> 13);
    return byte'(h ^ (h >> 7));
  endfunction

  typedef enum logic [1:0] {M_IDLE, M_READ, M_SEND} mstate_e;
  mstate_e         st;
  int              wait_cnt, beat;
  longint unsigned base;

  assign req_ready = rst_n && (st == M_IDLE);
  assign d_valid   = (st == M_SEND);
  always_comb
    for (int i = 0; i < MACS; i++) d_data[i*8 +: 8] = wbyte(DIE, base + longint'(beat * MACS + i));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= M_IDLE; wait_cnt <= 0; beat <= 0; base <= 0;
      n_txn <= 0; n_pages <= 0; n_misrouted <= 0; n_multi_page <= 0; n_packed <= 0;
    end else begin
      unique case (st)
        M_IDLE: if (req_valid) begin
          st       <= M_READ;
          wait_cnt <= int'(T_READ) * int'(req.npages);
          base     <= longint'(req.page) * page_bytes + req.offset;
          beat     <= 0;
          n_txn    <= n_txn + 1;
          n_pages  <= n_pages + int'(req.npages);
          if (req.die != 16'(DIE)) n_misrouted <= n_misrouted + 1;
          if (req.npages > 1) n_multi_page <= n_multi_page + 1;
          if (req.offset != 0) n_packed <= n_packed + 1;
        end
        M_READ: if (wait_cnt <= 1) st <= M_SEND; else wait_cnt <= wait_cnt - 1;
        M_SEND: if (d_ready) begin
          if (beat == int'(3 * dim / MACS) - 1) st <= M_IDLE;
          beat <= beat + 1;
        end
        default: st <= M_IDLE;
      endcase
    end
  end
endmodule
