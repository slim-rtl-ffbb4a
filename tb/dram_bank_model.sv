// dram_bank_model: behavioural model of one PIM-enabled DDR4 bank, for
// testbenches only.
//
// The array is ROWS rows of COLS 64-bit columns (16384 x 8192 bits in the
// full-size part). Column reads and writes arrive on the 64-bit internal
// bus used by the near-bank unit. A row miss costs tRP + tRCD, a read
// returns tCL cycles after it is taken, and column commands are spaced by
// tCCD. The in-array majority operation of bit-serial PIM is modelled as a
// single command (activate-activate-precharge): rows a, b and c are
// activated together, all three take the bitwise majority, and the result is
// copied into row dst; it keeps the bank busy for 2*tRAS + tRP. Times are in
// bank clock cycles from the hardware table; the model does not refresh.
module dram_bank_model #(
  parameter int ROWS = 16384,
  parameter int COLS = 128
) (
  input  logic                     clk,
  input  logic                     bk_valid,
  output logic                     bk_ready,
  input  logic                     bk_we,
  input  logic [$clog2(ROWS)-1:0]  bk_row,
  input  logic [$clog2(COLS)-1:0]  bk_col,
  input  logic [63:0]              bk_wdata,
  output logic                     bk_rvalid,
  output logic [63:0]              bk_rdata,
  input  logic                     maj_valid,
  input  logic [$clog2(ROWS)-1:0]  maj_a, maj_b, maj_c, maj_dst,
  output int                       n_maj
);
  import slim_pkg::*;

  logic [63:0] mem [ROWS][COLS];
  int          busy = 0;
  int          open_row = -1;
  int          rd_q [$];
  logic [63:0] rd_d [$];

  assign bk_ready = (busy == 0) && !maj_valid;

  initial begin
    n_maj = 0;
    bk_rvalid = 0;
    bk_rdata = 0;
  end

  always @(posedge clk) begin
    bk_rvalid <= 1'b0;
    if (busy > 0) busy <= busy - 1;
    // returning reads
    foreach (rd_q[i]) rd_q[i]--;
    if (rd_q.size() != 0 && rd_q[0] <= 0) begin
      void'(rd_q.pop_front());
      bk_rvalid <= 1'b1;
      bk_rdata  <= rd_d.pop_front();
    end
    if (maj_valid && busy == 0) begin
      for (int c = 0; c < COLS; c++) begin
        logic [63:0] m;
        m = (mem[maj_a][c] & mem[maj_b][c]) | (mem[maj_b][c] & mem[maj_c][c]) |
            (mem[maj_a][c] & mem[maj_c][c]);
        mem[maj_a][c] = m; mem[maj_b][c] = m; mem[maj_c][c] = m;
        mem[maj_dst][c] = m;
      end
      open_row = -1;
      busy <= 2 * T_RAS + T_RP;
      n_maj++;
    end else if (bk_valid && bk_ready) begin
      int lat;
      lat = (open_row == int'(bk_row)) ? 0 : (open_row < 0 ? T_RCD : T_RP + T_RCD);
      open_row = bk_row;
      if (bk_we) begin
        mem[bk_row][bk_col] = bk_wdata;
        busy <= lat + T_CCD - 1;
      end else begin
        rd_q.push_back(lat + T_CL);
        rd_d.push_back(mem[bk_row][bk_col]);
        busy <= lat + T_CCD - 1;
      end
    end
  end
endmodule
