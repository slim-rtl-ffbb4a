// transpose_unit: converts ordinary (horizontal) data into the bit-serial
// layout used by the processing-in-memory DRAM.
//
// Bit-serial PIM computes on one bit of many elements at a time: the DRAM
// row must hold bit k of every element, and an element's bits sit in
// consecutive rows of one column (the "vertical layout" of paper Fig. 9(b)).
// Data arrives from the host and the buffer the other way round, several
// elements per 64-bit word. Doing this reshuffle through the 8-bit DQ pins is
// what makes bit-serial PIM slow, so every bank gets its own transpose unit
// on the 64-bit internal bus (paper Sec. 4.3, "near-bank unit").
//
// One block is 64 elements of ew bits (ew = 8 or 16). It enters as ew words
// of 64 bits, element i in bits [(i mod (64/ew))*ew +: ew] of word
// i div (64/ew), and leaves as ew bit-planes of 64 bits, plane k holding bit
// k of element i at bit i, plane 0 first. The block size, element order and
// the single-buffered operation are this design's choices.
//
// Interface: in_valid/in_ready/in_data, out_valid/out_ready/out_plane with
// out_bit (plane number) and out_last (last plane of the block).
// Timing: ew cycles to take a block in, ew cycles to send it out.
module transpose_unit #(
  parameter int unsigned LANES  = 64,     // elements per plane = bus width
  parameter int unsigned EW_MAX = 16
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              ew16,          // 0: 8-bit elements, 1: 16-bit
  input  logic              in_valid,
  output logic              in_ready,
  input  logic [LANES-1:0]  in_data,
  output logic              out_valid,
  input  logic              out_ready,
  output logic [LANES-1:0]  out_plane,
  output logic [4:0]        out_bit,
  output logic              out_last
);

  logic [EW_MAX-1:0] elem [LANES];
  logic [4:0]        cnt;
  logic              full;
  logic [4:0]        ew;

  assign ew       = ew16 ? 5'd16 : 5'd8;
  assign in_ready = !full;
  assign out_valid = full;
  assign out_bit   = cnt;
  assign out_last  = full && (cnt == ew - 1'b1);

  always_comb begin
    for (int i = 0; i < LANES; i++) out_plane[i] = elem[i][cnt[3:0]];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt  <= '0;
      full <= 1'b0;
    end else if (!full) begin
      if (in_valid) begin
        if (cnt == ew - 1'b1) begin
          cnt  <= '0;
          full <= 1'b1;
        end else begin
          cnt <= cnt + 1'b1;
        end
      end
    end else if (out_ready) begin
      if (cnt == ew - 1'b1) begin
        cnt  <= '0;
        full <= 1'b0;
      end else begin
        cnt <= cnt + 1'b1;
      end
    end
  end

  // word cnt carries elements cnt*per .. cnt*per+per-1
  always_ff @(posedge clk) begin
    if (!full && in_valid) begin
      for (int i = 0; i < LANES; i++) begin
        if (ew16) begin
          if (i / (LANES / 16) == int'(cnt))
            elem[i] <= in_data[(i % (LANES / 16)) * 16 +: 16];
        end else begin
          if (i / (LANES / 8) == int'(cnt))
            elem[i] <= EW_MAX'(in_data[(i % (LANES / 8)) * 8 +: 8]);
        end
      end
    end
  end

endmodule
