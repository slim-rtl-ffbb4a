// bitserial_accumulator: the bit-serial adder tree of the near-bank unit.
//
// After the DRAM array has computed element-wise results in bit-serial form
// (one row per bit), the sum over the 64 elements of a column group is found
// one bit-plane at a time: a 64-input adder tree counts the ones of plane k,
// and the count, weighted by 2^k, is added into the accumulation register
// (paper Fig. 9(a) inset and hardware table: "64b bit-serial adder tree").
// For two's-complement data the most significant plane is subtracted. The
// register keeps accumulating over further column groups until cleared, so
// a dot product longer than 64 elements is summed group after group.
//
// The result is given both at full width and as the 16-bit value printed in
// Fig. 9(a), an arithmetic right shift by oshift with saturation (the shift
// and saturation are this design's choices).
//
// Interface: clr (clears the register; may coincide with the first plane),
// in_valid, plane, bitpos, neg (subtract: the sign plane); acc, out16.
// Timing: one plane per cycle; acc shows a plane's effect one cycle later.
module bitserial_accumulator
  import slim_pkg::*;
#(
  parameter int unsigned LANES = 64,
  parameter int unsigned ACC_W = 40
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    clr,
  input  logic                    in_valid,
  input  logic [LANES-1:0]        plane,
  input  logic [4:0]              bitpos,
  input  logic                    neg,
  input  logic [4:0]              oshift,
  output logic signed [ACC_W-1:0] acc,
  output score_t                  out16
);

  localparam int unsigned CW = $clog2(LANES + 1);

  // adder tree: pairwise sums, log2(LANES) levels
  function automatic logic [CW-1:0] popcount(input logic [LANES-1:0] v);
    logic [CW-1:0] s [2*LANES];
    for (int i = 0; i < LANES; i++) s[LANES + i] = CW'(v[i]);
    for (int n = LANES - 1; n >= 1; n--) s[n] = s[2*n] + s[2*n + 1];
    return s[1];
  endfunction

  logic signed [ACC_W-1:0] term, base, shifted;

  assign term = $signed({{(ACC_W-CW){1'b0}}, popcount(plane)}) <<< bitpos;
  assign base = clr ? '0 : acc;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)          acc <= '0;
    else if (in_valid)   acc <= neg ? base - term : base + term;
    else if (clr)        acc <= '0;
  end

  assign shifted = acc >>> oshift;
  assign out16   = (shifted > 32767)  ? 16'sh7fff :
                   (shifted < -32768) ? 16'sh8000 : score_t'(shifted);

endmodule
