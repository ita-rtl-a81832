// ita_softmax_da: Denominator Accumulation (DA) step of the integer softmax.
//
// Takes one chunk of N int8 elements of an attention row, together with the
// running maximum and running denominator stored for that row, and returns the
// updated pair:
//   new_max = max(old_max, max_n x_n)
//   new_sum = (old_sum >> ((new_max - old_max) >> 5))
//           + sum_n (SM_CONST >> ((new_max - x_n) >> 5))
// With the input scale fixed to B/2^B, e^x becomes 2^((x - max) >> (B - log2 B)),
// so each exponential is a constant shifted right by the top 3 bits of the
// 8-bit distance to the maximum, and a rise of the maximum is absorbed by
// shifting the stored sum. The sum saturates at 2^15 - 1 (15-bit accumulation).
// The structure (compare with MAX, N subtractors, N constant shifters, sum
// shifter, adder) follows the published datapath; the value of SM_CONST and
// the saturation are this design's choices. Combinational; the row buffers are
// in ita_softmax. `rescale_o` is high when the stored sum was shifted.
module ita_softmax_da #(
  parameter int unsigned N = ita_pkg::N
) (
  input  logic signed [7:0]                 max_i,
  input  logic        [ita_pkg::SUM_W-1:0]  sum_i,
  input  logic        [N-1:0][7:0]          x_i,
  output logic signed [7:0]                 max_o,
  output logic        [ita_pkg::SUM_W-1:0]  sum_o,
  output logic                              rescale_o,
  output logic                              saturate_o
);

  import ita_pkg::*;

  localparam int unsigned AW = SUM_W + $clog2(N) + 2;

  logic signed [7:0] chunk_max;
  logic        [7:0] dst;
  logic        [2:0] sh_old;
  logic     [AW-1:0] acc;

  always_comb begin
    chunk_max = max_i;
    for (int unsigned n = 0; n < N; n++) begin
      if ($signed(x_i[n]) > chunk_max) chunk_max = $signed(x_i[n]);
    end
    max_o = chunk_max;

    // Rescale the stored sum by the rise of the maximum.
    dst      = 8'(chunk_max - max_i);
    sh_old    = dst[7:SM_SHIFT];
    rescale_o = (sh_old != 3'd0);
    acc       = AW'(sum_i >> sh_old);

    // Add the shifted constants of this chunk.
    for (int unsigned n = 0; n < N; n++) begin
      dst = 8'(chunk_max - $signed(x_i[n]));
      acc  = acc + AW'(SM_CONST >> dst[7:SM_SHIFT]);
    end

    saturate_o = (acc > AW'((1 << SUM_W) - 1));
    sum_o      = saturate_o ? {SUM_W{1'b1}} : acc[SUM_W-1:0];
  end

endmodule
