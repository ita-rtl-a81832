// ita_softmax_en: Element Normalisation (EN) step of the integer softmax.
//
// Normalises one row chunk of M int8 attention scores on their way into the
// processing engines:
//   p_k = inv >> ((max - a_k) >> 5)
// where max is the row maximum and inv the inverted denominator found by DA and
// DI. Only the top 3 bits of the 8-bit distance are used, so each lane is a
// subtractor and a 3-bit barrel shifter, with no multiplier and no
// exponential. The result is the probability on a scale where 128 means 1.0;
// it is clipped to 127 to stay a positive int8 (the clip is this design's
// choice). A score above the stored maximum, which cannot occur when the same
// scores went through DA, is treated as distance 0. Combinational.
module ita_softmax_en #(
  parameter int unsigned M = ita_pkg::M
) (
  input  logic signed [7:0]                max_i,
  input  logic        [ita_pkg::INV_W-1:0] inv_i,
  input  logic        [M-1:0][7:0]         a_i,
  output logic        [M-1:0][7:0]         p_o
);

  import ita_pkg::*;

  logic [8:0]       diff;
  logic [INV_W-1:0] shifted;

  always_comb begin
    for (int unsigned k = 0; k < M; k++) begin
      diff    = 9'(max_i - $signed(a_i[k]));
      shifted = diff[8] ? inv_i : (inv_i >> diff[7:SM_SHIFT]);
      p_o[k]  = (shifted > INV_W'(127)) ? 8'd127 : shifted[7:0];
    end
  end

endmodule
