// ita_requant: requantisation of one accumulated value back to int8.
//
// y = clip(((x * mult) + 2^(shift-1)) >>> shift + add, -128, 127)
// with x the signed D-bit accumulator value, mult an unsigned 8-bit scale,
// shift a 5-bit right shift (rounding half up, no rounding for shift 0) and add
// a signed 8-bit offset. The final clip to the int8 range is also the clipping
// of softmax inputs: the scale that maps Q x K^T into it comes from training.
// The form of the scale (multiply, shift, add) is this design's choice; the
// architecture only fixes the 8-bit output and the clipping. Combinational.
module ita_requant #(
  parameter int unsigned D = ita_pkg::D
) (
  input  logic signed [D-1:0] x_i,
  input  ita_pkg::ita_rq_t    rq_i,
  output logic signed [7:0]   y_o
);

  localparam int unsigned PW = D + 10;   // product plus headroom for the offset

  logic signed [PW-1:0] prod, rnd, shifted, with_add;

  always_comb begin
    prod     = PW'(x_i) * $signed({1'b0, rq_i.mult});
    rnd      = (rq_i.shift == 5'd0) ? '0 : (PW'(1) <<< (rq_i.shift - 5'd1));
    shifted  = (prod + rnd) >>> rq_i.shift;
    with_add = shifted + PW'(rq_i.add);
    if (with_add > PW'(127))       y_o = 8'sd127;
    else if (with_add < -PW'(128)) y_o = -8'sd128;
    else                           y_o = with_add[7:0];
  end

endmodule
