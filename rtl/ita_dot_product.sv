// ita_dot_product: one processing engine (PE) of ITA.
//
// Multiplies M signed 8-bit activations with M signed 8-bit weights and reduces
// the products with an adder tree into a signed D-bit sum, as in the dot-product
// unit of the architecture (M multipliers feeding one wide adder). The result is
// held in an output register that loads when `en` is high, so the unit has one
// cycle of latency and accepts a new pair of vectors every cycle.
// The register and its enable are this design's pipelining choice; the result
// wraps modulo 2^D (D=24 is enough for 256-element dot products of int8 values).
module ita_dot_product #(
  parameter int unsigned M = ita_pkg::M,
  parameter int unsigned D = ita_pkg::D
) (
  input  logic                clk_i,
  input  logic                rst_ni,
  input  logic                en_i,                 // load the register
  input  logic [M-1:0][7:0]   a_i,                  // activations (int8)
  input  logic [M-1:0][7:0]   w_i,                  // weights (int8)
  output logic signed [D-1:0] dot_o                 // registered dot product
);

  logic signed [D-1:0] sum;

  always_comb begin
    sum = '0;
    for (int unsigned k = 0; k < M; k++) begin
      sum += D'($signed(a_i[k]) * $signed(w_i[k]));
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni)   dot_o <= '0;
    else if (en_i) dot_o <= sum;
  end

endmodule
