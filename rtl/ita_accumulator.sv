// ita_accumulator: the partial-sum adders that follow the processing engines.
//
// For each of the N lanes the D-bit PE result is added to the partial sum read
// back from memory (all L tiles but the first) and, once the sum is complete
// (last L tile), to the lane's sign-extended 8-bit bias. Arithmetic wraps modulo
// 2^D. Purely combinational; the surrounding pipeline register sits in the PEs.
module ita_accumulator #(
  parameter int unsigned N = ita_pkg::N,
  parameter int unsigned D = ita_pkg::D
) (
  input  logic [N-1:0][D-1:0] dot_i,      // PE results
  input  logic [N-1:0][D-1:0] psum_i,     // partial sums from memory
  input  logic [N-1:0][7:0]   bias_i,     // int8 biases
  input  logic                use_psum_i, // 0 on the first L tile
  input  logic                add_bias_i, // 1 on the last L tile
  output logic [N-1:0][D-1:0] sum_o
);

  always_comb begin
    for (int unsigned n = 0; n < N; n++) begin
      sum_o[n] = dot_i[n]
               + (use_psum_i ? psum_i[n] : D'(0))
               + (add_bias_i ? D'(signed'(bias_i[n])) : D'(0));
    end
  end

endmodule
