// tb_ita_accumulator: checks the N partial-sum adders (N=16, D=24).
//
// For random PE results, partial sums and biases, and all four combinations
// of "use partial sum" and "add bias", compares each lane with the sum
// computed here modulo 2^D.
module tb_ita_accumulator;

  localparam int unsigned N = ita_pkg::N;
  localparam int unsigned D = ita_pkg::D;

  int checks = 0, failures = 0;
  logic [N-1:0][D-1:0] dot, psum, sum;
  logic [N-1:0][7:0] bias;
  logic use_psum, add_bias;
  logic clk = 1'b0;
  always #5 clk = !clk;

  ita_accumulator dut (.dot_i(dot), .psum_i(psum), .bias_i(bias), .use_psum_i(use_psum),
                       .add_bias_i(add_bias), .sum_o(sum));

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint e;
    for (int t = 0; t < 2000; t++) begin
      for (int n = 0; n < N; n++) begin
        dot[n] = D'($urandom); psum[n] = D'($urandom); bias[n] = 8'($urandom);
      end
      use_psum = t[0]; add_bias = t[1];
      #1;
      for (int n = 0; n < N; n++) begin
        e = longint'(signed'(dot[n]));
        if (use_psum) e += longint'(signed'(psum[n]));
        if (add_bias) e += longint'(signed'(bias[n]));
        checks++;
        if (sum[n] != D'(e)) begin
          failures++;
          if (failures < 10) $display("lane %0d: got %h expected %h", n, sum[n], D'(e));
        end
      end
      #1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
