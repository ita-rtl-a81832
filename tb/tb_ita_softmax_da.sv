// tb_ita_softmax_da: checks one Denominator Accumulation update (N=16).
//
// Builds random rows chunk by chunk, feeding back the returned maximum and
// sum as the buffers would, and compares every update with the rule
//   max' = max(max, x_n),  sum' = sat15((sum >> ((max'-max) >> 5)) + sum_n (128 >> ((max'-x_n) >> 5)))
// evaluated here. Rows start from (-128, 0); some rows have rising maxima so
// the stored sum is rescaled, and some saturate.
module tb_ita_softmax_da;

  import ita_pkg::*;
  localparam int unsigned NL = ita_pkg::N;

  int checks = 0, failures = 0;
  logic signed [7:0] max_i, max_o;
  logic [SUM_W-1:0] sum_i, sum_o;
  logic [NL-1:0][7:0] x;
  logic rescale, sat;
  logic clk = 1'b0;
  always #5 clk = !clk;

  ita_softmax_da dut (.max_i(max_i), .sum_i(sum_i), .x_i(x), .max_o(max_o), .sum_o(sum_o),
                      .rescale_o(rescale), .saturate_o(sat));

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int n_rescale, n_sat;

  initial begin
    int m, s, cm, t;
    for (int row = 0; row < 300; row++) begin
      m = -128; s = 0;
      for (int c = 0; c < 40; c++) begin
        for (int n = 0; n < NL; n++) begin
          if (row % 3 == 0) x[n] = 8'(int'($urandom_range(20)) + c * 6 - 128); // rising max
          else if (row % 3 == 1) x[n] = 8'(100);                              // saturates
          else x[n] = 8'($urandom);
        end
        max_i = 8'(m); sum_i = SUM_W'(s);
        #1;
        cm = m;
        for (int n = 0; n < NL; n++) if (int'($signed(x[n])) > cm) cm = int'($signed(x[n]));
        t = s >> ((cm - m) >> SM_SHIFT);
        for (int n = 0; n < NL; n++) t += SM_CONST >> ((cm - int'($signed(x[n]))) >> SM_SHIFT);
        if (((cm - m) >> SM_SHIFT) != 0) n_rescale++;
        if (t > 32767) begin t = 32767; n_sat++; end
        checks++;
        if (int'(max_o) != cm || int'(sum_o) != t) begin
          failures++;
          if (failures < 10) $display("row %0d chunk %0d: got (%0d,%0d) expected (%0d,%0d)",
                                      row, c, max_o, sum_o, cm, t);
        end
        m = cm; s = t;
        #1;
      end
    end
    checks++;
    if (n_rescale == 0 || n_sat == 0) begin failures++; $display("rescale/saturation not exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
