// tb_ita_softmax_en: checks Element Normalisation over M=64 lanes.
//
// For random row maxima, inverses and scores not above the maximum, compares
// each lane with min(127, inv >> ((max - a) >> 5)) computed here.
module tb_ita_softmax_en;

  import ita_pkg::*;
  localparam int unsigned ML = ita_pkg::M;

  int checks = 0, failures = 0;
  logic signed [7:0] mx;
  logic [INV_W-1:0] inv;
  logic [ML-1:0][7:0] a, p;
  logic clk = 1'b0;
  always #5 clk = !clk;

  ita_softmax_en dut (.max_i(mx), .inv_i(inv), .a_i(a), .p_o(p));

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int e, m;
    for (int t = 0; t < 1000; t++) begin
      m = int'($urandom_range(255)) - 128;
      mx = 8'(m);
      inv = (t % 2 == 0) ? INV_W'($urandom_range(128)) : INV_W'($urandom_range(1000));
      for (int k = 0; k < ML; k++) a[k] = 8'(m - int'($urandom_range(m + 128)));
      #1;
      for (int k = 0; k < ML; k++) begin
        e = int'(inv) >> ((m - int'($signed(a[k]))) >> SM_SHIFT);
        if (e > 127) e = 127;
        checks++;
        if (int'(p[k]) != e) begin
          failures++;
          if (failures < 10) $display("max %0d inv %0d a %0d: got %0d expected %0d", m, inv, $signed(a[k]), p[k], e);
        end
      end
      #1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
