// tb_ita_dot_product: checks one processing engine at its default size (M=64, D=24).
//
// Drives random and extreme int8 vectors, compares the registered result one
// cycle later with an integer dot product computed here, and checks that the
// output register holds its value while the enable is low.
module tb_ita_dot_product;

  localparam int unsigned M = ita_pkg::M;
  localparam int unsigned D = ita_pkg::D;

  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0, en;
  logic [M-1:0][7:0] a, w;
  logic signed [D-1:0] dot;
  always #5 clk = !clk;

  ita_dot_product dut (.clk_i(clk), .rst_ni(rst_n), .en_i(en), .a_i(a), .w_i(w), .dot_o(dot));

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int ref_dot();
    int s = 0;
    for (int k = 0; k < M; k++) s += int'($signed(a[k])) * int'($signed(w[k]));
    return s;
  endfunction

  initial begin
    int exp_v, held;
    en = 0; a = '0; w = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 300; t++) begin
      @(negedge clk);
      for (int k = 0; k < M; k++) begin
        case (t)
          0: begin a[k] = 8'h80; w[k] = 8'h80; end   // all -128 * -128
          1: begin a[k] = 8'h80; w[k] = 8'h7f; end   // all -128 * 127
          default: begin a[k] = 8'($urandom); w[k] = 8'($urandom); end
        endcase
      end
      en = 1;
      exp_v = ref_dot();
      @(negedge clk);
      checks++;
      if (int'(dot) != exp_v) begin
        failures++;
        $display("t=%0d got %0d expected %0d", t, dot, exp_v);
      end
      // hold: change inputs with enable low, output must not move
      held = int'(dot);
      en = 0;
      for (int k = 0; k < M; k++) a[k] = 8'($urandom);
      @(negedge clk);
      checks++;
      if (int'(dot) != held) begin
        failures++; $display("output changed while enable low");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
