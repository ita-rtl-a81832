// tb_ita_requant: checks the requantisation of D-bit sums to int8.
//
// Random and boundary sums with random scale, shift and offset are compared
// with y = clip(((x * mult) + 2^(shift-1)) >> shift + add, -128, 127)
// computed here in 64-bit integers.
module tb_ita_requant;

  import ita_pkg::*;
  localparam int unsigned D = ita_pkg::D;

  int checks = 0, failures = 0;
  logic signed [D-1:0] x;
  ita_rq_t rq;
  logic signed [7:0] y;
  logic clk = 1'b0;
  always #5 clk = !clk;

  ita_requant dut (.x_i(x), .rq_i(rq), .y_o(y));

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int ref_rq(longint xv, int mult, int shift, int add);
    longint v = xv * mult;
    if (shift > 0) v += (64'sd1 <<< (shift - 1));
    v = v >>> shift;
    v += add;
    if (v > 127) return 127;
    if (v < -128) return -128;
    return int'(v);
  endfunction

  int n_clip_hi, n_clip_lo;

  initial begin
    int e;
    for (int t = 0; t < 5000; t++) begin
      case (t % 5)
        0: x = D'(signed'(-(1 <<< (D - 1))));
        1: x = D'((1 <<< (D - 1)) - 1);
        2: x = D'(int'($urandom_range(1000)) - 500);
        default: x = D'($urandom);
      endcase
      rq.mult  = 8'($urandom);
      rq.shift = 5'($urandom_range(24));
      rq.add   = 8'($urandom);
      #1;
      e = ref_rq(longint'(x), int'(rq.mult), int'(rq.shift), int'(rq.add));
      checks++;
      if (int'(y) != e) begin
        failures++;
        if (failures < 10) $display("x=%0d mult=%0d shift=%0d add=%0d: got %0d expected %0d",
                                    x, rq.mult, rq.shift, rq.add, y, e);
      end
      if (e == 127) n_clip_hi++;
      if (e == -128) n_clip_lo++;
      #1;
    end
    checks++;
    if (n_clip_hi == 0 || n_clip_lo == 0) begin
      failures++; $display("clipping not exercised");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
