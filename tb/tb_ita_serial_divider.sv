// tb_ita_serial_divider: checks the 16-bit serial divider.
//
// Random dividends and divisors (including the softmax case 2^14 / sum and
// division by zero) are compared with integer division, and the latency from
// start to done is checked to be W = 16 cycles plus the registered done. The
// operands are changed and start is raised again while the divider is busy;
// that second start must be ignored.
module tb_ita_serial_divider;

  localparam int unsigned W = ita_pkg::INV_W;

  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0, start, busy, done;
  logic [W-1:0] dividend, divisor, q;
  always #5 clk = !clk;

  ita_serial_divider dut (.clk_i(clk), .rst_ni(rst_n), .start_i(start), .dividend_i(dividend),
                          .divisor_i(divisor), .busy_o(busy), .done_o(done), .quotient_o(q));

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int lat;
    longint dd, dv, e;
    start = 0; dividend = '0; divisor = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 1000; t++) begin
      @(negedge clk);
      case (t % 4)
        0: begin dividend = W'(ita_pkg::SM_DIVIDEND); divisor = W'($urandom_range(32767, 1)); end
        1: begin dividend = W'($urandom); divisor = W'($urandom_range(255, 1)); end
        2: begin dividend = W'($urandom); divisor = W'($urandom); end
        default: begin dividend = W'($urandom); divisor = (t % 40 == 3) ? '0 : W'($urandom_range(9, 1)); end
      endcase
      dd = longint'(dividend); dv = longint'(divisor);
      start = 1;
      @(negedge clk);
      // new operands and start while busy: must be ignored
      dividend = '1; divisor = W'(1);
      lat = 1;
      @(negedge clk);
      start = 0;
      lat++;
      while (!done && lat < 100) begin @(negedge clk); lat++; end
      e = (dv == 0) ? longint'((1 << W) - 1) : dd / dv;
      checks++;
      if (longint'(q) != e) begin
        failures++;
        if (failures < 10) $display("%0d / %0d: got %0d expected %0d", dd, dv, q, e);
      end
      checks++;
      if (lat != W + 1) begin
        failures++;
        if (failures < 10) $display("latency %0d, expected %0d", lat, W + 1);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
