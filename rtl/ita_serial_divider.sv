// ita_serial_divider: bit-serial unsigned divider for Denominator Inversion (DI).
//
// Restoring long division producing one quotient bit per cycle: a W-bit
// division takes W cycles after `start_i`. `done_o` pulses for one cycle with
// the quotient on `quotient_o`, which then holds until the next start. A start
// while busy is ignored. Division by zero returns all ones. The softmax uses
// two of these to turn each row's 15-bit denominator into a 16-bit inverse
// while the attention scores of later rows are still being accumulated; the
// restoring algorithm is this design's choice, the architecture only says the
// dividers are serial.
module ita_serial_divider #(
  parameter int unsigned W = ita_pkg::INV_W
) (
  input  logic         clk_i,
  input  logic         rst_ni,
  input  logic         start_i,
  input  logic [W-1:0] dividend_i,
  input  logic [W-1:0] divisor_i,
  output logic         busy_o,
  output logic         done_o,
  output logic [W-1:0] quotient_o
);

  localparam int unsigned CW = $clog2(W + 1);

  logic [W:0]    rem_q;
  logic [W-1:0]  quo_q, div_q;
  logic [CW-1:0] cnt_q;
  logic [W:0]    rem_shift;
  logic          take;

  assign busy_o     = (cnt_q != '0);
  assign quotient_o = quo_q;
  assign rem_shift  = {rem_q[W-1:0], quo_q[W-1]};
  assign take       = (rem_shift >= {1'b0, div_q});

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      rem_q  <= '0;
      quo_q  <= '0;
      div_q  <= '0;
      cnt_q  <= '0;
      done_o <= 1'b0;
    end else begin
      done_o <= 1'b0;
      if (!busy_o && start_i) begin
        rem_q <= '0;
        quo_q <= dividend_i;    // dividend bits are shifted out as quotient bits come in
        div_q <= divisor_i;
        cnt_q <= CW'(W);
      end else if (busy_o) begin
        rem_q  <= take ? rem_shift - {1'b0, div_q} : rem_shift;
        quo_q  <= {quo_q[W-2:0], take};
        cnt_q  <= cnt_q - 1'b1;
        done_o <= (cnt_q == CW'(1));
      end
    end
  end

endmodule
