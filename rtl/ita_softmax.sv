// ita_softmax: streaming integer softmax of ITA (DA, DI and EN around two row buffers).
//
// The attention matrix is produced tile by tile, not row by row, so the
// softmax of a row is built up over many cycles in three overlapping steps:
//  * DA (Denominator Accumulation): each requantised Q x K^T output chunk of N
//    elements of row s updates MAX[s] and the running denominator SUM[s]
//    (ita_softmax_da). One chunk per cycle, each cycle a different row.
//  * DI (Denominator Inversion): once the last chunk of a row has been
//    accumulated (`da_row_done_i`), the row is queued for one of two serial
//    dividers, which write SM_DIVIDEND / SUM[s] back into the same SUM entry.
//  * EN (Element Normalisation): during A x V, the M scores of row s entering
//    the PEs are turned into probabilities with MAX[s] and the inverse
//    (ita_softmax_en). `en_ready_o` says that row's inverse is available; the
//    accelerator stalls on it otherwise.
// MAX and SUM hold M entries, one per row of a tile. `clear_i` (start of a new
// i iteration) resets MAX to -128, SUM to 0 and all row flags.
//
// Timing: DA reads the buffers combinationally and writes them at the clock
// edge; EN is combinational from the buffers; an inverse is usable 17 cycles
// after its row was completed if a divider is free. The buffers are flip-flops
// (clock-gated latches in the evaluated chip). The queueing of rows to the two
// dividers (lowest pending row first) is this design's choice.
module ita_softmax #(
  parameter int unsigned N = ita_pkg::N,
  parameter int unsigned M = ita_pkg::M
) (
  input  logic                 clk_i,
  input  logic                 rst_ni,
  input  logic                 clear_i,
  // DA: one chunk of a Q x K^T output row per cycle
  input  logic                 da_valid_i,
  input  logic [7:0]           da_row_i,
  input  logic [N-1:0][7:0]    da_x_i,
  input  logic                 da_row_done_i,
  // EN: one row of A entering the PEs
  input  logic [7:0]           en_row_i,
  input  logic [M-1:0][7:0]    en_a_i,
  output logic [M-1:0][7:0]    en_p_o,
  output logic                 en_ready_o,
  // status and events
  output logic                 di_idle_o,     // no row waiting for or in a divider
  output logic                 rescale_o,     // DA shifted a stored sum this cycle
  output logic                 saturate_o     // DA saturated a sum this cycle
);

  import ita_pkg::*;

  localparam int unsigned RW = (M > 1) ? $clog2(M) : 1;

  logic signed [M-1:0][7:0]       max_q;
  logic        [M-1:0][INV_W-1:0] sum_q;
  logic        [M-1:0]            pending_q;   // accumulated, waiting for a divider
  logic        [M-1:0]            inv_ok_q;    // inverse stored

  // ---------------- DA ----------------
  logic [RW-1:0]      da_row;
  logic signed [7:0]  da_max_new;
  logic [SUM_W-1:0]   da_sum_new;
  logic               da_rescale, da_sat;

  assign da_row = da_row_i[RW-1:0];

  ita_softmax_da #(.N(N)) u_da (
    .max_i      (max_q[da_row]),
    .sum_i      (sum_q[da_row][SUM_W-1:0]),
    .x_i        (da_x_i),
    .max_o      (da_max_new),
    .sum_o      (da_sum_new),
    .rescale_o  (da_rescale),
    .saturate_o (da_sat)
  );

  assign rescale_o  = da_valid_i && da_rescale;
  assign saturate_o = da_valid_i && da_sat;

  // ---------------- DI ----------------
  logic [1:0]           div_start, div_busy, div_done;
  logic [1:0][RW-1:0]   div_row_q, pick;
  logic [1:0]           pick_ok;
  logic [1:0][INV_W-1:0] div_quot;

  // Divider 0 takes the lowest pending row, divider 1 the next one.
  always_comb begin
    pick    = '0;
    pick_ok = '0;
    for (int unsigned r = 0; r < M; r++) begin
      if (pending_q[r]) begin
        if (!pick_ok[0]) begin
          pick[0]    = RW'(r);
          pick_ok[0] = 1'b1;
        end else if (!pick_ok[1]) begin
          pick[1]    = RW'(r);
          pick_ok[1] = 1'b1;
        end
      end
    end
    div_start[0] = !clear_i && !div_busy[0] && pick_ok[0];
    // if divider 0 is busy, divider 1 may take the lowest pending row
    div_start[1] = !clear_i && !div_busy[1] && (div_busy[0] ? pick_ok[0] : pick_ok[1]);
  end

  logic [1:0][RW-1:0] start_row;
  assign start_row[0] = pick[0];
  assign start_row[1] = div_busy[0] ? pick[0] : pick[1];

  for (genvar d = 0; d < 2; d++) begin : g_div
    ita_serial_divider #(.W(INV_W)) u_div (
      .clk_i      (clk_i),
      .rst_ni     (rst_ni),
      .start_i    (div_start[d]),
      .dividend_i (INV_W'(SM_DIVIDEND)),
      .divisor_i  (sum_q[start_row[d]]),
      .busy_o     (div_busy[d]),
      .done_o     (div_done[d]),
      .quotient_o (div_quot[d])
    );
  end

  assign di_idle_o = (pending_q == '0) && (div_busy == '0) && (div_done == '0);

  // ---------------- buffers ----------------
  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      max_q     <= '{default: 8'sh80};
      sum_q     <= '0;
      pending_q <= '0;
      inv_ok_q  <= '0;
      div_row_q <= '0;
    end else if (clear_i) begin
      max_q     <= '{default: 8'sh80};
      sum_q     <= '0;
      pending_q <= '0;
      inv_ok_q  <= '0;
    end else begin
      if (da_valid_i) begin
        max_q[da_row] <= da_max_new;
        sum_q[da_row] <= INV_W'(da_sum_new);
        if (da_row_done_i) pending_q[da_row] <= 1'b1;
      end
      for (int unsigned d = 0; d < 2; d++) begin
        if (div_start[d]) begin
          pending_q[start_row[d]] <= 1'b0;
          div_row_q[d]            <= start_row[d];
        end
        if (div_done[d]) begin
          sum_q[div_row_q[d]]    <= div_quot[d];
          inv_ok_q[div_row_q[d]] <= 1'b1;
        end
      end
    end
  end

  // ---------------- EN ----------------
  logic [RW-1:0] en_row;
  assign en_row     = en_row_i[RW-1:0];
  assign en_ready_o = inv_ok_q[en_row];

  ita_softmax_en #(.M(M)) u_en (
    .max_i (max_q[en_row]),
    .inv_i (sum_q[en_row]),
    .a_i   (en_a_i),
    .p_o   (en_p_o)
  );

  // A row must not be accumulated again once it has been handed to DI.
  assert property (@(posedge clk_i) disable iff (!rst_ni || clear_i)
                   da_valid_i |-> !inv_ok_q[da_row] && !pending_q[da_row])
    else $error("softmax row updated after completion");

endmodule
