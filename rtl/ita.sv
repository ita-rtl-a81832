// ita: Integer Transformer Accelerator, top level.
//
// N processing engines each take the dot product of the same M-byte input row
// with their own M-byte weight vector (weight stationary, input shared). The
// D-bit results are added to partial sums from memory over the L dimension;
// on the last L tile a bias is added, the sums are requantised to int8 and
// leave through the output FIFO. For attention, the requantised Q x K^T
// scores also feed the softmax (denominator accumulation and inversion), and
// when the same scores come back as the input of A x V they are normalised to
// probabilities by the softmax before they reach the PEs (input multiplexer).
//
// Pipeline, two stages:
//   issue  : controller tag + input row (or its normalised version) + weight
//            bank -> PEs, registered in the PEs.
//   result : + partial sum + bias -> partial-sum port, or -> requantisation
//            -> output FIFO and softmax DA.
// The whole pipeline advances together: it holds while the result stage waits
// for a partial sum, a bias, the partial-sum sink or FIFO space; the issue
// stage additionally waits for an input row, a full weight bank and, in A x V,
// the row's inverted softmax denominator.
//
// Ports (all streams valid/ready, a beat moves when both are high):
//   in_*   M x int8 input row (X, Q, or A for A x V), in loop-nest order
//   w_*    N x int8 weight beat (byte k of the N weight vectors of a bank)
//   b_*    N x int8 biases, taken with every row of the last L tile
//   psi_*  N x D-bit partial sums, taken with every row except of the first L tile
//   pso_*  N x D-bit partial sums, produced with every row except of the last L tile
//   out_*  N x int8 results (requantised outputs; for attention: A, then A x V)
// `start_i` with `cfg_i` begins an operation; `done_o` pulses when the last
// result has left the output FIFO. The stream order, handshakes and the
// configuration record are this design's; the datapath is the published one.
module ita #(
  parameter int unsigned N          = ita_pkg::N,
  parameter int unsigned M          = ita_pkg::M,
  parameter int unsigned D          = ita_pkg::D,
  parameter int unsigned FIFO_DEPTH = 4
) (
  input  logic                clk_i,
  input  logic                rst_ni,
  input  logic                start_i,
  input  ita_pkg::ita_cfg_t   cfg_i,
  output logic                busy_o,
  output logic                done_o,
  // input rows
  input  logic                in_valid_i,
  output logic                in_ready_o,
  input  logic [M-1:0][7:0]   in_data_i,
  // weights
  input  logic                w_valid_i,
  output logic                w_ready_o,
  input  logic [N-1:0][7:0]   w_data_i,
  // biases
  input  logic                b_valid_i,
  output logic                b_ready_o,
  input  logic [N-1:0][7:0]   b_data_i,
  // partial sums in
  input  logic                psi_valid_i,
  output logic                psi_ready_o,
  input  logic [N-1:0][D-1:0] psi_data_i,
  // partial sums out
  output logic                pso_valid_o,
  input  logic                pso_ready_i,
  output logic [N-1:0][D-1:0] pso_data_o,
  // outputs
  output logic                out_valid_o,
  input  logic                out_ready_i,
  output logic [N-1:0][7:0]   out_data_o
);

  import ita_pkg::*;

  // ---------------- controller ----------------
  ita_cfg_t cfg;
  ita_tag_t tag;
  logic     ctrl_busy, issue_valid, issue_last;
  logic     fire, adv;

  ita_controller #(.N(N), .M(M)) u_ctrl (
    .clk_i         (clk_i),
    .rst_ni        (rst_ni),
    .start_i       (start_i),
    .cfg_i         (cfg_i),
    .cfg_o         (cfg),
    .busy_o        (ctrl_busy),
    .issue_valid_o (issue_valid),
    .issue_ready_i (fire),
    .tag_o         (tag),
    .last_o        (issue_last)
  );

  // ---------------- weight buffer ----------------
  logic                     wb_valid;
  logic [N-1:0][M-1:0][7:0] wb_data;

  ita_weight_buffer #(.N(N), .M(M)) u_wbuf (
    .clk_i        (clk_i),
    .rst_ni       (rst_ni),
    .clear_i      (start_i && !ctrl_busy),
    .wr_valid_i   (w_valid_i),
    .wr_ready_o   (w_ready_o),
    .wr_data_i    (w_data_i),
    .rd_valid_o   (wb_valid),
    .rd_data_o    (wb_data),
    .rd_release_i (fire && tag.w_last)
  );

  // ---------------- softmax ----------------
  logic [M-1:0][7:0] en_p;
  logic              en_ready;
  logic              sm_idle, sm_rescale, sm_saturate;
  logic              da_valid;
  logic [N-1:0][7:0] rq_out;

  // result-stage tag, declared here because the softmax DA uses it
  logic     s1_valid_q;
  ita_tag_t s1_tag_q;
  logic     s2_fire;

  assign da_valid = s2_fire && s1_tag_q.da_en;

  ita_softmax #(.N(N), .M(M)) u_softmax (
    .clk_i         (clk_i),
    .rst_ni        (rst_ni),
    .clear_i       (fire && tag.sm_clear),
    .da_valid_i    (da_valid),
    .da_row_i      (s1_tag_q.s),
    .da_x_i        (rq_out),
    .da_row_done_i (s1_tag_q.row_done),
    .en_row_i      (tag.s),
    .en_a_i        (in_data_i),
    .en_p_o        (en_p),
    .en_ready_o    (en_ready),
    .di_idle_o     (sm_idle),
    .rescale_o     (sm_rescale),
    .saturate_o    (sm_saturate)
  );

  // ---------------- issue stage ----------------
  logic [M-1:0][7:0] pe_in;

  // Input multiplexer: raw input, or normalised attention for A x V.
  assign pe_in = tag.en_en ? en_p : in_data_i;

  assign fire       = adv && issue_valid && in_valid_i && wb_valid && (!tag.en_en || en_ready);
  assign in_ready_o = fire;

  logic [N-1:0][D-1:0] dot;

  for (genvar n = 0; n < N; n++) begin : g_pe
    ita_dot_product #(.M(M), .D(D)) u_pe (
      .clk_i  (clk_i),
      .rst_ni (rst_ni),
      .en_i   (fire),
      .a_i    (pe_in),
      .w_i    (wb_data[n]),
      .dot_o  (dot[n])
    );
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      s1_valid_q <= 1'b0;
      s1_tag_q   <= '0;
    end else if (adv) begin
      s1_valid_q <= fire;
      if (fire) s1_tag_q <= tag;
    end
  end

  // ---------------- result stage ----------------
  logic                need_psum, need_bias, have_in;
  logic                fifo_ready;
  logic [N-1:0][D-1:0] acc;
  ita_rq_t             rq;

  assign need_psum = !s1_tag_q.p_first;
  assign need_bias = s1_tag_q.p_last;
  assign have_in   = (!need_psum || psi_valid_i) && (!need_bias || b_valid_i);
  assign adv       = !s1_valid_q || (have_in && (s1_tag_q.p_last ? fifo_ready : pso_ready_i));
  assign s2_fire   = s1_valid_q && adv;

  assign psi_ready_o = s2_fire && need_psum;
  assign b_ready_o   = s2_fire && need_bias;

  ita_accumulator #(.N(N), .D(D)) u_acc (
    .dot_i      (dot),
    .psum_i     (psi_data_i),
    .bias_i     (b_data_i),
    .use_psum_i (need_psum),
    .add_bias_i (need_bias),
    .sum_o      (acc)
  );

  assign pso_valid_o = s1_valid_q && !s1_tag_q.p_last && have_in;
  assign pso_data_o  = acc;

  assign rq = (s1_tag_q.phase == PH_AV) ? cfg.rq_av : cfg.rq_main;

  for (genvar n = 0; n < N; n++) begin : g_rq
    ita_requant #(.D(D)) u_rq (
      .x_i  (acc[n]),
      .rq_i (rq),
      .y_o  (rq_out[n])
    );
  end

  ita_output_fifo #(.WIDTH(N * 8), .DEPTH(FIFO_DEPTH)) u_fifo (
    .clk_i        (clk_i),
    .rst_ni       (rst_ni),
    .push_valid_i (s1_valid_q && s1_tag_q.p_last && have_in),
    .push_ready_o (fifo_ready),
    .push_data_i  (rq_out),
    .pop_valid_o  (out_valid_o),
    .pop_ready_i  (out_ready_i),
    .pop_data_o   (out_data_o)
  );

  // ---------------- completion ----------------
  logic busy_q;

  assign busy_o = ctrl_busy || s1_valid_q || out_valid_o;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) busy_q <= 1'b0;
    else         busy_q <= busy_o;
  end

  assign done_o = busy_q && !busy_o;

  // Stream rules: a valid beat on an output stream stays until taken.
  assert property (@(posedge clk_i) disable iff (!rst_ni)
                   pso_valid_o && !pso_ready_i |=> pso_valid_o && $stable(pso_data_o))
    else $error("partial-sum output withdrawn");
  assert property (@(posedge clk_i) disable iff (!rst_ni)
                   out_valid_o && !out_ready_i |=> out_valid_o && $stable(out_data_o))
    else $error("output withdrawn");

endmodule
