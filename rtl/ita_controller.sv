// ita_controller: loop-nest sequencer of ITA.
//
// Walks the tiled schedule of one operation and issues one input row per
// accepted cycle, each with a tag (ita_pkg::ita_tag_t) that tells the datapath
// what to do with it:
//
//   for i in [0, I/M)            temporal tiling over output rows
//     for j in [0, J/M)          temporal tiling over output columns
//       for p in [0, L/M)        output stationary: partial sums over L
//         for r in [0, M/N)      weight stationary: N columns per weight bank
//           for s in [0, M)      spatial input reuse: one input row per cycle
//
// In MODE_LINEAR this runs once with (J, L) = (tiles_j, tiles_l). In
// MODE_ATTENTION every i iteration runs Q x K^T with (J, L) = (S/M, P/M)
// = (tiles_j, tiles_l) and then A x V with the roles swapped,
// (J, L) = (tiles_l, tiles_j). Tags mark the first and last p (partial sum
// read, bias and requantisation), the last use of a weight bank (s = M-1),
// softmax clearing (first row of an i iteration), denominator accumulation
// (last p of Q x K^T), row completion (additionally last j and last r) and
// normalisation (A x V).
//
// Interface: `start_i` latches `cfg_i` when idle; `issue_valid_o` stays high
// while rows remain; a row is issued on issue_valid_o && issue_ready_i, and
// `busy_o` falls after the last one. The loop order is the published one; the
// counters, tag encoding and handshake are this design's.
module ita_controller #(
  parameter int unsigned N = ita_pkg::N,
  parameter int unsigned M = ita_pkg::M
) (
  input  logic              clk_i,
  input  logic              rst_ni,
  input  logic              start_i,
  input  ita_pkg::ita_cfg_t cfg_i,
  output ita_pkg::ita_cfg_t cfg_o,          // latched configuration
  output logic              busy_o,
  output logic              issue_valid_o,
  input  logic              issue_ready_i,
  output ita_pkg::ita_tag_t tag_o,
  output logic              last_o          // the issued row is the operation's last
);

  import ita_pkg::*;

  localparam int unsigned R = M / N;

  ita_cfg_t   cfg_q;
  ita_phase_e phase_q;
  logic       busy_q;
  logic [7:0] s_q, r_q, p_q, j_q, i_q;
  logic [7:0] j_cnt, l_cnt;
  logic       s_end, r_end, p_end, j_end, i_end;
  logic       fire;

  always_comb begin
    if (phase_q == PH_AV) begin
      j_cnt = cfg_q.tiles_l;
      l_cnt = cfg_q.tiles_j;
    end else begin
      j_cnt = cfg_q.tiles_j;
      l_cnt = cfg_q.tiles_l;
    end
  end

  assign s_end = (s_q == 8'(M - 1));
  assign r_end = (r_q == 8'(R - 1));
  assign p_end = (p_q == l_cnt - 8'd1);
  assign j_end = (j_q == j_cnt - 8'd1);
  assign i_end = (i_q == cfg_q.tiles_i - 8'd1);

  assign busy_o        = busy_q;
  assign cfg_o         = cfg_q;
  assign issue_valid_o = busy_q;
  assign fire          = busy_q && issue_ready_i;
  assign last_o        = s_end && r_end && p_end && j_end && i_end && (phase_q != PH_QK);

  always_comb begin
    tag_o          = '0;
    tag_o.phase    = phase_q;
    tag_o.s        = s_q;
    tag_o.p_first  = (p_q == 8'd0);
    tag_o.p_last   = p_end;
    tag_o.w_last   = s_end;
    tag_o.sm_clear = (phase_q == PH_QK) && (j_q == 8'd0) && (p_q == 8'd0) && (r_q == 8'd0)
                     && (s_q == 8'd0);
    tag_o.da_en    = (phase_q == PH_QK) && p_end;
    tag_o.row_done = (phase_q == PH_QK) && p_end && j_end && r_end;
    tag_o.en_en    = (phase_q == PH_AV);
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      cfg_q   <= '0;
      phase_q <= PH_LINEAR;
      busy_q  <= 1'b0;
      {s_q, r_q, p_q, j_q, i_q} <= '0;
    end else if (!busy_q) begin
      if (start_i) begin
        cfg_q   <= cfg_i;
        phase_q <= (cfg_i.mode == MODE_ATTENTION) ? PH_QK : PH_LINEAR;
        busy_q  <= 1'b1;
        {s_q, r_q, p_q, j_q, i_q} <= '0;
      end
    end else if (fire) begin
      s_q <= s_end ? 8'd0 : s_q + 8'd1;
      if (s_end) begin
        r_q <= r_end ? 8'd0 : r_q + 8'd1;
        if (r_end) begin
          p_q <= p_end ? 8'd0 : p_q + 8'd1;
          if (p_end) begin
            j_q <= j_end ? 8'd0 : j_q + 8'd1;
            if (j_end) begin
              unique case (phase_q)
                PH_QK: phase_q <= PH_AV;
                PH_AV: begin
                  phase_q <= PH_QK;
                  i_q     <= i_q + 8'd1;
                  if (i_end) busy_q <= 1'b0;
                end
                default: begin
                  i_q <= i_q + 8'd1;
                  if (i_end) busy_q <= 1'b0;
                end
              endcase
            end
          end
        end
      end
    end
  end

  // The array must split a tile into whole weight banks.
  initial assert (M % N == 0) else $fatal(1, "M must be a multiple of N");

endmodule
