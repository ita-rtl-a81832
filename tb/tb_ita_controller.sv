// tb_ita_controller: checks the loop-nest sequencer (N=16, M=64).
//
// For a linear layer and for a fused attention operation, every issued tag is
// compared with the tag expected from a nested loop written here
// (i, [phase], j, p, r, s), with the issue handshake stalled at random. Also
// checks the number of issued rows, that busy falls after the last one and
// that `last_o` marks exactly that row.
module tb_ita_controller;

  import ita_pkg::*;
  localparam int unsigned N = ita_pkg::N;
  localparam int unsigned M = ita_pkg::M;
  localparam int unsigned R = M / N;

  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0, start, busy, ivalid, iready, last;
  ita_cfg_t cfg, cfg_o;
  ita_tag_t tag;
  always #5 clk = !clk;

  ita_controller dut (.clk_i(clk), .rst_ni(rst_n), .start_i(start), .cfg_i(cfg), .cfg_o(cfg_o),
                      .busy_o(busy), .issue_valid_o(ivalid), .issue_ready_i(iready), .tag_o(tag),
                      .last_o(last));

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  ita_tag_t exp_q[$];

  task automatic gen(ita_phase_e ph, int tj, int tl, int i);
    ita_tag_t t;
    for (int j = 0; j < tj; j++)
      for (int p = 0; p < tl; p++)
        for (int r = 0; r < R; r++)
          for (int s = 0; s < M; s++) begin
            t = '0;
            t.phase = ph; t.s = 8'(s);
            t.p_first = (p == 0); t.p_last = (p == tl - 1); t.w_last = (s == M - 1);
            t.sm_clear = (ph == PH_QK) && j == 0 && p == 0 && r == 0 && s == 0;
            t.da_en = (ph == PH_QK) && p == tl - 1;
            t.row_done = t.da_en && j == tj - 1 && r == R - 1;
            t.en_en = (ph == PH_AV);
            exp_q.push_back(t);
          end
  endtask

  task automatic run(ita_mode_e mode, int ti, int tj, int tl);
    int k, n;
    exp_q.delete();
    for (int i = 0; i < ti; i++)
      if (mode == MODE_LINEAR) gen(PH_LINEAR, tj, tl, i);
      else begin gen(PH_QK, tj, tl, i); gen(PH_AV, tl, tj, i); end
    cfg = '0; cfg.mode = mode; cfg.tiles_i = 8'(ti); cfg.tiles_j = 8'(tj); cfg.tiles_l = 8'(tl);
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    k = 0; n = 0;
    while (busy && n < 100000) begin
      iready = ($urandom_range(99) < 70);
      #1;
      if (ivalid && iready) begin
        checks++;
        if (k >= exp_q.size() || tag != exp_q[k] || last != (k == exp_q.size() - 1)) begin
          failures++;
          if (failures < 10) $display("row %0d: tag %h expected %h last %0b", k, tag,
                                      (k < exp_q.size()) ? exp_q[k] : '0, last);
        end
        k++;
      end
      @(negedge clk); n++;
    end
    iready = 0;
    checks++;
    if (k != exp_q.size()) begin failures++; $display("issued %0d rows, expected %0d", k, exp_q.size()); end
  endtask

  initial begin
    start = 0; iready = 0; cfg = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    run(MODE_LINEAR, 2, 3, 2);
    run(MODE_ATTENTION, 2, 3, 2);
    run(MODE_LINEAR, 1, 1, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
