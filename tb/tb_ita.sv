// tb_ita: end-to-end test of the ITA top level at its default size (N=16, M=64, D=24).
//
// The testbench plays the memory system: it streams input rows, weight beats,
// biases and partial sums in the order of the controller's loop nest, stores
// the partial sums the accelerator writes back, and collects the outputs.
// Expected results come from a plain integer model written here (matrix
// products, requantisation, and the shift-based softmax applied chunk by
// chunk in the accelerator's accumulation order).
//
// Runs, in order:
//   1. linear layer, I=128, L=128, J=64, all streams always ready: checks the
//      results and that one input row is consumed per cycle (throughput).
//   2. the same layer with random gaps on every input stream and random
//      back-pressure on both output streams.
//   3. fused attention, S=128, P=64 (Q x K^T, softmax, A x V) with gaps and
//      back-pressure: checks the attention matrix A and the output A x V.
//   4. linear layer with L=256 and every operand -128: the largest dot product
//      the 24-bit accumulator is meant to hold.
//   5. fused attention, S=256, P=64 (one head of a compact transformer with
//      256 tokens), all streams always ready; reports the cycle count.
// It counts how often each mechanism occurred (weight starvation, double
// buffering overlap, output FIFO full, partial-sum back-pressure, softmax
// stall on the inverse, maximum rescaling, requantisation clipping, softmax
// clearing, partial-sum reuse) and counts a failure for any that never did.
module tb_ita;

  import ita_pkg::*;

  localparam int unsigned TN = ita_pkg::N;
  localparam int unsigned TM = ita_pkg::M;
  localparam int unsigned TD = ita_pkg::D;
  localparam int unsigned R  = TM / TN;
  localparam int MAXDIM = 256;

  int checks = 0, failures = 0;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = !clk;

  // DUT signals
  logic start; ita_cfg_t cfg; logic busy, done;
  logic in_valid, in_ready; logic [TM-1:0][7:0] in_data;
  logic w_valid, w_ready;   logic [TN-1:0][7:0] w_data;
  logic b_valid, b_ready;   logic [TN-1:0][7:0] b_data;
  logic psi_valid, psi_ready; logic [TN-1:0][TD-1:0] psi_data;
  logic pso_valid, pso_ready; logic [TN-1:0][TD-1:0] pso_data;
  logic out_valid, out_ready; logic [TN-1:0][7:0] out_data;

  ita dut (
    .clk_i(clk), .rst_ni(rst_n), .start_i(start), .cfg_i(cfg), .busy_o(busy), .done_o(done),
    .in_valid_i(in_valid), .in_ready_o(in_ready), .in_data_i(in_data),
    .w_valid_i(w_valid), .w_ready_o(w_ready), .w_data_i(w_data),
    .b_valid_i(b_valid), .b_ready_o(b_ready), .b_data_i(b_data),
    .psi_valid_i(psi_valid), .psi_ready_o(psi_ready), .psi_data_i(psi_data),
    .pso_valid_o(pso_valid), .pso_ready_i(pso_ready), .pso_data_o(pso_data),
    .out_valid_o(out_valid), .out_ready_i(out_ready), .out_data_o(out_data)
  );

  // ---------------- matrices (integer model) ----------------
  int X [MAXDIM][MAXDIM];   // input / Q
  int W [MAXDIM][MAXDIM];   // weight (L x J) / K^T / V
  int Kt[MAXDIM][MAXDIM];   // K^T for attention (P x S)
  int V [MAXDIM][MAXDIM];   // V (S x P)
  int Bv[MAXDIM];
  int A [MAXDIM][MAXDIM];   // requantised Q x K^T
  int PR[MAXDIM][MAXDIM];   // normalised probabilities
  longint PS[MAXDIM][MAXDIM]; // partial-sum memory

  function automatic int rnd8();
    return int'($urandom_range(255)) - 128;
  endfunction

  function automatic int requant_ref(longint x, int mult, int shift, int add);
    longint v;
    v = x & ((64'sd1 <<< TD) - 1);
    if (v >= (64'sd1 <<< (TD - 1))) v -= (64'sd1 <<< TD);
    v = v * mult;
    if (shift > 0) v += (64'sd1 <<< (shift - 1));
    v = v >>> shift;
    v += add;
    if (v > 127) v = 127;
    if (v < -128) v = -128;
    return int'(v);
  endfunction

  // ---------------- stream queues ----------------
  typedef logic [TM-1:0][7:0] row_t;
  typedef logic [TN-1:0][7:0] beat_t;
  row_t  in_q[$];
  beat_t w_q[$];
  beat_t b_q[$];
  beat_t exp_q[$];
  int    psi_row[$], psi_col[$];    // where each partial-sum beat comes from
  int    pso_row[$], pso_col[$];    // where each partial-sum beat goes to
  int    in_idx, w_idx, b_idx, psi_idx, pso_idx, out_idx;
  int    rate_in, rate_out;          // percent of cycles a stream may move
  logic  g_in, g_w, g_b, g_psi;

  assign in_valid  = busy && g_in  && (in_idx  < in_q.size());
  assign w_valid   = busy && g_w   && (w_idx   < w_q.size());
  assign b_valid   = busy && g_b   && (b_idx   < b_q.size());
  assign psi_valid = busy && g_psi && (psi_idx < psi_row.size());
  assign in_data   = (in_idx  < in_q.size()) ? in_q[in_idx] : '0;
  assign w_data    = (w_idx   < w_q.size())  ? w_q[w_idx]   : '0;
  assign b_data    = (b_idx   < b_q.size())  ? b_q[b_idx]   : '0;
  always_comb begin
    psi_data = '0;
    if (psi_idx < psi_row.size())
      for (int n = 0; n < TN; n++)
        psi_data[n] = TD'(PS[psi_row[psi_idx]][psi_col[psi_idx] + n]);
  end

  // a valid beat stays valid until taken; otherwise the gate is re-drawn
  always @(posedge clk) begin
    if (in_valid && in_ready) in_idx <= in_idx + 1;
    if (w_valid && w_ready) w_idx <= w_idx + 1;
    if (b_valid && b_ready) b_idx <= b_idx + 1;
    if (psi_valid && psi_ready) psi_idx <= psi_idx + 1;
    g_in  <= (in_valid  && !in_ready)  || ($urandom_range(99) < rate_in);
    g_w   <= (w_valid   && !w_ready)   || ($urandom_range(99) < rate_in);
    g_b   <= (b_valid   && !b_ready)   || ($urandom_range(99) < rate_in);
    g_psi <= (psi_valid && !psi_ready) || ($urandom_range(99) < rate_in);
    out_ready <= ($urandom_range(99) < rate_out);
    pso_ready <= ($urandom_range(99) < rate_out);
  end

  // sinks
  always @(posedge clk) begin
    if (pso_valid && pso_ready) begin
      if (pso_idx < pso_row.size())
        for (int n = 0; n < TN; n++)
          PS[pso_row[pso_idx]][pso_col[pso_idx] + n] = longint'(signed'(pso_data[n]));
      else begin
        failures++; $display("unexpected partial-sum beat");
      end
      pso_idx++;
    end
    if (out_valid && out_ready) begin
      checks++;
      if (out_idx >= exp_q.size()) begin
        failures++; $display("unexpected output beat %0d", out_idx);
      end else if (out_data !== exp_q[out_idx]) begin
        failures++;
        if (failures < 10) $display("output beat %0d: got %h expected %h", out_idx, out_data, exp_q[out_idx]);
      end
      out_idx++;
    end
  end

  // ---------------- mechanism counters ----------------
  int n_weight_wait, n_overlap, n_fifo_full, n_pso_bp, n_sm_stall, n_rescale, n_clip, n_clear,
      n_psum_in, n_row_done, n_linear, n_attention;
  always @(posedge clk) if (rst_n) begin
    if (dut.issue_valid && !dut.wb_valid) n_weight_wait++;
    if (w_valid && w_ready && dut.wb_valid) n_overlap++;
    if (dut.s1_valid_q && dut.s1_tag_q.p_last && dut.have_in && !dut.fifo_ready) n_fifo_full++;
    if (pso_valid && !pso_ready) n_pso_bp++;
    if (dut.issue_valid && dut.tag.en_en && !dut.en_ready) n_sm_stall++;
    if (dut.sm_rescale) n_rescale++;
    if (dut.s2_fire && dut.s1_tag_q.p_last)
      for (int n = 0; n < TN; n++)
        if (dut.rq_out[n] == 8'sd127 || dut.rq_out[n] == -8'sd128) n_clip++;
    if (dut.fire && dut.tag.sm_clear) n_clear++;
    if (psi_valid && psi_ready) n_psum_in++;
    if (dut.da_valid && dut.s1_tag_q.row_done) n_row_done++;
  end

  int cycles;
  always @(posedge clk) cycles++;

  // watchdog
  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic reset_streams();
    in_q.delete(); w_q.delete(); b_q.delete(); exp_q.delete();
    psi_row.delete(); psi_col.delete(); pso_row.delete(); pso_col.delete();
    in_idx = 0; w_idx = 0; b_idx = 0; psi_idx = 0; pso_idx = 0; out_idx = 0;
  endtask

  // Streams of one matrix product In (rows x L) * Wm (L x J) in loop-nest order.
  // which: 0 = X*W, 1 = Q*K^T, 2 = P*V (input rows taken from A).
  task automatic push_matmul(int which, int i, int tj, int tl, int row_base);
    row_t r_; beat_t bt;
    for (int j = 0; j < tj; j++)
      for (int p = 0; p < tl; p++)
        for (int r = 0; r < R; r++) begin
          for (int k = 0; k < TM; k++) begin
            for (int n = 0; n < TN; n++) begin
              int l, c, v;
              l = p * TM + k; c = j * TM + r * TN + n;
              v = (which == 0) ? W[l][c] : (which == 1) ? Kt[l][c] : V[l][c];
              bt[n] = 8'(v);
            end
            w_q.push_back(bt);
          end
          for (int s = 0; s < TM; s++) begin
            for (int k = 0; k < TM; k++)
              r_[k] = 8'((which == 2) ? A[row_base + i * TM + s][p * TM + k]
                                      : X[row_base + i * TM + s][p * TM + k]);
            in_q.push_back(r_);
            if (p > 0) begin
              psi_row.push_back(i * TM + s); psi_col.push_back(j * TM + r * TN);
            end
            if (p < tl - 1) begin
              pso_row.push_back(i * TM + s); pso_col.push_back(j * TM + r * TN);
            end
            if (p == tl - 1) begin
              for (int n = 0; n < TN; n++) bt[n] = 8'((which == 0) ? Bv[j * TM + r * TN + n] : 0);
              b_q.push_back(bt);
            end
          end
        end
  endtask

  task automatic run_and_wait(int expected_rows, output int took);
    int t0;
    @(negedge clk);
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    t0 = cycles;
    while (!done) @(posedge clk);
    took = cycles - t0;
    @(negedge clk);
    checks++;
    if (in_idx != expected_rows || out_idx != exp_q.size() || w_idx != w_q.size() ||
        b_idx != b_q.size() || psi_idx != psi_row.size() || pso_idx != pso_row.size()) begin
      failures++;
      $display("stream counts: in %0d/%0d out %0d/%0d w %0d/%0d b %0d/%0d psi %0d/%0d pso %0d/%0d",
               in_idx, expected_rows, out_idx, exp_q.size(), w_idx, w_q.size(), b_idx, b_q.size(),
               psi_idx, psi_row.size(), pso_idx, pso_row.size());
    end
  endtask

  // ---------------- linear layer ----------------
  task automatic linear_test(int I, int L, int J, int rin, int rout, int extreme = 0);
    beat_t bt; int took, rows, rq_m, rq_s;
    reset_streams();
    rate_in = rin; rate_out = rout;
    for (int a = 0; a < I; a++) for (int b = 0; b < L; b++) X[a][b] = extreme ? -128 : rnd8();
    for (int a = 0; a < L; a++) for (int b = 0; b < J; b++) W[a][b] = extreme ? -128 : rnd8();
    for (int b = 0; b < J; b++) Bv[b] = rnd8();
    rq_m = extreme ? 1 : 3; rq_s = extreme ? 16 : 10;
    cfg = '0;
    cfg.mode = MODE_LINEAR;
    cfg.tiles_i = 8'(I / TM); cfg.tiles_j = 8'(J / TM); cfg.tiles_l = 8'(L / TM);
    cfg.rq_main = '{mult: 8'(rq_m), shift: 5'(rq_s), add: 8'sd5};
    for (int i = 0; i < I / TM; i++) push_matmul(0, i, J / TM, L / TM, 0);
    // expected outputs in emission order
    for (int i = 0; i < I / TM; i++)
      for (int j = 0; j < J / TM; j++)
        for (int r = 0; r < R; r++)
          for (int s = 0; s < TM; s++) begin
            for (int n = 0; n < TN; n++) begin
              longint acc; int c;
              c = j * TM + r * TN + n; acc = Bv[c];
              for (int l = 0; l < L; l++) acc += X[i * TM + s][l] * W[l][c];
              bt[n] = 8'(requant_ref(acc, rq_m, rq_s, 5));
            end
            exp_q.push_back(bt);
          end
    rows = in_q.size();
    run_and_wait(rows, took);
    n_linear++;
    $display("linear I=%0d L=%0d J=%0d rates %0d/%0d: %0d rows in %0d cycles", I, L, J, rin, rout, rows, took);
    if (rin == 100 && rout == 100) begin
      // one row per cycle once the first weight bank is loaded (M cycles) plus
      // the two-stage pipeline and the FIFO
      checks++;
      if (took > rows + TM + 4) begin
        failures++; $display("throughput: %0d cycles for %0d rows", took, rows);
      end
    end
  endtask

  // ---------------- attention ----------------
  task automatic attention_test(int S, int P, int rin, int rout);
    beat_t bt; int took, rows;
    int mx, sm, inv, sh, rowbase;
    reset_streams();
    rate_in = rin; rate_out = rout;
    for (int a = 0; a < S; a++) for (int b = 0; b < P; b++) begin
      X[a][b] = rnd8(); Kt[b][a] = rnd8(); V[a][b] = rnd8();
    end
    cfg = '0;
    cfg.mode = MODE_ATTENTION;
    cfg.tiles_i = 8'(S / TM); cfg.tiles_j = 8'(S / TM); cfg.tiles_l = 8'(P / TM);
    cfg.rq_main = '{mult: 8'd1, shift: 5'd8, add: 8'sd0};
    cfg.rq_av   = '{mult: 8'd1, shift: 5'd6, add: 8'sd0};
    // reference A = requant(Q K^T)
    for (int a = 0; a < S; a++)
      for (int c = 0; c < S; c++) begin
        longint acc = 0;
        for (int l = 0; l < P; l++) acc += X[a][l] * Kt[l][c];
        A[a][c] = requant_ref(acc, 1, 8, 0);
      end
    // reference softmax, accumulated chunk by chunk in the hardware order
    for (int a = 0; a < S; a++) begin
      mx = -128; sm = 0;
      for (int j = 0; j < S / TM; j++)
        for (int r = 0; r < R; r++) begin
          int cm, t;
          cm = mx;
          for (int n = 0; n < TN; n++) if (A[a][j * TM + r * TN + n] > cm) cm = A[a][j * TM + r * TN + n];
          t = sm >> ((cm - mx) >> SM_SHIFT);
          for (int n = 0; n < TN; n++) t += SM_CONST >> ((cm - A[a][j * TM + r * TN + n]) >> SM_SHIFT);
          if (t > 32767) t = 32767;
          mx = cm; sm = t;
        end
      inv = SM_DIVIDEND / sm;
      for (int c = 0; c < S; c++) begin
        sh = (mx - A[a][c]) >> SM_SHIFT;
        PR[a][c] = (inv >> sh) > 127 ? 127 : (inv >> sh);
      end
    end
    // streams and expected outputs per i: Q x K^T then A x V
    for (int i = 0; i < S / TM; i++) begin
      push_matmul(1, i, S / TM, P / TM, 0);
      for (int j = 0; j < S / TM; j++)
        for (int r = 0; r < R; r++)
          for (int s = 0; s < TM; s++) begin
            for (int n = 0; n < TN; n++) bt[n] = 8'(A[i * TM + s][j * TM + r * TN + n]);
            exp_q.push_back(bt);
          end
      push_matmul(2, i, P / TM, S / TM, 0);
      for (int j = 0; j < P / TM; j++)
        for (int r = 0; r < R; r++)
          for (int s = 0; s < TM; s++) begin
            for (int n = 0; n < TN; n++) begin
              longint acc = 0; int c;
              c = j * TM + r * TN + n;
              for (int l = 0; l < S; l++) acc += PR[i * TM + s][l] * V[l][c];
              bt[n] = 8'(requant_ref(acc, 1, 6, 0));
            end
            exp_q.push_back(bt);
          end
    end
    rows = in_q.size();
    run_and_wait(rows, took);
    n_attention++;
    $display("attention S=%0d P=%0d: %0d rows in %0d cycles", S, P, rows, took);
  endtask

  initial begin
    start = 1'b0; cfg = '0; rate_in = 100; rate_out = 100;
    g_in = 0; g_w = 0; g_b = 0; g_psi = 0; out_ready = 0; pso_ready = 0;
    reset_streams();
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    repeat (2) @(posedge clk);

    linear_test(128, 128, 64, 100, 100);
    linear_test(64, 192, 128, 70, 60);
    attention_test(128, 64, 80, 70);
    // largest dot product the 24-bit accumulator is sized for: 256 x (-128 * -128)
    linear_test(64, 256, 64, 100, 100, 1);
    // a compact-transformer head: 256 tokens, head size 64, streams always ready
    attention_test(256, 64, 100, 100);

    $display("mechanisms: weight_wait=%0d bank_overlap=%0d fifo_full=%0d pso_backpressure=%0d softmax_stall=%0d rescale=%0d clip=%0d clear=%0d psum_in=%0d row_done=%0d linear=%0d attention=%0d",
             n_weight_wait, n_overlap, n_fifo_full, n_pso_bp, n_sm_stall, n_rescale, n_clip, n_clear,
             n_psum_in, n_row_done, n_linear, n_attention);
    if (n_weight_wait == 0) begin failures++; $display("no weight starvation seen"); end
    if (n_overlap == 0)     begin failures++; $display("no double-buffer overlap seen"); end
    if (n_fifo_full == 0)   begin failures++; $display("output FIFO never full"); end
    if (n_pso_bp == 0)      begin failures++; $display("no partial-sum back-pressure seen"); end
    if (n_sm_stall == 0)    begin failures++; $display("no softmax stall seen"); end
    if (n_rescale == 0)     begin failures++; $display("no sum rescaling seen"); end
    if (n_clip == 0)        begin failures++; $display("no requantisation clipping seen"); end
    if (n_clear == 0)       begin failures++; $display("softmax never cleared"); end
    if (n_psum_in == 0)     begin failures++; $display("no partial sums read"); end
    if (n_row_done == 0)    begin failures++; $display("no softmax row completed"); end
    checks += 10;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
