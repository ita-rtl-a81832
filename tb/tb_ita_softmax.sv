// tb_ita_softmax: checks the streaming softmax unit (N=16, M=64).
//
// Feeds DA with the chunks of an M-row attention tile in the accelerator's
// order (for j, for r, for s: N elements of row s, one chunk per cycle),
// marking each row's last chunk. Then requests every row in EN with the same
// scores and compares the normalised output with a softmax model computed
// here (running max and shifted-constant sum, inverse 2^14 / sum,
// inverse >> top 3 bits of the distance). Also checks that EN reports a row
// ready only after its division, that the two dividers finish all M rows within
// about M/2 divisions of 17 cycles, and that clear forgets everything.
module tb_ita_softmax;

  import ita_pkg::*;
  localparam int unsigned N = ita_pkg::N;
  localparam int unsigned M = ita_pkg::M;
  localparam int unsigned R = M / N;
  localparam int TJ = 3;                 // attention row = TJ * M scores
  localparam int S  = TJ * M;

  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0, clear;
  logic da_valid, da_done, en_ready, idle, rescale, sat;
  logic [7:0] da_row, en_row;
  logic [N-1:0][7:0] da_x;
  logic [M-1:0][7:0] en_a, en_p;
  always #5 clk = !clk;

  ita_softmax dut (.clk_i(clk), .rst_ni(rst_n), .clear_i(clear), .da_valid_i(da_valid),
                   .da_row_i(da_row), .da_x_i(da_x), .da_row_done_i(da_done), .en_row_i(en_row),
                   .en_a_i(en_a), .en_p_o(en_p), .en_ready_o(en_ready), .di_idle_o(idle),
                   .rescale_o(rescale), .saturate_o(sat));

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int A[M][S];
  int PR[M][S];
  int n_rescale;
  always @(posedge clk) if (rescale) n_rescale++;

  task automatic one_tile(int spread);
    int mx, sm, cm, t, inv, sh, wait_c;
    for (int s = 0; s < M; s++)
      for (int c = 0; c < S; c++)
        A[s][c] = (s % 4 == 0) ? (c * 255 / S) - 128                    // rising across the row
                : (s % 4 == 1) ? ((c % 50 == 7) ? -30 : int'($urandom_range(10)) - 128) // negative peaks
                               : int'($urandom_range(spread)) - 128;
    // model
    for (int s = 0; s < M; s++) begin
      mx = -128; sm = 0;
      for (int j = 0; j < TJ; j++)
        for (int r = 0; r < R; r++) begin
          cm = mx;
          for (int n = 0; n < N; n++) if (A[s][j * M + r * N + n] > cm) cm = A[s][j * M + r * N + n];
          t = sm >> ((cm - mx) >> SM_SHIFT);
          for (int n = 0; n < N; n++) t += SM_CONST >> ((cm - A[s][j * M + r * N + n]) >> SM_SHIFT);
          if (t > 32767) t = 32767;
          mx = cm; sm = t;
        end
      inv = SM_DIVIDEND / sm;
      for (int c = 0; c < S; c++) begin
        sh = (mx - A[s][c]) >> SM_SHIFT;
        PR[s][c] = ((inv >> sh) > 127) ? 127 : (inv >> sh);
      end
    end
    // clear, then DA in loop order
    @(negedge clk); clear = 1; @(negedge clk); clear = 0;
    en_row = 0;
    #1;
    checks++;
    if (en_ready) begin failures++; $display("row ready right after clear"); end
    for (int j = 0; j < TJ; j++)
      for (int r = 0; r < R; r++)
        for (int s = 0; s < M; s++) begin
          da_valid = 1; da_row = 8'(s);
          da_done = (j == TJ - 1) && (r == R - 1);
          for (int n = 0; n < N; n++) da_x[n] = 8'(A[s][j * M + r * N + n]);
          @(negedge clk);
        end
    da_valid = 0; da_done = 0;
    // all inverses must arrive within ceil(M/2) divisions of 17 cycles
    wait_c = 0;
    while (!idle && wait_c < 2000) begin @(negedge clk); wait_c++; end
    checks++;
    if (wait_c > ((M + 1) / 2) * 17 + 4) begin
      failures++; $display("DI took %0d cycles", wait_c);
    end
    // EN
    for (int s = 0; s < M; s++)
      for (int j = 0; j < TJ; j++) begin
        en_row = 8'(s);
        for (int k = 0; k < M; k++) en_a[k] = 8'(A[s][j * M + k]);
        #1;
        checks++;
        if (!en_ready) begin failures++; $display("row %0d not ready", s); end
        for (int k = 0; k < M; k++) begin
          checks++;
          if (int'(en_p[k]) != PR[s][j * M + k]) begin
            failures++;
            if (failures < 10) $display("row %0d col %0d: got %0d expected %0d", s, j * M + k,
                                        en_p[k], PR[s][j * M + k]);
          end
        end
        @(negedge clk);
      end
  endtask

  initial begin
    clear = 0; da_valid = 0; da_done = 0; da_row = '0; da_x = '0; en_row = '0; en_a = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    one_tile(255);
    one_tile(60);
    checks++;
    if (n_rescale == 0) begin failures++; $display("no rescaling seen"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
