// tb_ita_weight_buffer: checks the double-buffered weight store (N=16, M=64).
//
// Streams random weight banks beat by beat (byte k of every PE per beat) with
// random gaps, holds each full bank for a random number of cycles before
// releasing it, and compares the M-byte vector of every PE with the bank
// written. Checks that a second bank is loaded while the first is in use,
// that writing stops when both banks are full, and that clear empties both.
module tb_ita_weight_buffer;

  localparam int unsigned N = ita_pkg::N;
  localparam int unsigned M = ita_pkg::M;
  localparam int BANKS = 40;

  typedef logic [N-1:0][M-1:0][7:0] bank_t;

  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0, clear;
  logic wr_valid, wr_ready, rd_valid, release_;
  logic [N-1:0][7:0] wr_data;
  bank_t rd_data;
  bank_t banks[BANKS];
  always #5 clk = !clk;

  ita_weight_buffer dut (.clk_i(clk), .rst_ni(rst_n), .clear_i(clear), .wr_valid_i(wr_valid),
                         .wr_ready_o(wr_ready), .wr_data_i(wr_data), .rd_valid_o(rd_valid),
                         .rd_data_o(rd_data), .rd_release_i(release_));

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int wbank, wbeat, n_overlap, n_both_full;

  // writer
  always @(posedge clk) begin
    if (wr_valid && wr_ready) begin
      if (rd_valid) n_overlap++;
      if (wbeat == M - 1) begin wbeat <= 0; wbank <= wbank + 1; end
      else wbeat <= wbeat + 1;
    end
    if (rst_n && !wr_ready && !clear) n_both_full++;
  end
  logic gate;
  always @(posedge clk) gate <= ($urandom_range(99) < 85);
  assign wr_valid = rst_n && !clear && (wbank < BANKS) && gate;
  always_comb
    for (int n = 0; n < N; n++) wr_data[n] = (wbank < BANKS) ? banks[wbank][n][wbeat] : 8'h0;

  initial begin
    int hold;
    for (int b = 0; b < BANKS; b++)
      for (int n = 0; n < N; n++)
        for (int k = 0; k < M; k++) banks[b][n][k] = 8'($urandom);
    clear = 0; release_ = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int b = 0; b < BANKS; b++) begin
      @(negedge clk);
      while (!rd_valid) @(negedge clk);
      // hold the bank (weight stationary) for a while, checking it stays put
      hold = int'($urandom_range(3 * M, M / 2));
      for (int h = 0; h < hold; h++) begin
        checks++;
        if (rd_data != banks[b]) begin
          failures++;
          if (failures < 10) $display("bank %0d wrong content", b);
        end
        @(negedge clk);
      end
      release_ = 1;
      @(negedge clk);
      release_ = 0;
    end
    // clear empties everything
    clear = 1;
    @(negedge clk);
    clear = 0;
    #1;
    checks++;
    if (rd_valid || !wr_ready) begin failures++; $display("clear did not empty the buffer"); end
    checks++;
    if (n_overlap == 0 || n_both_full == 0) begin failures++; $display("overlap/full not seen"); end
    $display("overlap beats %0d, both-full cycles %0d", n_overlap, n_both_full);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
