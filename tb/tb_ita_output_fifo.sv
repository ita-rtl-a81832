// tb_ita_output_fifo: checks the output FIFO (N*8 bits wide, depth 4).
//
// Random pushes and pops against a queue kept here: every popped word must be
// the oldest pushed one, ready must drop exactly when DEPTH words are held,
// and valid exactly when the FIFO is empty. Phases with a slow and a fast
// consumer make it run full and empty.
module tb_ita_output_fifo;

  localparam int unsigned WIDTH = ita_pkg::N * 8;
  localparam int unsigned DEPTH = 4;

  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0;
  logic push_valid, push_ready, pop_valid, pop_ready;
  logic [WIDTH-1:0] push_data, pop_data;
  logic [WIDTH-1:0] model[$];
  always #5 clk = !clk;

  ita_output_fifo dut (.clk_i(clk), .rst_ni(rst_n), .push_valid_i(push_valid), .push_ready_o(push_ready),
                       .push_data_i(push_data), .pop_valid_o(pop_valid), .pop_ready_i(pop_ready),
                       .pop_data_o(pop_data));

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int n_full, n_empty;

  initial begin
    push_valid = 0; pop_ready = 0; push_data = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 5000; t++) begin
      @(negedge clk);
      push_valid = ($urandom_range(99) < ((t / 500) % 2 ? 30 : 90));
      pop_ready  = ($urandom_range(99) < ((t / 500) % 2 ? 90 : 30));
      for (int b = 0; b < WIDTH / 32; b++) push_data[b * 32 +: 32] = $urandom;
      #1;
      checks++;
      if (push_ready != (model.size() < DEPTH) || pop_valid != (model.size() > 0)) begin
        failures++;
        if (failures < 10) $display("t=%0d flags ready=%0b valid=%0b with %0d words", t, push_ready, pop_valid, model.size());
      end
      if (model.size() == DEPTH) n_full++;
      if (model.size() == 0) n_empty++;
      if (pop_valid && pop_ready) begin
        checks++;
        if (pop_data != model[0]) begin
          failures++;
          if (failures < 10) $display("t=%0d wrong word", t);
        end
      end
      @(posedge clk);
      if (pop_valid && pop_ready) void'(model.pop_front());
      if (push_valid && push_ready) model.push_back(push_data);
    end
    checks++;
    if (n_full == 0 || n_empty == 0) begin failures++; $display("full/empty not reached"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
