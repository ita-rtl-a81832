// ita_output_fifo: output buffer of ITA.
//
// A first-in first-out queue of DEPTH words of N bytes between the
// requantisation stage and the output port. It lets the accelerator keep
// computing while the memory behind the output port is briefly not ready; when
// it is full the accelerator stalls. Push and pop are valid/ready handshakes;
// a pushed word is visible at the output on the next cycle (no fall-through).
// Both may happen in the same cycle. DEPTH is not given by the architecture:
// 4 is this design's choice.
module ita_output_fifo #(
  parameter int unsigned WIDTH = ita_pkg::N * 8,
  parameter int unsigned DEPTH = 4
) (
  input  logic             clk_i,
  input  logic             rst_ni,
  input  logic             push_valid_i,
  output logic             push_ready_o,
  input  logic [WIDTH-1:0] push_data_i,
  output logic             pop_valid_o,
  input  logic             pop_ready_i,
  output logic [WIDTH-1:0] pop_data_o
);

  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [DEPTH-1:0][WIDTH-1:0] mem_q;
  logic [AW-1:0]               rd_ptr_q, wr_ptr_q;
  logic [AW:0]                 count_q;
  logic                        push, pop;

  assign push_ready_o = (count_q != (AW+1)'(DEPTH));
  assign pop_valid_o  = (count_q != '0);
  assign pop_data_o   = mem_q[rd_ptr_q];
  assign push         = push_valid_i && push_ready_o;
  assign pop          = pop_valid_o && pop_ready_i;

  function automatic logic [AW-1:0] next_ptr(logic [AW-1:0] p);
    return (p == AW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      rd_ptr_q <= '0;
      wr_ptr_q <= '0;
      count_q  <= '0;
    end else begin
      if (push) wr_ptr_q <= next_ptr(wr_ptr_q);
      if (pop)  rd_ptr_q <= next_ptr(rd_ptr_q);
      count_q <= count_q + (AW+1)'(push) - (AW+1)'(pop);
    end
  end

  always_ff @(posedge clk_i) begin
    if (push) mem_q[wr_ptr_q] <= push_data_i;
  end

  assert property (@(posedge clk_i) disable iff (!rst_ni) count_q <= (AW+1)'(DEPTH))
    else $error("output FIFO overflow");

endmodule
