// ita_weight_buffer: double-buffered weight store of the N processing engines.
//
// Every PE owns two banks (W1, W2) of M bytes. The write side fills one bank
// of all PEs at N bytes per cycle: beat k carries byte k of each PE's weight
// vector, so a bank is full after M beats. The read side presents the whole
// M-byte vector of every PE from the other bank; the weights stay there
// (weight stationary) until the consumer pulses `rd_release_i` after their last
// use (after M input rows), which frees the bank and switches to the next one.
// Loading and computing overlap, so the weight port needs only N bytes per cycle.
//
// Interface: write is valid/ready; `rd_valid_o` says the read bank is full.
// A beat is taken on wr_valid_i && wr_ready_o; a bank filled on cycle t can be
// read from cycle t+1. The banks are flip-flop arrays here (latches with clock
// gating in the evaluated chip); the bank order W1, W2, W1, ... and the
// release handshake are this design's choices.
module ita_weight_buffer #(
  parameter int unsigned N = ita_pkg::N,
  parameter int unsigned M = ita_pkg::M
) (
  input  logic                     clk_i,
  input  logic                     rst_ni,
  input  logic                     clear_i,       // drop all content (new operation)
  // write side
  input  logic                     wr_valid_i,
  output logic                     wr_ready_o,
  input  logic [N-1:0][7:0]        wr_data_i,
  // read side
  output logic                     rd_valid_o,
  output logic [N-1:0][M-1:0][7:0] rd_data_o,
  input  logic                     rd_release_i
);

  localparam int unsigned AW = (M > 1) ? $clog2(M) : 1;

  logic [1:0][N-1:0][M-1:0][7:0] bank_q;
  logic [1:0]                    full_q;
  logic                          wr_bank_q, rd_bank_q;
  logic [AW-1:0]                 wr_ptr_q;
  logic                          wr_fire, wr_last;

  assign wr_ready_o = !full_q[wr_bank_q] && !clear_i;
  assign wr_fire    = wr_valid_i && wr_ready_o;
  assign wr_last    = (wr_ptr_q == AW'(M - 1));
  assign rd_valid_o = full_q[rd_bank_q];
  assign rd_data_o  = bank_q[rd_bank_q];

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      full_q    <= '0;
      wr_bank_q <= 1'b0;
      rd_bank_q <= 1'b0;
      wr_ptr_q  <= '0;
    end else if (clear_i) begin
      full_q    <= '0;
      wr_bank_q <= 1'b0;
      rd_bank_q <= 1'b0;
      wr_ptr_q  <= '0;
    end else begin
      if (wr_fire) begin
        wr_ptr_q <= wr_last ? '0 : wr_ptr_q + 1'b1;
        if (wr_last) begin
          full_q[wr_bank_q] <= 1'b1;
          wr_bank_q         <= !wr_bank_q;
        end
      end
      if (rd_release_i && rd_valid_o) begin
        full_q[rd_bank_q] <= 1'b0;
        rd_bank_q         <= !rd_bank_q;
      end
    end
  end

  // Bank storage: no reset, a bank is only read once it is marked full.
  always_ff @(posedge clk_i) begin
    if (wr_fire) begin
      for (int unsigned n = 0; n < N; n++) begin
        bank_q[wr_bank_q][n][wr_ptr_q] <= wr_data_i[n];
      end
    end
  end

  // A bank may only be released while it holds weights.
  assert property (@(posedge clk_i) disable iff (!rst_ni) rd_release_i |-> rd_valid_o)
    else $error("weight bank released while empty");

endmodule
