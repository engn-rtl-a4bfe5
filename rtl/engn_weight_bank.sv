// engn_weight_bank: on-chip buffer of learned weights and biases.
//
// Word k of a weight matrix holds W[k][c] for the COLS output dimensions c
// handled by the array columns; one read feeds the weight path of all
// columns for one cycle of feature extraction. A bias vector is stored as
// one more word. Writes come from the DMA side one lane at a time.
//
// Interface: one write port and one read port with one cycle latency.
// Size, ports and latency are this design's choices.
module engn_weight_bank
  import engn_pkg::*;
#(
  parameter int unsigned COLS  = engn_pkg::PE_COLS,
  parameter int unsigned DEPTH = engn_pkg::W_DEPTH,
  localparam int unsigned AW   = $clog2(DEPTH),
  localparam int unsigned LW   = $clog2(COLS) > 0 ? $clog2(COLS) : 1
) (
  input  logic          clk,
  input  logic          wr_en,
  input  logic [AW-1:0] wr_addr,
  input  logic [LW-1:0] wr_lane,
  input  data_t         wr_data,
  input  logic [AW-1:0] rd_addr,
  output data_t         rd_data [COLS]
);

  data_t mem [DEPTH][COLS];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr][wr_lane] <= wr_data;
    rd_data <= mem[rd_addr];
  end

endmodule
