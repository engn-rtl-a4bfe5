// engn_property_bank: on-chip buffer of input vertex properties.
//
// Properties are stored "in columns": word k of a batch holds element k of
// the input property of each of the ROWS vertices of the batch, lane r for
// the vertex processed by PE row r. One read therefore feeds the whole
// array for one cycle of feature extraction, whatever the property
// dimension. Writes come from the DMA side one lane at a time.
//
// Interface: one write port (wr_en, wr_addr, wr_lane, wr_data) and one read
// port with one cycle latency (rd_data is the word at the rd_addr of the
// previous cycle). The lane layout follows the published dataflow; size,
// ports and latency are this design's choices.
module engn_property_bank
  import engn_pkg::*;
#(
  parameter int unsigned ROWS  = engn_pkg::PE_ROWS,
  parameter int unsigned DEPTH = engn_pkg::PROP_DEPTH,
  localparam int unsigned AW   = $clog2(DEPTH),
  localparam int unsigned LW   = $clog2(ROWS) > 0 ? $clog2(ROWS) : 1
) (
  input  logic          clk,
  input  logic          wr_en,
  input  logic [AW-1:0] wr_addr,
  input  logic [LW-1:0] wr_lane,
  input  data_t         wr_data,
  input  logic [AW-1:0] rd_addr,
  output data_t         rd_data [ROWS]
);

  data_t mem [DEPTH][ROWS];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr][wr_lane] <= wr_data;
    rd_data <= mem[rd_addr];
  end

endmodule
