// engn_edge_bank: the ROWS edge banks of the NGPU, one per PE row.
//
// Bank r holds the edge list of the destination vertices mapped to PE row r
// (destination id mod ROWS = r), in the order the edge parser consumes it.
// Every bank has its own read address so the parser can advance each row
// independently; reads are combinational so a row can consume one edge per
// ring tick without a bubble. Writes come from the DMA side, one entry of
// one bank per cycle.
//
// The one-bank-per-row organisation follows the published architecture;
// depth, entry format and the asynchronous read are this design's choices.
module engn_edge_bank
  import engn_pkg::*;
#(
  parameter int unsigned ROWS  = engn_pkg::PE_ROWS,
  parameter int unsigned DEPTH = engn_pkg::EDGE_DEPTH,
  localparam int unsigned AW   = $clog2(DEPTH),
  localparam int unsigned BW   = $clog2(ROWS) > 0 ? $clog2(ROWS) : 1
) (
  input  logic          clk,
  input  logic          wr_en,
  input  logic [BW-1:0] wr_bank,
  input  logic [AW-1:0] wr_addr,
  input  edge_t         wr_data,
  input  logic [AW-1:0] rd_addr [ROWS],
  output edge_t         rd_data [ROWS]
);

  for (genvar r = 0; r < ROWS; r++) begin : g_bank
    edge_t mem [DEPTH];
    always_ff @(posedge clk) begin
      if (wr_en && int'(wr_bank) == r) mem[wr_addr] <= wr_data;
    end
    assign rd_data[r] = mem[rd_addr[r]];
  end

endmodule
