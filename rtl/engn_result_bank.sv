// engn_result_bank: last-level (L3) on-chip buffer of destination vertices.
//
// One line holds COLS output dimensions of one vertex; a vertex id is its
// line address. It receives updated vertex lines drained from the PE array,
// supplies DST values on DAVC misses, and is read and written by the VPU.
//
// Interface: one read port (one cycle latency) and one write port; the two
// may be used in the same cycle (a read of the line being written returns
// the old value). Size, ports and latency are this design's choices.
module engn_result_bank
  import engn_pkg::*;
#(
  parameter int unsigned COLS  = engn_pkg::PE_COLS,
  parameter int unsigned DEPTH = engn_pkg::RES_DEPTH,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic [AW-1:0] rd_addr,
  output data_t         rd_data [COLS],
  input  logic          wr_en,
  input  logic [AW-1:0] wr_addr,
  input  data_t         wr_data [COLS]
);

  data_t mem [DEPTH][COLS];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
    rd_data <= mem[rd_addr];
  end

endmodule
