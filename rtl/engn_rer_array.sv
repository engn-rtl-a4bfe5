// engn_rer_array: the PE_ROWS x PE_COLS ring-edge-reduce PE array of the NGPU.
//
// Wiring:
//   * property path: word prop_row[r] (element k of the vertex in row r)
//     is broadcast to all PEs of row r;
//   * weight path: w_col[c] (row k of the weight matrix, column c) is
//     broadcast to all PEs of column c, so after F cycles PE(r,c) holds
//     output dimension c of vertex r;
//   * aggregate path: each column is a ring. PE(r,c) sends north to
//     PE(r-1,c) and receives from PE(r+1,c); PE(0,c) sends to
//     PE(PE_ROWS-1,c). All rows shift together;
//   * control path: ctrl reaches every PE; agg_en[r]/agg_slot[r] from the
//     edge parser of row r reach all PEs of that row;
//   * DST load: dst_wr_en[r] writes dst_wr_line (one vertex, PE_COLS values)
//     into slot dst_wr_slot of row r;
//   * drain: the shadow DST registers of a column form a chain towards row
//     0; drain_line is the line held by row 0 (the vertex of row j after j
//     drain shifts).
// Every PE action takes one cycle. bias[c] is the per-column XPE bias.
//
// The grid, the broadcast paths and the north-bound column rings follow the
// published array; the DST load and drain paths are this design's own.
module engn_rer_array
  import engn_pkg::*;
#(
  parameter int unsigned ROWS      = engn_pkg::PE_ROWS,
  parameter int unsigned COLS      = engn_pkg::PE_COLS,
  parameter int unsigned DST_SLOTS = engn_pkg::DST_SLOTS
) (
  input  logic              clk,
  input  logic              rst_n,
  input  pe_ctrl_t          ctrl,
  input  data_t             prop_row    [ROWS],
  input  data_t             w_col       [COLS],
  input  data_t             bias        [COLS],
  input  logic              agg_en      [ROWS],
  input  logic [SLOT_W-1:0] agg_slot    [ROWS],
  input  logic              dst_wr_en   [ROWS],
  input  logic [SLOT_W-1:0] dst_wr_slot,
  input  data_t             dst_wr_line [COLS],
  output data_t             drain_line  [COLS]
);

  data_t ring  [ROWS][COLS];
  data_t drain [ROWS][COLS];

  for (genvar r = 0; r < ROWS; r++) begin : g_row
    for (genvar c = 0; c < COLS; c++) begin : g_col
      engn_pe #(.DST_SLOTS(DST_SLOTS)) u_pe (
        .clk         (clk),
        .rst_n       (rst_n),
        .ctrl        (ctrl),
        .prop_in     (prop_row[r]),
        .w_in        (w_col[c]),
        .ring_in     (ring[(r + 1) % ROWS][c]),
        .ring_out    (ring[r][c]),
        .agg_en      (agg_en[r]),
        .agg_slot    (agg_slot[r]),
        .dst_wr_en   (dst_wr_en[r]),
        .dst_wr_slot (dst_wr_slot),
        .dst_wr_data (dst_wr_line[c]),
        .bias        (bias[c]),
        .drain_in    ((r == ROWS - 1) ? data_t'(0) : drain[(r + 1) % ROWS][c]),
        .drain_out   (drain[r][c])
      );
    end
  end

  for (genvar c = 0; c < COLS; c++) begin : g_out
    assign drain_line[c] = drain[0][c];
  end

endmodule
