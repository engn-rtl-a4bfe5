// engn_davc: degree-aware vertex cache (L2) between the result bank and the
// DST register files of the PEs.
//
// The cache is filled, before a layer runs, with the vertex lines of
// high-degree vertices chosen offline; every line is reserved for such a
// vertex and is never replaced. A lookup uses the destination vertex id as
// tag: on a hit the line goes straight to the PE array, on a miss the
// access goes to the result bank. A line written back to the result bank
// also refreshes a cache line that holds the same vertex, so a later hit
// never returns stale data.
//
// Organisation: direct-mapped, LINES lines of COLS 32-bit values (64 KB at
// the defaults), index = vid mod LINES, one tag comparator. Lookup is
// combinational (lk_hit/lk_line in the same cycle); fill and update take
// effect at the clock edge, fill having priority. Reset invalidates all
// lines.
//
// Pinning all lines to high-degree vertices and tag = destination id follow
// the published cache; direct mapping, the write-through refresh and the
// ports are this design's choices.
module engn_davc
  import engn_pkg::*;
#(
  parameter int unsigned LINES = engn_pkg::DAVC_LINES,
  parameter int unsigned COLS  = engn_pkg::PE_COLS,
  localparam int unsigned IW   = $clog2(LINES) > 0 ? $clog2(LINES) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  // preload of a pinned high-degree vertex
  input  logic             fill_en,
  input  logic [VID_W-1:0] fill_vid,
  input  data_t            fill_line [COLS],
  // lookup
  input  logic [VID_W-1:0] lk_vid,
  output logic             lk_hit,
  output data_t            lk_line   [COLS],
  // refresh on write-back
  input  logic             upd_en,
  input  logic [VID_W-1:0] upd_vid,
  input  data_t            upd_line  [COLS]
);

  logic             valid_q [LINES];
  logic [VID_W-1:0] tag_q   [LINES];
  data_t            data_q  [LINES][COLS];

  function automatic logic [IW-1:0] idx(logic [VID_W-1:0] vid);
    return IW'(int'(vid) % LINES);
  endfunction

  always_comb begin
    lk_hit  = valid_q[idx(lk_vid)] && (tag_q[idx(lk_vid)] == lk_vid);
    lk_line = data_q[idx(lk_vid)];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < LINES; i++) valid_q[i] <= 1'b0;
    end else if (fill_en) begin
      valid_q[idx(fill_vid)] <= 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (fill_en) begin
      tag_q [idx(fill_vid)] <= fill_vid;
      data_q[idx(fill_vid)] <= fill_line;
    end else if (upd_en && valid_q[idx(upd_vid)] && tag_q[idx(upd_vid)] == upd_vid) begin
      data_q[idx(upd_vid)] <= upd_line;
    end
  end

endmodule
