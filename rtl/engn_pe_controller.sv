// engn_pe_controller: the edge parser ("PE controller") of the NGPU.
//
// Every PE row owns one edge bank. During the aggregate of one source batch
// the parser keeps a read pointer per bank and a tick counter t that counts
// ring shifts modulo ROWS. In tick t the ring register of row r holds the
// feature of source row (r + t) mod ROWS. For every row whose head edge has
// that source, the parser raises agg_en[r] with the edge's destination slot
// (dst / ROWS) and advances the pointer; other rows idle for the tick.
// The rings shift every tick. A row is finished when its head entry is not
// valid (end marker); the aggregate ends when all rows are finished.
//
// Edges are consumed strictly in bank order, so an edge list in original
// order wastes ticks while a list reorganized offline to the ring order
// finishes in one revolution. `ticks` and `idle_slots` report the cost.
//
// Timing: `start` (one cycle, while idle) also raises ring_load so that the
// ring registers take SRC RF in that cycle; tick 0 is the next cycle. `done`
// pulses in the cycle after the last tick. Edge-bank reads are
// combinational: edge_rd_data[r] must be the entry at edge_rd_addr[r] in
// the same cycle. agg_slot is the head entry's dst / ROWS, passed straight
// through from edge_rd_data without a register; it matters only while
// agg_en is high.
//
// The in-order, one-edge-per-row-per-tick rule follows the published
// description and reproduces its worked example; the edge encoding and the
// end marker are this design's own.
module engn_pe_controller
  import engn_pkg::*;
#(
  parameter int unsigned ROWS       = engn_pkg::PE_ROWS,
  parameter int unsigned EDGE_DEPTH = engn_pkg::EDGE_DEPTH,
  localparam int unsigned EA_W      = $clog2(EDGE_DEPTH)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [EA_W-1:0]   base,
  output logic [EA_W-1:0]   edge_rd_addr [ROWS],
  input  edge_t             edge_rd_data [ROWS],
  output logic              ring_load,
  output logic              ring_shift,
  output logic              agg_en       [ROWS],
  output logic [SLOT_W-1:0] agg_slot     [ROWS],
  output logic              busy,
  output logic              done,
  output logic [31:0]       ticks,       // ticks of the last aggregate
  output logic [31:0]       idle_slots   // row-ticks without an aggregate
);

  localparam int unsigned T_W = $clog2(ROWS) > 0 ? $clog2(ROWS) : 1;

  logic            run_q;
  logic [T_W-1:0]  t_q;
  logic [EA_W-1:0] ptr_q [ROWS];
  logic            row_done [ROWS];
  logic            all_done;
  logic [31:0]     idle_now;

  for (genvar r = 0; r < ROWS; r++) begin : g_addr
    assign edge_rd_addr[r] = base + ptr_q[r];
  end

  always_comb begin
    all_done = 1'b1;
    idle_now = '0;
    for (int r = 0; r < ROWS; r++) begin
      int unsigned cur;
      cur             = (r + int'(t_q)) % ROWS;
      row_done[r]     = !edge_rd_data[r].valid;
      agg_en[r]       = run_q && !row_done[r] && (int'(edge_rd_data[r].src) == int'(cur));
      agg_slot[r]     = SLOT_W'(int'(edge_rd_data[r].dst) / ROWS);
      if (!row_done[r]) all_done = 1'b0;
      if (run_q && !agg_en[r]) idle_now = idle_now + 1;
    end
  end

  assign ring_load  = start && !run_q;
  assign ring_shift = run_q && !all_done;
  assign busy       = run_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run_q      <= 1'b0;
      t_q        <= '0;
      done       <= 1'b0;
      ticks      <= '0;
      idle_slots <= '0;
      for (int r = 0; r < ROWS; r++) ptr_q[r] <= '0;
    end else begin
      done <= 1'b0;
      if (!run_q) begin
        if (start) begin
          run_q      <= 1'b1;
          t_q        <= '0;
          ticks      <= '0;
          idle_slots <= '0;
          for (int r = 0; r < ROWS; r++) ptr_q[r] <= '0;
        end
      end else if (all_done) begin
        run_q <= 1'b0;
        done  <= 1'b1;
      end else begin
        ticks      <= ticks + 1;
        idle_slots <= idle_slots + idle_now;
        t_q        <= (int'(t_q) == ROWS - 1) ? '0 : t_q + 1'b1;
        for (int r = 0; r < ROWS; r++)
          if (agg_en[r]) ptr_q[r] <= ptr_q[r] + 1'b1;
      end
    end
  end

  // An edge must sit in the bank of its destination row.
  always_ff @(posedge clk) begin
    for (int r = 0; r < ROWS; r++)
      if (run_q && agg_en[r])
        a_edge_row: assert (int'(edge_rd_data[r].dst) % ROWS == r)
          else $error("edge (%0d,%0d) in bank %0d at %0d", edge_rd_data[r].src, edge_rd_data[r].dst, r, edge_rd_addr[r]);
  end

endmodule
