// engn_pe: one processing element of the ring-edge-reduce (RER) array.
//
// A PE sits at row r, column c. Row r works on one vertex, column c on one
// output dimension. It holds four register groups:
//   * MAC accumulator and SRC RF: during feature extraction the row's input
//     property element (prop_in) and the column's weight element (w_in)
//     arrive each cycle; acc += prop_in * w_in in Q16.16. `src_latch` copies
//     the finished dot product into SRC RF.
//   * shadow SRC (the ring register): `ring_load` copies SRC RF into it,
//     `ring_shift` takes the value of the south neighbour (ring_in). ring_out
//     goes to the north neighbour, so after t shifts row r holds the vertex
//     of row (r + t) mod PE_ROWS.
//   * DST RF: DST_SLOTS destination vertices (vertex d lives in row
//     d % PE_ROWS, slot d / PE_ROWS). When the edge parser raises agg_en the
//     ring value is folded into DST[agg_slot] with the aggregate operator
//     (sum, max or min). dst_wr_* loads a slot (window start).
//   * shadow DST (drain register): `drain_load` stores XPE(DST[drain_slot]),
//     `drain_shift` takes the south neighbour's value, so updated values
//     march north and leave the array at row 0.
// All actions are single-cycle and registered; the XPE is combinational.
//
// The MAC/ring/aggregate structure and the four RF groups follow the
// published PE; using the two shadow groups as ring and drain registers,
// the DST depth, the number format and the reset are this design's choices.
module engn_pe
  import engn_pkg::*;
#(
  parameter int unsigned DST_SLOTS = engn_pkg::DST_SLOTS
) (
  input  logic              clk,
  input  logic              rst_n,
  input  pe_ctrl_t          ctrl,
  // feature extraction
  input  data_t             prop_in,
  input  data_t             w_in,
  // ring (shadow SRC)
  input  data_t             ring_in,
  output data_t             ring_out,
  // aggregate control from the edge parser of this row
  input  logic              agg_en,
  input  logic [SLOT_W-1:0] agg_slot,
  // DST RF load
  input  logic              dst_wr_en,
  input  logic [SLOT_W-1:0] dst_wr_slot,
  input  data_t             dst_wr_data,
  // update / drain (shadow DST)
  input  data_t             bias,
  input  data_t             drain_in,
  output data_t             drain_out
);

  data_t acc_q;
  data_t src_q;
  data_t ring_q;
  data_t drain_q;
  data_t dst_q [DST_SLOTS];
  data_t xpe_out;

  engn_xpe u_xpe (
    .din   (dst_q[ctrl.drain_slot]),
    .bias  (bias),
    .shift (ctrl.shift),
    .act   (ctrl.act),
    .dout  (xpe_out)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc_q   <= '0;
      src_q   <= '0;
      ring_q  <= '0;
      drain_q <= '0;
      for (int s = 0; s < DST_SLOTS; s++) dst_q[s] <= '0;
    end else begin
      // MAC for feature extraction (GPA dataflow)
      if (ctrl.mac_clr)     acc_q <= '0;
      else if (ctrl.mac_en) acc_q <= acc_q + fx_mul(prop_in, w_in);

      if (ctrl.src_latch) src_q <= acc_q;

      // ring register
      if (ctrl.ring_load)       ring_q <= src_q;
      else if (ctrl.ring_shift) ring_q <= ring_in;

      // DST RF: window load has priority over aggregation
      if (dst_wr_en) begin
        dst_q[dst_wr_slot] <= dst_wr_data;
      end else if (agg_en) begin
        dst_q[agg_slot] <= agg_apply(ctrl.agg_op, dst_q[agg_slot], ring_q);
      end

      // drain register
      if (ctrl.drain_load)       drain_q <= xpe_out;
      else if (ctrl.drain_shift) drain_q <= drain_in;
    end
  end

  assign ring_out  = ring_q;
  assign drain_out = drain_q;

  initial begin
    assert (DST_SLOTS >= 1 && DST_SLOTS <= (1 << SLOT_W))
      else $error("engn_pe: DST_SLOTS must be 1..%0d", 1 << SLOT_W);
  end

endmodule
