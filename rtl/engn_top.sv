// engn_top: EnGN graph-neural-network accelerator core.
//
// EnGN runs the three stages every GNN layer shares -- feature extraction
// (vertex property times a weight matrix), aggregate (reduce the features of
// each vertex's in-neighbours) and update (bias, activation, element-wise
// functions) -- on one PE array. Row r of the array works on one vertex,
// column c on one output dimension. Feature extraction streams the input
// property one element per cycle, so any input dimension fits. Aggregation
// runs inside the array: each column is a ring and the features of a batch
// of PE_ROWS source vertices circulate through it while the edge parser
// tells each row, tick by tick, which passing feature to fold into which of
// its destination vertices (ring-edge-reduce). Destination values come from
// a degree-aware vertex cache (DAVC) of high-degree vertices or from the
// result bank, and updated values drain back through per-PE XPEs.
//
// Blocks: engn_controller (instruction buffer, sequencer), engn_pe_controller
// (edge parser), engn_rer_array (PEs with XPEs), engn_davc, the four banks
// (property, weight, edge, result) and engn_vpu. The DMA, prefetcher,
// format converter, HBM controller and HBM are outside this core; their
// side of the banks is the set of *_wr_* / rb_host_* ports, usable while
// the core is idle (busy = 0).
//
// Operation: load the banks, the DAVC and a program, pulse start, wait for
// done. Statistics: agg_ticks/agg_idle of the last aggregate, and the DAVC
// hits and misses of all window loads since reset.
//
// The block structure follows the published architecture; all interfaces,
// the instruction format and the routing details are this design's own.
module engn_top
  import engn_pkg::*;
#(
  parameter int unsigned ROWS        = engn_pkg::PE_ROWS,
  parameter int unsigned COLS        = engn_pkg::PE_COLS,
  parameter int unsigned DST_SLOTS   = engn_pkg::DST_SLOTS,
  parameter int unsigned PROP_DEPTH  = engn_pkg::PROP_DEPTH,
  parameter int unsigned W_DEPTH     = engn_pkg::W_DEPTH,
  parameter int unsigned EDGE_DEPTH  = engn_pkg::EDGE_DEPTH,
  parameter int unsigned RES_DEPTH   = engn_pkg::RES_DEPTH,
  parameter int unsigned DAVC_LINES  = engn_pkg::DAVC_LINES,
  parameter int unsigned INSTR_DEPTH = engn_pkg::INSTR_DEPTH,
  localparam int unsigned LANES      = 2 * COLS,
  localparam int unsigned PA_W       = $clog2(PROP_DEPTH),
  localparam int unsigned WA_W       = $clog2(W_DEPTH),
  localparam int unsigned EA_W       = $clog2(EDGE_DEPTH),
  localparam int unsigned RA_W       = $clog2(RES_DEPTH),
  localparam int unsigned IA_W       = $clog2(INSTR_DEPTH),
  localparam int unsigned RL_W       = $clog2(ROWS) > 0 ? $clog2(ROWS) : 1,
  localparam int unsigned CL_W       = $clog2(COLS) > 0 ? $clog2(COLS) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  // run control
  input  logic             start,
  output logic             busy,
  output logic             done,
  // instruction buffer
  input  logic             instr_wr_en,
  input  logic [IA_W-1:0]  instr_wr_addr,
  input  instr_t           instr_wr_data,
  // property bank (DMA side)
  input  logic             prop_wr_en,
  input  logic [PA_W-1:0]  prop_wr_addr,
  input  logic [RL_W-1:0]  prop_wr_lane,
  input  data_t            prop_wr_data,
  // weight bank (DMA side)
  input  logic             w_wr_en,
  input  logic [WA_W-1:0]  w_wr_addr,
  input  logic [CL_W-1:0]  w_wr_lane,
  input  data_t            w_wr_data,
  // edge banks (DMA side)
  input  logic             edge_wr_en,
  input  logic [RL_W-1:0]  edge_wr_bank,
  input  logic [EA_W-1:0]  edge_wr_addr,
  input  edge_t            edge_wr_data,
  // DAVC preload of high-degree vertices
  input  logic             davc_fill_en,
  input  logic [VID_W-1:0] davc_fill_vid,
  input  data_t            davc_fill_line [COLS],
  // result bank (DMA side, while idle)
  input  logic             rb_host_wr_en,
  input  logic [RA_W-1:0]  rb_host_addr,
  input  data_t            rb_host_wr_line [COLS],
  output data_t            rb_host_rd_line [COLS],
  // statistics
  output logic [31:0]      agg_ticks,
  output logic [31:0]      agg_idle,
  output logic [31:0]      davc_hits,
  output logic [31:0]      davc_misses
);

  // ------------------------------------------------------------ signals
  pe_ctrl_t          ctrl;
  logic [ADDR_W-1:0] c_prop_addr, c_w_addr, c_rb_rd_addr, c_rb_wr_addr, c_agg_base;
  logic              agg_start, agg_ring_load, agg_ring_shift, agg_done, agg_busy;
  logic [VID_W-1:0]  lk_vid;
  logic              dst_wr_valid, dst_wr_clear;
  logic [ADDR_W-1:0] dst_wr_row;
  logic [SLOT_W-1:0] dst_wr_slot;
  data_t             dst_clear_value;
  logic              bias_latch;
  logic              c_rb_wr_en;
  logic [1:0]        rb_wr_src;
  logic              opnd_cap, vpu_in_valid, vpu_out_valid;
  logic [1:0]        opnd_sel;
  vpu_op_e           vpu_op;

  data_t             prop_rd [ROWS];
  data_t             w_rd    [COLS];
  data_t             bias_q  [COLS];
  data_t             rb_rd   [COLS];
  data_t             rb_wr_line [COLS];
  data_t             dst_line   [COLS];
  data_t             drain_line [COLS];
  logic [EA_W-1:0]   edge_addr [ROWS];
  edge_t             edge_data [ROWS];
  logic              agg_en    [ROWS];
  logic [SLOT_W-1:0] agg_slot  [ROWS];
  logic              dst_wr_en [ROWS];
  logic              lk_hit, hit_q;
  data_t             lk_line [COLS];
  data_t             lk_line_q [COLS];
  data_t             opnd_a [LANES];
  data_t             opnd_b [LANES];
  data_t             vpu_y  [LANES];
  logic              rb_wr_en;
  logic [RA_W-1:0]   rb_wr_addr, rb_rd_addr;

  // ------------------------------------------------------------ controller
  engn_controller #(
    .ROWS(ROWS), .DST_SLOTS(DST_SLOTS), .INSTR_DEPTH(INSTR_DEPTH)
  ) u_ctrl (
    .clk, .rst_n,
    .instr_wr_en, .instr_wr_addr, .instr_wr_data,
    .start, .busy, .done,
    .ctrl,
    .prop_rd_addr (c_prop_addr),
    .w_rd_addr    (c_w_addr),
    .rb_rd_addr   (c_rb_rd_addr),
    .agg_start, .agg_base(c_agg_base),
    .agg_ring_load, .agg_ring_shift, .agg_done,
    .lk_vid, .dst_wr_valid, .dst_wr_clear, .dst_wr_row, .dst_wr_slot, .dst_clear_value,
    .bias_latch,
    .rb_wr_en     (c_rb_wr_en),
    .rb_wr_addr   (c_rb_wr_addr),
    .rb_wr_src,
    .opnd_cap, .opnd_sel, .vpu_in_valid, .vpu_op
  );

  // ------------------------------------------------------------ banks
  engn_property_bank #(.ROWS(ROWS), .DEPTH(PROP_DEPTH)) u_prop (
    .clk, .wr_en(prop_wr_en), .wr_addr(prop_wr_addr), .wr_lane(prop_wr_lane),
    .wr_data(prop_wr_data), .rd_addr(c_prop_addr[PA_W-1:0]), .rd_data(prop_rd)
  );

  engn_weight_bank #(.COLS(COLS), .DEPTH(W_DEPTH)) u_weight (
    .clk, .wr_en(w_wr_en), .wr_addr(w_wr_addr), .wr_lane(w_wr_lane),
    .wr_data(w_wr_data), .rd_addr(c_w_addr[WA_W-1:0]), .rd_data(w_rd)
  );

  engn_edge_bank #(.ROWS(ROWS), .DEPTH(EDGE_DEPTH)) u_edge (
    .clk, .wr_en(edge_wr_en), .wr_bank(edge_wr_bank), .wr_addr(edge_wr_addr),
    .wr_data(edge_wr_data), .rd_addr(edge_addr), .rd_data(edge_data)
  );

  assign rb_rd_addr = busy ? c_rb_rd_addr[RA_W-1:0] : rb_host_addr;
  assign rb_wr_en   = busy ? c_rb_wr_en : rb_host_wr_en;
  assign rb_wr_addr = busy ? c_rb_wr_addr[RA_W-1:0] : rb_host_addr;

  always_comb begin
    for (int c = 0; c < COLS; c++) begin
      if (!busy)                 rb_wr_line[c] = rb_host_wr_line[c];
      else if (rb_wr_src == 2'd1) rb_wr_line[c] = vpu_y[c];
      else if (rb_wr_src == 2'd2) rb_wr_line[c] = vpu_y[COLS + c];
      else                       rb_wr_line[c] = drain_line[c];
    end
  end

  engn_result_bank #(.COLS(COLS), .DEPTH(RES_DEPTH)) u_result (
    .clk, .rd_addr(rb_rd_addr), .rd_data(rb_rd),
    .wr_en(rb_wr_en), .wr_addr(rb_wr_addr), .wr_data(rb_wr_line)
  );
  assign rb_host_rd_line = rb_rd;

  // ------------------------------------------------------------ DAVC
  engn_davc #(.LINES(DAVC_LINES), .COLS(COLS)) u_davc (
    .clk, .rst_n,
    .fill_en(davc_fill_en), .fill_vid(davc_fill_vid), .fill_line(davc_fill_line),
    .lk_vid, .lk_hit, .lk_line,
    .upd_en(rb_wr_en), .upd_vid(VID_W'(rb_wr_addr)), .upd_line(rb_wr_line)
  );

  // lookup result lines up with the result-bank read data one cycle later
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      hit_q       <= 1'b0;
      davc_hits   <= '0;
      davc_misses <= '0;
    end else begin
      hit_q <= lk_hit;
      if (dst_wr_valid && !dst_wr_clear) begin
        if (hit_q) davc_hits   <= davc_hits + 1;
        else       davc_misses <= davc_misses + 1;
      end
    end
  end

  always_ff @(posedge clk) begin
    lk_line_q <= lk_line;
    if (bias_latch) bias_q <= w_rd;
  end

  always_comb begin
    for (int c = 0; c < COLS; c++)
      dst_line[c] = dst_wr_clear ? dst_clear_value : (hit_q ? lk_line_q[c] : rb_rd[c]);
    for (int r = 0; r < ROWS; r++)
      dst_wr_en[r] = dst_wr_valid && (int'(dst_wr_row) == r);
  end

  // ------------------------------------------------------------ NGPU
  engn_pe_controller #(.ROWS(ROWS), .EDGE_DEPTH(EDGE_DEPTH)) u_parser (
    .clk, .rst_n,
    .start(agg_start), .base(c_agg_base[EA_W-1:0]),
    .edge_rd_addr(edge_addr), .edge_rd_data(edge_data),
    .ring_load(agg_ring_load), .ring_shift(agg_ring_shift),
    .agg_en, .agg_slot,
    .busy(agg_busy), .done(agg_done),
    .ticks(agg_ticks), .idle_slots(agg_idle)
  );

  engn_rer_array #(.ROWS(ROWS), .COLS(COLS), .DST_SLOTS(DST_SLOTS)) u_array (
    .clk, .rst_n, .ctrl,
    .prop_row(prop_rd), .w_col(w_rd), .bias(bias_q),
    .agg_en, .agg_slot,
    .dst_wr_en, .dst_wr_slot, .dst_wr_line(dst_line),
    .drain_line
  );

  // ------------------------------------------------------------ VPU
  always_ff @(posedge clk) begin
    if (opnd_cap) begin
      for (int c = 0; c < COLS; c++) begin
        case (opnd_sel)
          2'd0: opnd_a[c]        <= rb_rd[c];
          2'd1: opnd_a[COLS + c] <= rb_rd[c];
          2'd2: opnd_b[c]        <= rb_rd[c];
          default: opnd_b[COLS + c] <= rb_rd[c];
        endcase
      end
    end
  end

  engn_vpu #(.LANES(LANES)) u_vpu (
    .clk, .rst_n, .in_valid(vpu_in_valid), .op(vpu_op),
    .a(opnd_a), .b(opnd_b), .out_valid(vpu_out_valid), .y(vpu_y)
  );

  // the aggregate of the parser and the controller's AGG phase go together
  a_agg_busy: assert property (@(posedge clk) disable iff (!rst_n) agg_busy |-> busy);
  // VPU results are written in the two cycles after they appear
  a_vpu_wr: assert property (@(posedge clk) disable iff (!rst_n)
    vpu_out_valid |-> (c_rb_wr_en && rb_wr_src == 2'd1));

endmodule
