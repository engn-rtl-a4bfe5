// tb_engn_workload: one GNN layer over a whole (small) graph, tiled the way
// the accelerator runs large graphs, for five dataset profiles.
//
// A graph does not fit on chip, so the host plays the part of the DMA: it
// reloads the property and weight banks chunk by chunk and the edge banks
// shard by shard between short programs. The graph has NB = 8 source
// batches of R vertices and NV / (R*S) = 4 destination windows. Per batch:
//   1. for each chunk of at most CH input elements: load the chunk of the
//      batch's properties and the matching weight rows, run FEATURE (the
//      first chunk clears the MAC accumulator, later ones accumulate);
//   2. for each window: load the (window, batch) edge shard reorganized to
//      the ring order, run LOAD_DST (cleared to the operator's identity for
//      batch 0, otherwise reloaded from the partial results in the result
//      bank, all DAVC misses), AGG, and UPDATE -- with a zero bias and no
//      activation for a partial result, with the layer's bias and ReLU
//      after the last batch.
// Profiles (input dimension and average in-degree of the evaluated
// datasets, vertex count scaled down to NV = 128):
//   GCN on Cora 1433 / 3.9 (two chunks), GCN on PubMed 500 / 4.5,
//   GS-Pool on Enwiki 300 / 76.7 with a max aggregate, Gated-GCN on Amazon
//   96 / 26.9 followed by a VPU gate y * hsigmoid(y), R-GCN on MUTAG
//   47 / 8.1 (one relation).
// Every output line is compared with a reference layer computed here in
// Q16.16, every aggregate's tick count with a replay of the in-order edge
// rule, and the DAVC miss count with the number of reloaded vertices.
//
// Array 16 x 4 with 2 DST slots (parameters overridden to keep the run
// short); the bank depths of 1024 words hold one chunk of CH = 1000 input
// elements, words 1022 and 1023 of the weight bank hold the layer bias and
// a zero bias line.
module tb_engn_workload;
  import engn_pkg::*;
  localparam int R = 16, C = 4, S = 2;
  localparam int PDEP = 1024, WDEP = 1024, EDEP = 128, RDEP = 256, DLINES = 8, IDEP = 16;
  localparam int W     = R * S;          // destination window
  localparam int NB    = 8;              // source batches
  localparam int NV    = NB * R;         // vertices
  localparam int NW    = NV / W;         // windows
  localparam int FMAX  = 1433;
  localparam int CH    = 1000;           // input elements per chunk
  localparam int BIAS_LINE = 1022, ZERO_LINE = 1023;
  localparam int RAW   = $clog2(RDEP);

  logic clk = 0, rst_n = 0, start = 0, busy, done;
  logic instr_wr_en = 0;
  logic [$clog2(IDEP)-1:0] instr_wr_addr = '0;
  instr_t instr_wr_data = '0;
  logic prop_wr_en = 0;
  logic [$clog2(PDEP)-1:0] prop_wr_addr = '0;
  logic [$clog2(R)-1:0] prop_wr_lane = '0, edge_wr_bank = '0;
  data_t prop_wr_data = '0, w_wr_data = '0;
  logic w_wr_en = 0;
  logic [$clog2(WDEP)-1:0] w_wr_addr = '0;
  logic [$clog2(C)-1:0] w_wr_lane = '0;
  logic edge_wr_en = 0;
  logic [$clog2(EDEP)-1:0] edge_wr_addr = '0;
  edge_t edge_wr_data = '0;
  logic davc_fill_en = 0;
  logic [VID_W-1:0] davc_fill_vid = '0;
  data_t davc_fill_line [C];
  logic rb_host_wr_en = 0;
  logic [RAW-1:0] rb_host_addr = '0;
  data_t rb_host_wr_line [C], rb_host_rd_line [C];
  logic [31:0] agg_ticks, agg_idle, davc_hits, davc_misses;

  always #5 clk = ~clk;

  engn_top #(
    .ROWS(R), .COLS(C), .DST_SLOTS(S), .PROP_DEPTH(PDEP), .W_DEPTH(WDEP),
    .EDGE_DEPTH(EDEP), .RES_DEPTH(RDEP), .DAVC_LINES(DLINES), .INSTR_DEPTH(IDEP)
  ) dut (.*);

  int checks = 0, failures = 0;

  data_t x [NV][FMAX];
  data_t wm [FMAX][C];
  data_t bias [C];
  data_t h [NV][C];
  data_t y [NV][C];
  int    src_of [$], dst_of [$];

  task automatic chk(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %0d exp %0d", what, got, exp);
    end
  endtask

  function automatic instr_t mk(opcode_e op, int func, int a, int b, int len, int sh);
    instr_t i;
    i = '0;
    i.op = op; i.func = 4'(func); i.a = ADDR_W'(a); i.b = ADDR_W'(b);
    i.len = ADDR_W'(len); i.shift = 5'(sh);
    return i;
  endfunction

  // ---------------------------------------------------------- host side
  task automatic put_prop(int addr, int lane, data_t d);
    @(negedge clk);
    prop_wr_en = 1; prop_wr_addr = ($clog2(PDEP))'(addr); prop_wr_lane = ($clog2(R))'(lane);
    prop_wr_data = d;
    @(negedge clk) prop_wr_en = 0;
  endtask

  task automatic put_w(int addr, int lane, data_t d);
    @(negedge clk);
    w_wr_en = 1; w_wr_addr = ($clog2(WDEP))'(addr); w_wr_lane = ($clog2(C))'(lane);
    w_wr_data = d;
    @(negedge clk) w_wr_en = 0;
  endtask

  task automatic put_edge(int bank, int addr, edge_t e);
    @(negedge clk);
    edge_wr_en = 1; edge_wr_bank = ($clog2(R))'(bank); edge_wr_addr = ($clog2(EDEP))'(addr);
    edge_wr_data = e;
    @(negedge clk) edge_wr_en = 0;
  endtask

  task automatic run(instr_t prog [$]);
    for (int i = 0; i < prog.size(); i++) begin
      @(negedge clk);
      instr_wr_en = 1; instr_wr_addr = ($clog2(IDEP))'(i); instr_wr_data = prog[i];
    end
    @(negedge clk) instr_wr_en = 0;
    start = 1;
    @(negedge clk) start = 0;
    wait (done);
    @(negedge clk);
  endtask

  // -------------------------------------------------------- one profile
  task automatic layer(string name, int F, real deg, agg_op_e op, bit gate);
    instr_t prog [$];
    int ticks_all, shards, miss0;
    ticks_all = 0; shards = 0;
    miss0 = int'(davc_misses);
    // random problem
    for (int v = 0; v < NV; v++) for (int k = 0; k < F; k++) x[v][k] = data_t'($urandom()) >>> 17;
    for (int k = 0; k < F; k++) for (int c = 0; c < C; c++) wm[k][c] = data_t'($urandom()) >>> 18;
    for (int c = 0; c < C; c++) bias[c] = data_t'($urandom()) >>> 15;
    src_of.delete(); dst_of.delete();
    for (int d = 0; d < NV; d++) begin
      int n;
      n = $urandom_range(0, int'(2.0 * deg));
      for (int i = 0; i < n; i++) begin
        src_of.push_back($urandom_range(0, NV - 1));
        dst_of.push_back(d);
      end
    end
    // reference layer: y = relu(reduce over in-edges of x*W + bias), the
    // reduction being a sum or a max (starting from the most negative value)
    for (int v = 0; v < NV; v++) for (int c = 0; c < C; c++) begin
      data_t a;
      a = 0;
      for (int k = 0; k < F; k++) a = a + data_t'((longint'(x[v][k]) * longint'(wm[k][c])) >>> FRAC_W);
      h[v][c] = a;
      y[v][c] = (op == AGG_MAX) ? data_t'(32'h8000_0000) : 0;
    end
    for (int i = 0; i < src_of.size(); i++)
      for (int c = 0; c < C; c++)
        if (op == AGG_MAX) begin
          if (h[src_of[i]][c] > y[dst_of[i]][c]) y[dst_of[i]][c] = h[src_of[i]][c];
        end else y[dst_of[i]][c] = y[dst_of[i]][c] + h[src_of[i]][c];
    for (int v = 0; v < NV; v++) for (int c = 0; c < C; c++) begin
      y[v][c] = y[v][c] + bias[c];
      if (y[v][c] < 0) y[v][c] = 0;
    end
    for (int c = 0; c < C; c++) begin
      put_w(BIAS_LINE, c, bias[c]);
      put_w(ZERO_LINE, c, 0);
    end
    // ---- tiled execution
    for (int b = 0; b < NB; b++) begin
      for (int k0 = 0; k0 < F; k0 += CH) begin
        int len;
        len = (F - k0 < CH) ? F - k0 : CH;
        for (int k = 0; k < len; k++) begin
          for (int r = 0; r < R; r++) put_prop(k, r, x[b * R + r][k0 + k]);
          for (int c = 0; c < C; c++) put_w(k, c, wm[k0 + k][c]);
        end
        prog.delete();
        prog.push_back(mk(OP_FEATURE, (k0 > 0) ? 1 : 0, 0, 0, len, 0));
        prog.push_back(mk(OP_END, 0, 0, 0, 0, 0));
        run(prog);
      end
      for (int w = 0; w < NW; w++) begin
        int bs [R][$], bd [R][$];
        int exp_t, last;
        // shard (w, b), each bank sorted by arrival tick (s - r) mod R
        for (int r = 0; r < R; r++) begin bs[r].delete(); bd[r].delete(); end
        for (int t = 0; t < R; t++)
          for (int i = 0; i < src_of.size(); i++) begin
            int s, d;
            s = src_of[i] - b * R; d = dst_of[i] - w * W;
            if (s >= 0 && s < R && d >= 0 && d < W && (s - d % R + R) % R == t) begin
              bs[d % R].push_back(s); bd[d % R].push_back(d);
            end
          end
        // replay of the in-order rule: one edge per row per tick, only when
        // its source passes the row
        exp_t = 0;
        for (int r = 0; r < R; r++) begin
          last = -1;
          for (int i = 0; i < bs[r].size(); i++) begin
            int t;
            t = last + 1;
            while ((r + t) % R != bs[r][i]) t++;
            last = t;
          end
          if (last + 1 > exp_t) exp_t = last + 1;
          for (int i = 0; i < bs[r].size(); i++) begin
            edge_t e;
            e.valid = 1'b1; e.src = 15'(bs[r][i]); e.dst = 16'(bd[r][i]);
            put_edge(r, i, e);
          end
          put_edge(r, bs[r].size(), '0);
        end
        prog.delete();
        prog.push_back(mk(OP_LOAD_DST, (b == 0) ? (1 | (int'(op) << 2)) : 0, w * W, 0, 0, 0));
        prog.push_back(mk(OP_AGG, int'(op), 0, 0, 0, 0));
        if (b == NB - 1) prog.push_back(mk(OP_UPDATE, int'(ACT_RELU), w * W, BIAS_LINE, 0, 0));
        else             prog.push_back(mk(OP_UPDATE, int'(ACT_NONE), w * W, ZERO_LINE, 0, 0));
        prog.push_back(mk(OP_END, 0, 0, 0, 0, 0));
        run(prog);
        chk($sformatf("%s ticks w%0d b%0d", name, w, b), agg_ticks, exp_t);
        ticks_all += int'(agg_ticks);
        shards++;
      end
    end
    // ---- read back and compare
    for (int v = 0; v < NV; v++) begin
      @(negedge clk) rb_host_addr = RAW'(v);
      @(negedge clk);
      for (int c = 0; c < C; c++) chk($sformatf("%s y[%0d][%0d]", name, v, c), rb_host_rd_line[c], y[v][c]);
    end
    // gated output: g = y * hsigmoid(y), hsigmoid(v) = clip(v/4 + 1/2, 0, 1),
    // by the VPU into lines NV..2*NV-1
    if (gate) begin
      prog.delete();
      prog.push_back(mk(OP_VPU, int'(VPU_SIGM), 0, 0, NV / 2, 0));
      prog[0].c = ADDR_W'(NV);
      prog.push_back(mk(OP_VPU, int'(VPU_MUL), 0, NV, NV / 2, 0));
      prog[1].c = ADDR_W'(NV);
      prog.push_back(mk(OP_END, 0, 0, 0, 0, 0));
      run(prog);
      for (int v = 0; v < NV; v++) begin
        @(negedge clk) rb_host_addr = RAW'(NV + v);
        @(negedge clk);
        for (int c = 0; c < C; c++) begin
          longint g;
          g = (longint'(y[v][c]) >>> 2) + 32768;
          if (g < 0) g = 0;
          if (g > 65536) g = 65536;
          chk($sformatf("%s gate[%0d][%0d]", name, v, c), rb_host_rd_line[c],
              data_t'((longint'(y[v][c]) * g) >>> FRAC_W));
        end
      end
    end
    chk({name, " reloads (DAVC misses)"}, int'(davc_misses) - miss0, NV * (NB - 1));
    $display("%s: F=%0d, %0d vertices, %0d edges, %0d shards, %0d aggregate ticks",
             name, F, NV, src_of.size(), shards, ticks_all);
  endtask

  initial begin
    for (int c = 0; c < C; c++) begin davc_fill_line[c] = 0; rb_host_wr_line[c] = 0; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    layer("GCN, Cora-like",             1433,  3.9, AGG_SUM, 1'b0);
    layer("GCN, PubMed-like",            500,  4.5, AGG_SUM, 1'b0);
    layer("GS-Pool, Enwiki-like",        300, 76.7, AGG_MAX, 1'b0);
    layer("Gated-GCN, Amazon-like",       96, 26.9, AGG_SUM, 1'b1);
    layer("R-GCN, MUTAG-like",            47,  8.1, AGG_SUM, 1'b0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
