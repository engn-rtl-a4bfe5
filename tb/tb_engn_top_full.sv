// tb_engn_top_full: end-to-end run of the EnGN core with every parameter at its default (128 x 16 array).
//
// A graph of 2*ROWS vertices (two source batches of ROWS vertices; the
// destination window is the first ROWS*DST_SLOTS of them) with random
// edges, random input properties of dimension F = 6 and a random
// F x COLS weight matrix. The program runs one GCN-like layer and then
// a second pass that exercises every other mechanism:
//   1. LOAD_DST clear (sum identity), FEATURE + AGG for batch 0 (edges
//      reorganized to the ring order) and for batch 1 (edges in random
//      order), UPDATE with bias and ReLU to lines BASE1..;
//   2. LOAD_DST of that window back from the DAVC (pinned vertices, whose
//      stale preload the UPDATE write-back must have refreshed) and the
//      result bank, FEATURE + AGG(max) of batch 0, UPDATE with rounding
//      shift 1 and no activation to lines BASE2..;
//   3. VPU element-wise product of lines BASE1.. and BASE2.. to BASEV..
// Every result line is read back and compared with a reference model
// computed here. The aggregate tick count of each batch must equal a
// replay of the in-order edge rule, and each mechanism -- ring wrap
// beyond one revolution, idle ring slots, DAVC hit, DAVC miss, ReLU
// clipping, sum/max aggregation, every opcode -- must happen at least once.
module tb_engn_top_full;
  import engn_pkg::*;
  localparam int R = PE_ROWS, C = PE_COLS, S = DST_SLOTS;
  localparam int PDEP = PROP_DEPTH, WDEP = W_DEPTH, EDEP = EDGE_DEPTH, RDEP = RES_DEPTH, IDEP = INSTR_DEPTH;
  localparam int W     = R * S;          // destination window
  localparam int NV    = 2 * R;          // source vertices (two batches)
  localparam int F     = 6;              // input dimension
  localparam int EB    = 32;             // edge-bank region per batch
  localparam int BASE1 = 2 * W, BASE2 = 3 * W, BASEV = 4 * W;
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

  engn_top  dut (.*);

  int checks = 0, failures = 0;

  // ------------------------------------------------------------ model data
  data_t x [NV][F];
  data_t wm [F][C];
  data_t bias1 [C], bias2 [C];
  data_t p [NV][C];
  int    e_src [2][$], e_dst [2][$];          // per batch
  int    bank_s [2][R][$], bank_d [2][R][$];  // per batch, per row, in bank order
  data_t o1 [W][C], o2 [W][C], yv [4][C];
  int    exp_ticks [2];

  task automatic chk(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %0d exp %0d", what, got, exp);
    end
  endtask

  function automatic instr_t mk(opcode_e op, int func, int a, int b, int c, int len, int sh);
    instr_t i;
    i = '0;
    i.op = op; i.func = 4'(func); i.a = ADDR_W'(a); i.b = ADDR_W'(b); i.c = ADDR_W'(c);
    i.len = ADDR_W'(len); i.shift = 5'(sh);
    return i;
  endfunction

  // ------------------------------------------------------------ statistics
  int n_wrap = 0, n_idle = 0, n_agg = 0, n_relu_clip = 0, op_seen [6];
  int batch_i = 0;
  always @(posedge clk) if (rst_n) begin
    if (dut.dst_wr_valid)      op_seen[int'(OP_LOAD_DST)]++;
    if (dut.ctrl.src_latch)    op_seen[int'(OP_FEATURE)]++;
    if (dut.agg_start)         op_seen[int'(OP_AGG)]++;
    if (dut.ctrl.drain_load)   op_seen[int'(OP_UPDATE)]++;
    if (dut.vpu_in_valid)      op_seen[int'(OP_VPU)]++;
  end

  task automatic wait_agg(int b);
    @(posedge dut.u_parser.done);
    @(negedge clk);
    chk($sformatf("aggregate ticks, batch %0d", b), agg_ticks, exp_ticks[b]);
    if (int'(agg_ticks) > R) n_wrap++;
    if (agg_idle > 0) n_idle++;
    n_agg++;
  endtask

  initial begin
    instr_t prog [$];
    int pi;
    // ---------------------------------------------------- random problem
    for (int v = 0; v < NV; v++) for (int k = 0; k < F; k++) x[v][k] = data_t'($urandom()) >>> 13;
    for (int k = 0; k < F; k++) for (int c = 0; c < C; c++) wm[k][c] = data_t'($urandom()) >>> 14;
    for (int c = 0; c < C; c++) begin
      bias1[c] = data_t'($urandom()) >>> 16;
      bias2[c] = data_t'($urandom()) >>> 16;
    end
    for (int v = 0; v < NV; v++) for (int c = 0; c < C; c++) begin
      data_t a;
      a = 0;
      for (int k = 0; k < F; k++) a = a + data_t'((longint'(x[v][k]) * longint'(wm[k][c])) >>> FRAC_W);
      p[v][c] = a;
    end
    // edges: every destination gets 0..3 sources from each batch
    for (int b = 0; b < 2; b++)
      for (int d = 0; d < W; d++) begin
        int n;
        n = $urandom_range(0, 3);
        for (int i = 0; i < n; i++) begin
          int s;
          s = $urandom_range(0, R - 1);
          bank_s[b][d % R].push_back(s);
          bank_d[b][d % R].push_back(d);
        end
      end
    // batch 1 keeps a random order; batch 0 is reorganized to the ring
    // order: row r sees source (r + t) mod R at tick t, so sort by that
    // arrival tick (stable)
    for (int r = 0; r < R; r++) begin
      int ks [$], kd [$];
      ks.delete();
      kd.delete();
      for (int t = 0; t < R; t++)
        for (int i = 0; i < bank_s[0][r].size(); i++)
          if ((bank_s[0][r][i] - r + R) % R == t) begin
            ks.push_back(bank_s[0][r][i]);
            kd.push_back(bank_d[0][r][i]);
          end
      bank_s[0][r] = ks;
      bank_d[0][r] = kd;
    end
    // replay of the in-order rule for the expected tick counts
    for (int b = 0; b < 2; b++) begin
      exp_ticks[b] = 0;
      for (int r = 0; r < R; r++) begin
        int tt;
        tt = 0;
        for (int i = 0; i < bank_s[b][r].size(); i++) begin
          while ((r + tt) % R != bank_s[b][r][i]) tt++;
          tt++;
        end
        if (tt > exp_ticks[b]) exp_ticks[b] = tt;
      end
    end
    // ---------------------------------------------------- reference model
    for (int d = 0; d < W; d++) for (int c = 0; c < C; c++) begin
      data_t a, m, r;
      a = 0;
      for (int b = 0; b < 2; b++)
        for (int i = 0; i < bank_s[b][d % R].size(); i++)
          if (bank_d[b][d % R][i] == d) a = a + p[b * R + bank_s[b][d % R][i]][c];
      r = a + bias1[c];
      if (r < 0) begin r = 0; n_relu_clip++; end
      o1[d][c] = r;
      m = r;
      for (int i = 0; i < bank_s[0][d % R].size(); i++)
        if (bank_d[0][d % R][i] == d && p[bank_s[0][d % R][i]][c] > m) m = p[bank_s[0][d % R][i]][c];
      o2[d][c] = ((m + 1) >>> 1) + bias2[c];
    end
    for (int i = 0; i < 4; i++) for (int c = 0; c < C; c++)
      yv[i][c] = data_t'((longint'(o1[i][c]) * longint'(o2[i][c])) >>> FRAC_W);

    // ---------------------------------------------------- load the core
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int b = 0; b < 2; b++) for (int k = 0; k < F; k++) for (int r = 0; r < R; r++) begin
      prop_wr_en = 1; prop_wr_addr = $bits(prop_wr_addr)'(b * F + k); prop_wr_lane = $bits(prop_wr_lane)'(r);
      prop_wr_data = x[b * R + r][k];
      @(negedge clk);
    end
    prop_wr_en = 0;
    for (int k = 0; k < F + 2; k++) for (int c = 0; c < C; c++) begin
      w_wr_en = 1; w_wr_addr = $bits(w_wr_addr)'((k < F) ? k : (k == F ? 50 : 51)); w_wr_lane = $bits(w_wr_lane)'(c);
      w_wr_data = (k < F) ? wm[k][c] : (k == F ? bias1[c] : bias2[c]);
      @(negedge clk);
    end
    w_wr_en = 0;
    for (int b = 0; b < 2; b++) for (int r = 0; r < R; r++) begin
      for (int i = 0; i <= bank_s[b][r].size(); i++) begin
        edge_wr_en = 1; edge_wr_bank = $bits(edge_wr_bank)'(r); edge_wr_addr = $bits(edge_wr_addr)'(b * EB + i);
        edge_wr_data = (i < bank_s[b][r].size())
          ? edge_t'{valid: 1'b1, src: 15'(bank_s[b][r][i]), dst: 16'(bank_d[b][r][i])} : edge_t'(0);
        @(negedge clk);
      end
    end
    edge_wr_en = 0;
    // DAVC: pin five vertices of the BASE1 window with stale data
    foreach (davc_fill_line[c]) davc_fill_line[c] = 32'sh0bad_0bad;
    foreach (pin_list[i]) begin
      davc_fill_en = 1; davc_fill_vid = VID_W'(BASE1 + pin_list[i]);
      @(negedge clk);
    end
    davc_fill_en = 0;
    // ---------------------------------------------------- program
    prog.push_back(mk(OP_LOAD_DST, 1 | (int'(AGG_SUM) << 2), 0, 0, 0, 0, 0));
    prog.push_back(mk(OP_FEATURE, 0, 0, 0, 0, F, 0));
    prog.push_back(mk(OP_AGG, int'(AGG_SUM), 0, 0, 0, 0, 0));
    prog.push_back(mk(OP_FEATURE, 0, F, 0, 0, F, 0));
    prog.push_back(mk(OP_AGG, int'(AGG_SUM), EB, 0, 0, 0, 0));
    prog.push_back(mk(OP_UPDATE, int'(ACT_RELU), BASE1, 50, 0, 0, 0));
    prog.push_back(mk(OP_LOAD_DST, 0, BASE1, 0, 0, 0, 0));
    prog.push_back(mk(OP_FEATURE, 0, 0, 0, 0, F, 0));
    prog.push_back(mk(OP_AGG, int'(AGG_MAX), 0, 0, 0, 0, 0));
    prog.push_back(mk(OP_UPDATE, int'(ACT_NONE), BASE2, 51, 0, 0, 1));
    prog.push_back(mk(OP_VPU, int'(VPU_MUL), BASE1, BASE2, BASEV, 2, 0));
    prog.push_back(mk(OP_END, 0, 0, 0, 0, 0, 0));
    foreach (prog[i]) begin
      instr_wr_en = 1; instr_wr_addr = $bits(instr_wr_addr)'(i); instr_wr_data = prog[i];
      @(negedge clk);
    end
    instr_wr_en = 0;
    // ---------------------------------------------------- run
    start = 1;
    @(negedge clk) start = 0;
    wait_agg(0);
    wait_agg(1);
    wait_agg(0);
    wait (done);
    @(negedge clk);
    chk("DAVC hits", davc_hits, $size(pin_list));
    chk("DAVC misses", davc_misses, W - $size(pin_list));
    // ---------------------------------------------------- read back
    for (int d = 0; d < W; d++) begin
      rb_host_addr = RAW'(BASE1 + d);
      @(negedge clk);
      for (int c = 0; c < C; c++) chk($sformatf("layer-1 vertex %0d dim %0d", d, c), rb_host_rd_line[c], o1[d][c]);
      rb_host_addr = RAW'(BASE2 + d);
      @(negedge clk);
      for (int c = 0; c < C; c++) chk($sformatf("pass-2 vertex %0d dim %0d", d, c), rb_host_rd_line[c], o2[d][c]);
    end
    for (int i = 0; i < 4; i++) begin
      rb_host_addr = RAW'(BASEV + i);
      @(negedge clk);
      for (int c = 0; c < C; c++) chk($sformatf("VPU line %0d dim %0d", i, c), rb_host_rd_line[c], yv[i][c]);
    end
    // ---------------------------------------------------- coverage
    $display("mechanisms: ring-wrap=%0d idle-slots=%0d aggregates=%0d relu-clip=%0d davc-hit=%0d davc-miss=%0d ticks=%0d/%0d",
             n_wrap, n_idle, n_agg, n_relu_clip, davc_hits, davc_misses, exp_ticks[0], exp_ticks[1]);
    chk("ring wrapped past one revolution", n_wrap > 0, 1);
    chk("idle ring slots seen", n_idle > 0, 1);
    chk("ReLU clipped a value", n_relu_clip > 0, 1);
    chk("DAVC hit seen", davc_hits > 0, 1);
    chk("DAVC miss seen", davc_misses > 0, 1);
    for (int o = 1; o < 6; o++) chk($sformatf("opcode %0d executed", o), op_seen[o] > 0, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int pin_list [5] = '{0, 3, 5, 9, 12};

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
