// tb_engn_pe_controller: the edge parser.
//  1. The 3x3 example with six destination vertices from the edge
//     reorganisation figure: in original edge order the batch takes 6
//     ticks and each (src,dst) pair is issued at the tick printed there;
//     reorganized to the ring order it takes 3 ticks with no idle slot.
//  2. Random edge lists on 8 rows: every issued aggregate must carry the
//     source that the row holds in that tick and the next edge of the
//     row in order; the tick count must equal an independent replay of
//     the in-order rule.
module tb_engn_pe_controller;
  import engn_pkg::*;
  localparam int R = 8, D = 32;

  logic clk = 0, rst_n = 0, start = 0;
  logic [4:0] base = 0;
  logic [4:0] edge_rd_addr [R];
  edge_t edge_rd_data [R];
  logic ring_load, ring_shift, busy, done;
  logic agg_en [R];
  logic [SLOT_W-1:0] agg_slot [R];
  logic [31:0] ticks, idle_slots;
  edge_t bank [R][D];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  for (genvar r = 0; r < R; r++) begin : g_rd
    assign edge_rd_data[r] = bank[r][edge_rd_addr[r]];
  end

  // The parser is instantiated for 3 rows (figure example) and 8 rows.
  logic [4:0] a3 [3];
  edge_t d3 [3];
  logic en3 [3];
  logic [SLOT_W-1:0] sl3 [3];
  logic rl3, rs3, busy3, done3, start3 = 0;
  logic [31:0] ticks3, idle3;
  for (genvar r = 0; r < 3; r++) begin : g_rd3
    assign d3[r] = bank[r][a3[r]];
  end

  engn_pe_controller #(.ROWS(3), .EDGE_DEPTH(D)) dut3 (.clk, .rst_n, .start(start3), .base(5'd0),
    .edge_rd_addr(a3), .edge_rd_data(d3), .ring_load(rl3), .ring_shift(rs3), .agg_en(en3),
    .agg_slot(sl3), .busy(busy3), .done(done3), .ticks(ticks3), .idle_slots(idle3));

  engn_pe_controller #(.ROWS(R), .EDGE_DEPTH(D)) dut (.clk, .rst_n, .start, .base,
    .edge_rd_addr, .edge_rd_data, .ring_load, .ring_shift, .agg_en, .agg_slot,
    .busy, .done, .ticks, .idle_slots);

  function automatic edge_t mk(int s, int d);
    return edge_t'{valid: 1'b1, src: 15'(s), dst: 16'(d)};
  endfunction

  task automatic chk(string what, int got, int exp);
    checks++;
    if (got != exp) begin failures++; $display("FAIL %s: got %0d exp %0d", what, got, exp); end
  endtask

  // run the 3-row example; exp_tick[r][i] is the tick of the i-th edge of row r
  task automatic run3(int exp_ticks, int exp_tick [3][3]);
    int t, seen [3];
    seen = '{0, 0, 0};
    @(negedge clk) start3 = 1;
    @(negedge clk) start3 = 0;
    t = 0;
    while (!done3) begin
      for (int r = 0; r < 3; r++)
        if (en3[r]) begin
          chk($sformatf("row %0d edge %0d tick", r, seen[r]), t, exp_tick[r][seen[r]]);
          seen[r]++;
        end
      @(negedge clk);
      t++;
    end
    chk("ticks", int'(ticks3), exp_ticks);
    for (int r = 0; r < 3; r++) chk("edges consumed", seen[r], 3);
  endtask

  initial begin
    int exp_orig [3][3], exp_reorg [3][3];
    repeat (2) @(posedge clk);
    rst_n = 1;
    // ---------------- figure example, original order (src,dst)
    bank[0][0] = mk(0, 0); bank[0][1] = mk(2, 0); bank[0][2] = mk(1, 3); bank[0][3] = '0;
    bank[1][0] = mk(2, 1); bank[1][1] = mk(1, 4); bank[1][2] = mk(0, 4); bank[1][3] = '0;
    bank[2][0] = mk(0, 2); bank[2][1] = mk(2, 5); bank[2][2] = mk(1, 5); bank[2][3] = '0;
    exp_orig = '{'{0, 2, 4}, '{1, 3, 5}, '{1, 3, 5}};
    run3(6, exp_orig);
    chk("idle slots original", int'(idle3), 9);
    // ---------------- reorganized order
    bank[0][0] = mk(0, 0); bank[0][1] = mk(1, 3); bank[0][2] = mk(2, 0);
    bank[1][0] = mk(1, 4); bank[1][1] = mk(2, 1); bank[1][2] = mk(0, 4);
    bank[2][0] = mk(2, 5); bank[2][1] = mk(0, 2); bank[2][2] = mk(1, 5);
    exp_reorg = '{'{0, 1, 2}, '{0, 1, 2}, '{0, 1, 2}};
    run3(3, exp_reorg);
    chk("idle slots reorganized", int'(idle3), 0);

    // ---------------- random lists on 8 rows
    for (int it = 0; it < 30; it++) begin
      int n [R], ptr [R], t, exp_t, loads;
      base = 5'($urandom_range(0, 3));
      exp_t = 0;
      for (int r = 0; r < R; r++) begin
        int tt;
        n[r] = $urandom_range(0, 20);
        for (int i = 0; i < D; i++) bank[r][i] = '0;
        for (int i = 0; i < n[r]; i++)
          bank[r][int'(base) + i] = mk($urandom_range(0, R - 1), r + R * $urandom_range(0, 3));
        // replay of the in-order rule: wait for the source to come round
        tt = 0;
        for (int i = 0; i < n[r]; i++) begin
          while ((r + tt) % R != int'(bank[r][int'(base) + i].src)) tt++;
          tt++;
        end
        if (tt > exp_t) exp_t = tt;
        ptr[r] = 0;
      end
      @(negedge clk) start = 1;
      #1;
      checks++;
      if (!ring_load) begin failures++; $display("FAIL ring_load missing"); end
      @(negedge clk) start = 0;
      t = 0;
      while (!done && t < 1000) begin
        for (int r = 0; r < R; r++) begin
          if (agg_en[r]) begin
            edge_t e;
            e = bank[r][int'(base) + ptr[r]];
            chk("src held by row", (r + t) % R, int'(e.src));
            chk("slot", int'(agg_slot[r]), int'(e.dst) / R);
            ptr[r]++;
          end
        end
        checks++;
        if (busy && !done && ring_shift !== (t < exp_t)) begin
          failures++; $display("FAIL ring_shift at %0d", t);
        end
        @(negedge clk);
        t++;
      end
      chk("random ticks", int'(ticks), exp_t);
      for (int r = 0; r < R; r++) chk("random edges consumed", ptr[r], n[r]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
