// tb_engn_pe: drives one PE through feature extraction (random dot
// products), ring load and shift, aggregation with sum/max/min into
// different DST slots, DST writes and the XPE drain path, checking every
// visible result against a behavioural model.
module tb_engn_pe;
  import engn_pkg::*;
  localparam int S = 4;

  logic clk = 0, rst_n = 0;
  pe_ctrl_t ctrl;
  data_t prop_in, w_in, ring_in, ring_out, dst_wr_data, bias, drain_in, drain_out;
  logic agg_en, dst_wr_en;
  logic [SLOT_W-1:0] agg_slot, dst_wr_slot;
  int checks = 0, failures = 0;
  data_t m_src, m_dst [S];

  always #5 clk = ~clk;

  engn_pe #(.DST_SLOTS(S)) dut (.clk, .rst_n, .ctrl, .prop_in, .w_in, .ring_in, .ring_out,
    .agg_en, .agg_slot, .dst_wr_en, .dst_wr_slot, .dst_wr_data, .bias, .drain_in, .drain_out);

  task automatic chk(string what, data_t got, data_t exp);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s: got %0d exp %0d", what, got, exp); end
  endtask

  task automatic idle();
    ctrl = '0; agg_en = 0; dst_wr_en = 0;
  endtask

  initial begin
    idle();
    prop_in = 0; w_in = 0; ring_in = 0; bias = 0; drain_in = 0; agg_slot = 0; dst_wr_slot = 0; dst_wr_data = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int round = 0; round < 20; round++) begin
      int f;
      longint acc;
      data_t v;
      // ---- feature extraction: F random products
      f = $urandom_range(1, 12);
      @(negedge clk); idle(); ctrl.mac_clr = 1;
      acc = 0;
      for (int k = 0; k < f; k++) begin
        @(negedge clk); idle(); ctrl.mac_en = 1;
        prop_in = data_t'($urandom()) >>> 12; w_in = data_t'($urandom()) >>> 12;
        acc = longint'(int'(acc + ((longint'(prop_in) * longint'(w_in)) >>> 16)));
      end
      @(negedge clk); idle(); ctrl.src_latch = 1;
      m_src = data_t'(acc);
      // ---- ring: load own value, see it at ring_out
      @(negedge clk); idle(); ctrl.ring_load = 1;
      @(negedge clk); idle();
      chk("ring_out after load", ring_out, m_src);
      // ---- clear DST slots with writes
      for (int s = 0; s < S; s++) begin
        @(negedge clk); idle(); dst_wr_en = 1; dst_wr_slot = SLOT_W'(s);
        dst_wr_data = data_t'($urandom()) >>> 10; m_dst[s] = dst_wr_data;
      end
      // ---- aggregate: values arrive from the south, fold some of them
      for (int t = 0; t < 10; t++) begin
        @(negedge clk); idle();
        ctrl.agg_op = agg_op_e'($urandom_range(0, 2));
        ctrl.ring_shift = 1;
        ring_in = data_t'($urandom()) >>> 10;
        agg_en = $urandom_range(0, 2) != 0;
        agg_slot = SLOT_W'($urandom_range(0, S - 1));
        v = ring_out;
        if (agg_en) m_dst[agg_slot] = agg_apply(ctrl.agg_op, m_dst[agg_slot], v);
        @(posedge clk); #1;
        chk("ring shift", ring_out, ring_in);
      end
      // ---- drain every slot through the XPE (ReLU, bias, rounding shift)
      for (int s = 0; s < S; s++) begin
        data_t r;
        @(negedge clk); idle();
        ctrl.drain_load = 1; ctrl.drain_slot = SLOT_W'(s); ctrl.act = ACT_RELU; ctrl.shift = 5'd2;
        bias = data_t'($urandom()) >>> 20;
        r = ((m_dst[s] + 2) >>> 2) + bias;
        if (r < 0) r = 0;
        @(posedge clk); #1;
        chk("drain load", drain_out, r);
        @(negedge clk); idle(); ctrl.drain_shift = 1; drain_in = data_t'($urandom());
        @(posedge clk); #1;
        chk("drain shift", drain_out, drain_in);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
