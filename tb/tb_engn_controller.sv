// tb_engn_controller: loads a program with every opcode into the
// controller (4 rows, 2 DST slots) and checks the control it produces:
// the DST-load row/slot sequence one cycle after each lookup, the
// property/weight addresses that feed each MAC cycle, the hand-off to the
// edge parser (modelled here, finishing after a random delay), the drain
// and result-bank write sequence of UPDATE, the VPU operand/write
// sequence, the cycle counts and done.
module tb_engn_controller;
  import engn_pkg::*;
  localparam int R = 4, S = 2;

  logic clk = 0, rst_n = 0, start = 0, busy, done;
  logic instr_wr_en = 0;
  logic [7:0] instr_wr_addr;
  instr_t instr_wr_data;
  pe_ctrl_t ctrl;
  logic [ADDR_W-1:0] prop_rd_addr, w_rd_addr, rb_rd_addr, agg_base, dst_wr_row, rb_wr_addr;
  logic agg_start, agg_ring_load, agg_ring_shift, agg_done;
  logic [VID_W-1:0] lk_vid;
  logic dst_wr_valid, dst_wr_clear, bias_latch, rb_wr_en, opnd_cap, vpu_in_valid;
  logic [SLOT_W-1:0] dst_wr_slot;
  data_t dst_clear_value;
  logic [1:0] rb_wr_src, opnd_sel;
  vpu_op_e vpu_op;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  engn_controller #(.ROWS(R), .DST_SLOTS(S), .INSTR_DEPTH(256)) dut (.*);

  // ---- edge parser stand-in: ring_load with start, done after n cycles
  int agg_wait;
  int agg_cnt = -1;
  assign agg_ring_load = agg_start;
  assign agg_ring_shift = (agg_cnt > 0);
  assign agg_done = (agg_cnt == 0);
  always @(posedge clk) begin
    if (agg_start) agg_cnt <= agg_wait;
    else if (agg_cnt >= 0) agg_cnt <= agg_cnt - 1;
  end

  task automatic chk(string what, int got, int exp);
    checks++;
    if (got != exp) begin failures++; $display("FAIL %s: got %0d exp %0d", what, got, exp); end
  endtask

  function automatic instr_t mk(opcode_e op, int func, int a, int b, int c, int len, int sh);
    instr_t i;
    i = '0;
    i.op = op; i.func = 4'(func); i.a = ADDR_W'(a); i.b = ADDR_W'(b); i.c = ADDR_W'(c);
    i.len = ADDR_W'(len); i.shift = 5'(sh);
    return i;
  endfunction

  // ---- monitors
  int clr_n = 0, dst_n = 0, mac_n = 0, latch_n = 0, agg_n = 0, drainload_n = 0, rbw_n = 0, cap_n = 0, vin_n = 0;
  int last_prop, last_w, last_rb, cyc = 0, start_cyc, done_cyc, mac_first = -1;
  int exp_rbw_addr [$];
  int exp_rbw_src [$];
  int exp_cap_addr [$];
  always @(posedge clk) if (rst_n) begin
    cyc++;
    if (dst_wr_valid) begin
      chk("dst row", int'(dst_wr_row), dst_n % R);
      chk("dst slot", int'(dst_wr_slot), (dst_n % (R * S)) / R);
      chk("dst clear", int'(dst_wr_clear), (dst_n < R * S) ? 1 : 0);
      dst_n++;
    end
    if (dst_wr_valid && dst_n <= R * S)
      chk("clear value (max identity)", int'(dst_clear_value), int'(32'h8000_0000));
    if (ctrl.mac_en) begin
      chk("prop addr at mac", last_prop, 100 + mac_n % 5);
      chk("weight addr at mac", last_w, 20 + mac_n % 5);
      mac_n++;
    end
    if (ctrl.src_latch) begin latch_n++; chk("latch after macs", mac_n, 5 * latch_n); end
    if (ctrl.mac_clr) clr_n++;
    if (agg_start) begin agg_n++; chk("agg base", int'(agg_base), 7); chk("agg op", int'(ctrl.agg_op), 1); end
    if (bias_latch) chk("bias addr", last_w, 33);
    if (ctrl.drain_load) begin
      chk("drain slot", int'(ctrl.drain_slot), drainload_n);
      chk("act", int'(ctrl.act), int'(ACT_RELU));
      chk("shift", int'(ctrl.shift), 3);
      drainload_n++;
    end
    if (rb_wr_en) begin
      chk("rb write addr", int'(rb_wr_addr), exp_rbw_addr[rbw_n]);
      chk("rb write src", int'(rb_wr_src), exp_rbw_src[rbw_n]);
      if (rb_wr_src == 2'd0) begin checks++; if (!ctrl.drain_shift) begin failures++; $display("FAIL no drain shift"); end end
      rbw_n++;
    end
    if (opnd_cap) begin
      chk("operand read addr", last_rb, exp_cap_addr[cap_n]);
      chk("operand sel", int'(opnd_sel), cap_n % 4);
      cap_n++;
    end
    if (vpu_in_valid) begin vin_n++; chk("vpu op", int'(vpu_op), int'(VPU_MUL)); end
    last_prop = int'(prop_rd_addr);
    last_w = int'(w_rd_addr);
    last_rb = int'(rb_rd_addr);
  end

  initial begin
    instr_t prog [8];
    prog[0] = mk(OP_LOAD_DST, 4'b0101, 40, 0, 0, 0, 0);  // clear, max identity
    prog[1] = mk(OP_FEATURE, 0, 100, 20, 0, 5, 0);
    prog[2] = mk(OP_FEATURE, 1, 100, 20, 0, 5, 0);       // second chunk, no clear
    prog[3] = mk(OP_AGG, 1, 7, 0, 0, 0, 0);
    prog[4] = mk(OP_LOAD_DST, 0, 40, 0, 0, 0, 0);        // from DAVC / result bank
    prog[5] = mk(OP_UPDATE, int'(ACT_RELU), 200, 33, 0, 0, 3);
    prog[6] = mk(OP_VPU, int'(VPU_MUL), 300, 400, 500, 2, 0);
    prog[7] = mk(OP_END, 0, 0, 0, 0, 0, 0);
    for (int s = 0; s < S; s++) for (int j = 0; j < R; j++) begin
      exp_rbw_addr.push_back(200 + s * R + j); exp_rbw_src.push_back(0);
    end
    for (int p = 0; p < 2; p++) begin
      exp_rbw_addr.push_back(500 + 2 * p); exp_rbw_src.push_back(1);
      exp_rbw_addr.push_back(501 + 2 * p); exp_rbw_src.push_back(2);
      exp_cap_addr.push_back(300 + 2 * p); exp_cap_addr.push_back(301 + 2 * p);
      exp_cap_addr.push_back(400 + 2 * p); exp_cap_addr.push_back(401 + 2 * p);
    end
    agg_wait = 9;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 8; i++) begin
      @(negedge clk);
      instr_wr_en = 1; instr_wr_addr = 8'(i); instr_wr_data = prog[i];
    end
    @(negedge clk) instr_wr_en = 0;
    start = 1;
    start_cyc = cyc;
    @(negedge clk) start = 0;
    wait (done);
    done_cyc = cyc;
    @(negedge clk);
    chk("dst writes", dst_n, 2 * R * S);
    chk("mac cycles", mac_n, 10);
    chk("src latches", latch_n, 2);
    chk("accumulator clears", clr_n, 1);
    chk("agg starts", agg_n, 1);
    chk("drain loads", drainload_n, S);
    chk("rb writes", rbw_n, R * S + 4);
    chk("operand captures", cap_n, 8);
    chk("vpu issues", vin_n, 2);
    // cycle budget: 8 fetches + (R*S) * 2 loads + 2 * (F+2) + (1 + wait + 1)
    //               + (2 + S*(R+1)) + 2 pairs * 8 + finish
    chk("total cycles", done_cyc - start_cyc,
        1 + 8 + 2 * R * S + 2 * (5 + 2) + (agg_wait + 2) + (2 + S * (R + 1)) + 16 + 1);
    chk("idle after done", int'(busy), 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
