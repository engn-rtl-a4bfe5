// tb_engn_rer_array: a 4 x 3 array with 2 DST slots runs a whole
// batch: feature extraction of random properties against a random weight
// matrix, ring-edge-reduce with random per-row aggregate enables (the
// model knows that row r holds vertex (r + t) mod 4 at tick t, sending
// north), and the drain of both slots through the XPEs out of row 0.
module tb_engn_rer_array;
  import engn_pkg::*;
  localparam int R = 4, C = 3, S = 2;

  logic clk = 0, rst_n = 0;
  pe_ctrl_t ctrl;
  data_t prop_row [R], w_col [C], bias [C], dst_wr_line [C], drain_line [C];
  logic agg_en [R], dst_wr_en [R];
  logic [SLOT_W-1:0] agg_slot [R], dst_wr_slot;
  int checks = 0, failures = 0;

  data_t x [R][16], w [16][C], p [R][C], dst [R][S][C];

  always #5 clk = ~clk;

  engn_rer_array #(.ROWS(R), .COLS(C), .DST_SLOTS(S)) dut (.clk, .rst_n, .ctrl, .prop_row, .w_col,
    .bias, .agg_en, .agg_slot, .dst_wr_en, .dst_wr_slot, .dst_wr_line, .drain_line);

  task automatic idle();
    ctrl = '0;
    for (int r = 0; r < R; r++) begin agg_en[r] = 0; dst_wr_en[r] = 0; agg_slot[r] = 0; end
  endtask

  initial begin
    idle();
    dst_wr_slot = 0;
    for (int c = 0; c < C; c++) begin bias[c] = 0; dst_wr_line[c] = 0; w_col[c] = 0; end
    for (int r = 0; r < R; r++) prop_row[r] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int round = 0; round < 10; round++) begin
      int f;
      agg_op_e op;
      f = $urandom_range(1, 16);
      op = agg_op_e'(round % 3);
      for (int r = 0; r < R; r++) for (int k = 0; k < f; k++) x[r][k] = data_t'($urandom()) >>> 12;
      for (int k = 0; k < f; k++) for (int c = 0; c < C; c++) w[k][c] = data_t'($urandom()) >>> 12;
      // reference feature extraction
      for (int r = 0; r < R; r++) for (int c = 0; c < C; c++) begin
        data_t a;
        a = 0;
        for (int k = 0; k < f; k++) a = a + data_t'((longint'(x[r][k]) * longint'(w[k][c])) >>> 16);
        p[r][c] = a;
      end
      @(negedge clk); idle(); ctrl.mac_clr = 1;
      for (int k = 0; k < f; k++) begin
        @(negedge clk); idle(); ctrl.mac_en = 1;
        for (int r = 0; r < R; r++) prop_row[r] = x[r][k];
        for (int c = 0; c < C; c++) w_col[c] = w[k][c];
      end
      @(negedge clk); idle(); ctrl.src_latch = 1;
      // DST window load: identity of the operator
      for (int r = 0; r < R; r++) for (int s = 0; s < S; s++) begin
        @(negedge clk); idle(); dst_wr_en[r] = 1; dst_wr_slot = SLOT_W'(s);
        for (int c = 0; c < C; c++) begin dst_wr_line[c] = agg_identity(op); dst[r][s][c] = agg_identity(op); end
      end
      @(negedge clk); idle(); ctrl.ring_load = 1;
      // ring ticks
      for (int t = 0; t < 2 * R; t++) begin
        @(negedge clk); idle(); ctrl.ring_shift = 1; ctrl.agg_op = op;
        for (int r = 0; r < R; r++) begin
          agg_en[r] = $urandom_range(0, 1) == 1;
          agg_slot[r] = SLOT_W'($urandom_range(0, S - 1));
          if (agg_en[r])
            for (int c = 0; c < C; c++)
              dst[r][agg_slot[r]][c] = agg_apply(op, dst[r][agg_slot[r]][c], p[(r + t) % R][c]);
        end
      end
      // drain with bias, ReLU and no shift
      for (int s = 0; s < S; s++) begin
        @(negedge clk); idle(); ctrl.drain_load = 1; ctrl.drain_slot = SLOT_W'(s); ctrl.act = ACT_RELU;
        for (int c = 0; c < C; c++) bias[c] = data_t'($urandom()) >>> 18;
        for (int j = 0; j < R; j++) begin
          @(negedge clk); idle(); ctrl.drain_shift = 1;
          for (int c = 0; c < C; c++) begin
            data_t e;
            e = dst[j][s][c] + bias[c];
            if (e < 0) e = 0;
            checks++;
            if (drain_line[c] != e) begin
              failures++;
              $display("FAIL round %0d slot %0d row %0d col %0d: %0d vs %0d", round, s, j, c, drain_line[c], e);
            end
          end
        end
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
