// tb_engn_result_bank: random reads and writes of whole lines against a
// model, including a read and a write of the same line in one cycle
// (the read returns the old line).
module tb_engn_result_bank;
  import engn_pkg::*;
  localparam int C = 4, D = 40;

  logic clk = 0, wr_en = 0;
  logic [5:0] rd_addr = 0, wr_addr = 0;
  data_t rd_data [C], wr_data [C];
  data_t model [D][C];
  data_t expect_q [C];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  engn_result_bank #(.COLS(C), .DEPTH(D)) dut (.clk, .rd_addr, .rd_data, .wr_en, .wr_addr, .wr_data);

  initial begin
    for (int a = 0; a < D; a++) begin
      @(negedge clk);
      wr_en = 1; wr_addr = 6'(a);
      for (int c = 0; c < C; c++) begin wr_data[c] = data_t'($urandom()); model[a][c] = wr_data[c]; end
    end
    for (int it = 0; it < 500; it++) begin
      @(negedge clk);
      rd_addr = 6'($urandom_range(0, D - 1));
      expect_q = model[rd_addr];
      wr_en = $urandom_range(0, 1) == 1;
      wr_addr = ($urandom_range(0, 3) == 0) ? rd_addr : 6'($urandom_range(0, D - 1));
      for (int c = 0; c < C; c++) wr_data[c] = data_t'($urandom());
      if (wr_en) model[wr_addr] = wr_data;
      @(posedge clk); #1;
      for (int c = 0; c < C; c++) begin
        checks++;
        if (rd_data[c] != expect_q[c]) begin failures++; $display("FAIL read %0d", rd_addr); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
