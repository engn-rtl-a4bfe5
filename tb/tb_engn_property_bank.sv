// tb_engn_property_bank: writes random lanes of a small property bank,
// reads every word back and checks data and the one-cycle read latency.
module tb_engn_property_bank;
  import engn_pkg::*;
  localparam int R = 8, D = 32;

  logic clk = 0, wr_en = 0;
  logic [4:0] wr_addr, rd_addr;
  logic [2:0] wr_lane;
  data_t wr_data, rd_data [R];
  data_t model [D][R];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  engn_property_bank #(.ROWS(R), .DEPTH(D)) dut (.clk, .wr_en, .wr_addr, .wr_lane, .wr_data, .rd_addr, .rd_data);

  initial begin
    rd_addr = 0;
    for (int a = 0; a < D; a++)
      for (int l = 0; l < R; l++) begin
        @(negedge clk);
        wr_en = 1; wr_addr = 5'(a); wr_lane = 3'(l); wr_data = data_t'($urandom());
        model[a][l] = wr_data;
      end
    @(negedge clk) wr_en = 0;
    for (int a = D - 1; a >= 0; a--) begin
      rd_addr = 5'(a);
      @(negedge clk);
      for (int l = 0; l < R; l++) begin
        checks++;
        if (rd_data[l] != model[a][l]) begin
          failures++;
          $display("FAIL addr %0d lane %0d: %h vs %h", a, l, rd_data[l], model[a][l]);
        end
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
