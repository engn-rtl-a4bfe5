// tb_engn_edge_bank: fills 8 banks with random entries and reads them
// back with a different address per bank in the same cycle (asynchronous
// read).
module tb_engn_edge_bank;
  import engn_pkg::*;
  localparam int R = 8, D = 16;

  logic clk = 0, wr_en = 0;
  logic [2:0] wr_bank;
  logic [3:0] wr_addr;
  edge_t wr_data;
  logic [3:0] rd_addr [R];
  edge_t rd_data [R];
  edge_t model [R][D];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  engn_edge_bank #(.ROWS(R), .DEPTH(D)) dut (.clk, .wr_en, .wr_bank, .wr_addr, .wr_data, .rd_addr, .rd_data);

  initial begin
    for (int b = 0; b < R; b++)
      for (int a = 0; a < D; a++) begin
        @(negedge clk);
        wr_en = 1; wr_bank = 3'(b); wr_addr = 4'(a); wr_data = edge_t'($urandom());
        model[b][a] = wr_data;
      end
    @(negedge clk) wr_en = 0;
    for (int it = 0; it < 200; it++) begin
      for (int b = 0; b < R; b++) rd_addr[b] = 4'($urandom_range(0, D - 1));
      #1;
      for (int b = 0; b < R; b++) begin
        checks++;
        if (rd_data[b] != model[b][rd_addr[b]]) begin
          failures++; $display("FAIL bank %0d addr %0d", b, rd_addr[b]);
        end
      end
      @(negedge clk);
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
