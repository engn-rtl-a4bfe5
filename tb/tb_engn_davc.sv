// tb_engn_davc: preloads pinned vertices, then random lookups (hits,
// misses, same index with another tag) and write-back refreshes, all
// compared with an associative-array model of the cache contents.
module tb_engn_davc;
  import engn_pkg::*;
  localparam int N = 16, C = 4;

  logic clk = 0, rst_n = 0;
  logic fill_en = 0, upd_en = 0, lk_hit;
  logic [VID_W-1:0] fill_vid, lk_vid, upd_vid;
  data_t fill_line [C], lk_line [C], upd_line [C];
  data_t model [int][C];            // vid -> line for cached vids
  int checks = 0, failures = 0, hits = 0, misses = 0;

  always #5 clk = ~clk;

  engn_davc #(.LINES(N), .COLS(C)) dut (.clk, .rst_n, .fill_en, .fill_vid, .fill_line,
    .lk_vid, .lk_hit, .lk_line, .upd_en, .upd_vid, .upd_line);

  task automatic lookup(int v);
    lk_vid = VID_W'(v);
    #1;
    checks++;
    if (lk_hit != model.exists(v)) begin
      failures++; $display("FAIL hit vid %0d: %0b", v, lk_hit);
    end else if (lk_hit) begin
      hits++;
      for (int c = 0; c < C; c++) begin
        checks++;
        if (lk_line[c] != model[v][c]) begin failures++; $display("FAIL data vid %0d", v); end
      end
    end else misses++;
  endtask

  initial begin
    lk_vid = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // after reset nothing hits
    for (int v = 0; v < 40; v++) lookup(v);
    // pin 10 "high-degree" vertices in distinct lines
    for (int i = 0; i < 10; i++) begin
      int v;
      v = i * 37 % 1000 + 16 * i;        // distinct index i*37 % 16 ... checked below
      @(negedge clk);
      fill_en = 1; fill_vid = VID_W'(v);
      for (int c = 0; c < C; c++) fill_line[c] = data_t'($urandom());
      // a new fill replaces whatever used the same line
      foreach (model[k]) if (k % N == v % N) model.delete(k);
      model[v] = fill_line;
    end
    @(negedge clk) fill_en = 0;
    for (int it = 0; it < 400; it++) begin
      int v;
      if ($urandom_range(0, 1) == 1 && model.num() > 0) begin
        int idx, k;
        idx = $urandom_range(0, model.num() - 1);
        k = 0;
        foreach (model[key]) begin if (k == idx) v = key; k++; end
      end else v = $urandom_range(0, 1200);
      lookup(v);
      // write-back of a random vertex: refresh only if cached
      @(negedge clk);
      upd_en = 1; upd_vid = ($urandom_range(0, 1) == 1) ? VID_W'(v) : VID_W'($urandom_range(0, 1200));
      for (int c = 0; c < C; c++) upd_line[c] = data_t'($urandom());
      if (model.exists(int'(upd_vid))) model[int'(upd_vid)] = upd_line;
      @(negedge clk) upd_en = 0;
    end
    checks++;
    if (hits == 0 || misses == 0) begin failures++; $display("FAIL no hit/miss mix"); end
    $display("hits=%0d misses=%0d", hits, misses);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
