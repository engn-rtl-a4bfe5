// tb_engn_xpe: checks rounding shift, bias and the three activations of the
// XPE against a reference computed with 64-bit integer arithmetic.
module tb_engn_xpe;
  import engn_pkg::*;

  data_t din, bias, dout;
  logic [4:0] shift;
  act_e act;
  int checks = 0, failures = 0;

  engn_xpe dut (.din, .bias, .shift, .act, .dout);

  function automatic longint ref_xpe(longint x, longint b, int sh, act_e a);
    longint r, t;
    r = (sh == 0) ? x : ((x + (longint'(1) << (sh - 1))) >>> sh);
    r = longint'(int'(r + b));              // 32-bit wrap
    case (a)
      ACT_RELU: return (r < 0) ? 0 : r;
      ACT_SIGMOID: begin
        t = (r >>> 2) + 32768;
        if (t < 0) return 0;
        if (t > 65536) return 65536;
        return t;
      end
      default: return r;
    endcase
  endfunction

  task automatic check(data_t x, data_t b, int sh, act_e a);
    longint exp;
    din = x; bias = b; shift = 5'(sh); act = a;
    #1;
    exp = ref_xpe(longint'(x), longint'(b), sh, a);
    checks++;
    if (longint'(dout) != exp) begin
      failures++;
      $display("FAIL x=%0d b=%0d sh=%0d act=%0d: got %0d exp %0d", x, b, sh, a, dout, exp);
    end
  endtask

  initial begin
    // directed: ReLU clips negatives, sigmoid saturates, rounding half up
    check(-32'sd5, 32'sd0, 0, ACT_RELU);
    check(32'sd7, 32'sd0, 1, ACT_NONE);          // 3.5 -> 4
    check(32'sd5, 32'sd0, 1, ACT_NONE);          // 2.5 -> 3
    check(32'sd1 <<< 20, 32'sd0, 0, ACT_SIGMOID); // 16 -> 1.0
    check(-(32'sd1 <<< 20), 32'sd0, 0, ACT_SIGMOID); // -16 -> 0
    check(32'sd0, 32'sd0, 0, ACT_SIGMOID);       // 0 -> 0.5
    check(32'sd100, -32'sd300, 0, ACT_RELU);     // bias makes it negative
    for (int i = 0; i < 2000; i++)
      check(data_t'($urandom()) >>> ($urandom_range(0, 12)), data_t'($urandom()) >>> 12,
            $urandom_range(0, 20), act_e'($urandom_range(0, 2)));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
