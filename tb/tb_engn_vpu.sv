// tb_engn_vpu: every operation of the VPU on random operands, compared with
// a reference model, plus the one-cycle latency of out_valid.
module tb_engn_vpu;
  import engn_pkg::*;
  localparam int L = 32;

  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  vpu_op_e op;
  data_t a [L], b [L], y [L];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  engn_vpu #(.LANES(L)) dut (.clk, .rst_n, .in_valid, .op, .a, .b, .out_valid, .y);

  function automatic longint ref_op(vpu_op_e o, longint x, longint z);
    longint t;
    case (o)
      VPU_ADD:  return longint'(int'(x + z));
      VPU_SUB:  return longint'(int'(x - z));
      VPU_MUL:  return longint'(int'((x * z) >>> 16));
      VPU_MAX:  return (x > z) ? x : z;
      VPU_MIN:  return (x < z) ? x : z;
      VPU_RELU: return (x < 0) ? 0 : x;
      VPU_SIGM: begin t = (x >>> 2) + 32768; return (t < 0) ? 0 : (t > 65536) ? 65536 : t; end
      VPU_TANH: return (x < -65536) ? -65536 : (x > 65536) ? 65536 : x;
      default:  return x;
    endcase
  endfunction

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 200; it++) begin
      @(negedge clk);
      op = vpu_op_e'(it % 8);
      for (int i = 0; i < L; i++) begin
        a[i] = data_t'($urandom()) >>> $urandom_range(8, 14);
        b[i] = data_t'($urandom()) >>> $urandom_range(8, 14);
      end
      in_valid = 1;
      @(negedge clk);
      in_valid = 0;
      checks++;
      if (!out_valid) begin failures++; $display("FAIL out_valid missing"); end
      for (int i = 0; i < L; i++) begin
        checks++;
        if (longint'(y[i]) != ref_op(op, longint'(a[i]), longint'(b[i]))) begin
          failures++;
          $display("FAIL op=%0d lane %0d a=%0d b=%0d y=%0d", op, i, a[i], b[i], y[i]);
        end
      end
      @(negedge clk);
      checks++;
      if (out_valid) begin failures++; $display("FAIL out_valid stuck"); end
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
