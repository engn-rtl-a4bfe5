// engn_vpu: vector processing unit, LANES fixed-point lanes.
//
// It covers the element-wise parts of the GNN models that the PE array does
// not: the gate product of Gated-GCN, the sigmoid/tanh and blends of a GRU
// update, max/min, ReLU. Every lane computes y = op(a, b) in Q16.16:
// add, sub, mul (product >>> 16), max, min, ReLU(a), sigmoid(a) and tanh(a),
// the last two as piecewise-linear clips (clip(a/4 + 1/2, 0, 1) and
// clip(a, -1, 1)).
//
// Timing: in_valid with a, b, op in one cycle gives out_valid and y in the
// next. The lane count follows the published configuration; the operation
// set, the approximations and the latency are this design's choices.
module engn_vpu
  import engn_pkg::*;
#(
  parameter int unsigned LANES = engn_pkg::VPU_LANES
) (
  input  logic    clk,
  input  logic    rst_n,
  input  logic    in_valid,
  input  vpu_op_e op,
  input  data_t   a [LANES],
  input  data_t   b [LANES],
  output logic    out_valid,
  output data_t   y [LANES]
);

  data_t res [LANES];

  always_comb begin
    for (int i = 0; i < LANES; i++) begin
      case (op)
        VPU_ADD:  res[i] = a[i] + b[i];
        VPU_SUB:  res[i] = a[i] - b[i];
        VPU_MUL:  res[i] = fx_mul(a[i], b[i]);
        VPU_MAX:  res[i] = fx_max(a[i], b[i]);
        VPU_MIN:  res[i] = fx_min(a[i], b[i]);
        VPU_RELU: res[i] = (a[i] < 0) ? '0 : a[i];
        VPU_SIGM: res[i] = fx_hsigmoid(a[i]);
        VPU_TANH: res[i] = fx_htanh(a[i]);
        default:  res[i] = a[i];
      endcase
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= in_valid;
  end

  always_ff @(posedge clk) begin
    if (in_valid) y <= res;
  end

endmodule
