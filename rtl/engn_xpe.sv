// engn_xpe: update-stage post-processor attached to every PE.
//
// It turns an aggregated destination value into the vertex's new property:
// first a rounding arithmetic right shift by `shift` (round half up, used to
// rescale a value that carries extra fraction bits), then the per-column
// bias is added, then the activation is applied (none, ReLU, or a
// piecewise-linear sigmoid clip(x/4 + 1/2, 0, 1) in Q16.16).
//
// Purely combinational; the PE registers the result in its shadow DST
// register. That each PE has an XPE for activation, bias and rounding
// follows the published architecture; the order of the three steps, the
// rounding rule and the sigmoid approximation are this design's choices.
module engn_xpe
  import engn_pkg::*;
(
  input  data_t      din,
  input  data_t      bias,
  input  logic [4:0] shift,
  input  act_e       act,
  output data_t      dout
);

  data_t rounded;
  data_t biased;

  always_comb begin
    if (shift == 5'd0) begin
      rounded = din;
    end else begin
      // add half an output LSB, then shift arithmetically
      rounded = (din + (data_t'(1) <<< (shift - 5'd1))) >>> shift;
    end
    biased = rounded + bias;
    case (act)
      ACT_RELU:    dout = (biased < 0) ? '0 : biased;
      ACT_SIGMOID: dout = fx_hsigmoid(biased);
      default:     dout = biased;
    endcase
  end

endmodule
