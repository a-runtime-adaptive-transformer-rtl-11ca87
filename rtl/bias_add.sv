// bias_add: bias addition with optional ReLU, the element operation of the
// bias-add units.
//
// out = relu_en ? max(0, sat(in + bias)) : sat(in + bias), in Q7.8 with
// saturation at the range limits. Purely combinational; the processing
// modules and the controller instantiate one per value they finish per
// clock (Q/K/V bias in each head, the FFN1 and FFN3 output bias, and the
// FFN2 output bias followed by ReLU). The add-then-ReLU order follows the
// source's third bias-add algorithm; saturation is this design's choice.
module bias_add
  import adaptor_pkg::*;
(
  input  fx_t  in_v,
  input  fx_t  bias,
  input  logic relu_en,
  output fx_t  out_v
);
  fx_t s;
  always_comb begin
    s = sat_fx(64'(in_v) + 64'(bias));
    out_v = (relu_en && s < 0) ? fx_t'(0) : s;
  end
endmodule
