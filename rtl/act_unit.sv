// act_unit: activation and truncation stage of a layer.
//
// Each of N lanes takes a 32-bit accumulator (12-bit activations times Q0.7
// weights, plus the bias), shifts it right by W_FRAC to get back to the
// activation scale, applies ReLU when RELU=1 (linear otherwise) and
// saturates to the signed 12-bit range. Purely combinational.
//
// The paper gives the stage (activation, then "truncated back to 12 bits")
// and the widths; the shift amount and saturation instead of wrap-around are
// this design's choices.
module act_unit
  import ccd_pkg::*;
#(
  parameter int N    = 1,
  parameter bit RELU = 1'b1
) (
  input  acc_t acc [N],
  output act_t y   [N]
);
  localparam acc_t MAXV = acc_t'((1 <<< (DW-1)) - 1);
  localparam acc_t MINV = -acc_t'(1 <<< (DW-1));

  always_comb begin
    for (int k = 0; k < N; k++) begin
      acc_t s;
      s = acc[k] >>> W_FRAC;
      if (RELU && s < 0) s = '0;
      if (s > MAXV)      y[k] = act_t'(MAXV);
      else if (s < MINV) y[k] = act_t'(MINV);
      else               y[k] = act_t'(s);
    end
  end
endmodule
