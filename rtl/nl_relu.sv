// nl_relu -- nonlinear unit on the output path.
//
// Applies the rectified linear function to NPE fp32 values at once: a value
// with the sign bit set (negative, or -0) becomes +0, others pass. With en
// low the values pass unchanged (for layers whose activation is applied
// elsewhere, or partial results).
//
// Interface: en, din -> dout. Timing: combinational.
//
// From the source design: an "NL" stage after the global output feature
// buffer. Own choice: ReLU as the function (the activation of the networks
// evaluated) and the bypass.
module nl_relu #(
  parameter int unsigned NPE = 8
) (
  input  logic                 en,
  input  logic [NPE-1:0][31:0] din,
  output logic [NPE-1:0][31:0] dout
);
  always_comb
    for (int k = 0; k < NPE; k++)
      dout[k] = (en && din[k][31]) ? 32'd0 : din[k];
endmodule
