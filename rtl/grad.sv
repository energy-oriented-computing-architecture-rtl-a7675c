// grad: backward-through-time update of one neuron's gradients.
//
//   a     = alpha * du_{t+1}
//   ds_t  = ps_t - u_t * a                                 (spike gradient)
//   du_t  = (s_t ? 0 : a) + ds_t * (f'_t ? beta : 0)       (potential gradient)
//
// ps_t is the backward convolution ConvBP_t. The paper's grad diagram takes
// alpha*du_{t+1} as a ready input and counts two multipliers; here the leak
// product is formed inside the unit from du_{t+1}, which adds a third
// multiplier, so that the unit's output du_t can be fed straight back as the
// next step's input. Otherwise the structure follows the diagram: the sign of
// u_t is flipped, one adder forms ds_t, a multiplexer selects beta or 0 for
// the mask, and a multiplexer selects 0 or alpha*du_{t+1} by the spike.
// Purely combinational.
module grad
  import eocas_pkg::*;
(
  input  fp16_t ps,       // ConvBP_t
  input  fp16_t du_next,  // du_{t+1}
  input  fp16_t u,        // u_t
  input  logic  s,        // s_t
  input  logic  fmask,    // f'(u_t)
  input  fp16_t alpha,
  input  fp16_t beta,
  output fp16_t du,       // du_t
  output fp16_t ds        // ds_t
);

  fp16_t a_du, xprod, scale, spatial, temporal;

  fp16_mul u_leak  (.a(alpha), .b(du_next), .y(a_du));
  fp16_mul u_cross (.a(fp16_neg(u)), .b(a_du), .y(xprod));
  fp16_add u_ds    (.a(ps), .b(xprod), .y(ds));

  assign scale    = fmask ? beta : FP16_ZERO;
  assign temporal = s ? FP16_ZERO : a_du;
  fp16_mul u_scale (.a(ds), .b(scale), .y(spatial));
  fp16_add u_du    (.a(temporal), .b(spatial), .y(du));

endmodule
