// soma: leaky integrate-and-fire update of one neuron for one timestep.
//
//   u_t  = ps_t + (s_{t-1} ? 0 : alpha * u_{t-1})        (hard reset on a spike)
//   s_t  = (u_t >= th_f)
//   f'_t = (th_l <= u_t <= th_r)                          (surrogate-gradient mask)
//
// Structure as in the paper's soma diagram: one multiplier, one adder, three
// comparators and three multiplexers. The paper's equations use >= and <=
// while its diagram prints > and <; this module follows the equations.
// Purely combinational; the core registers around it.
module soma
  import eocas_pkg::*;
(
  input  fp16_t ps,       // ConvFP_t, the spatial input
  input  fp16_t u_prev,   // u_{t-1}
  input  logic  s_prev,   // s_{t-1}
  input  fp16_t alpha,
  input  fp16_t th_f,
  input  fp16_t th_l,
  input  fp16_t th_r,
  output fp16_t u,
  output logic  s,
  output logic  fmask
);

  fp16_t leak, temporal;

  fp16_mul u_mul (.a(alpha), .b(u_prev), .y(leak));
  assign temporal = s_prev ? FP16_ZERO : leak;
  fp16_add u_add (.a(ps), .b(temporal), .y(u));

  assign s     = !fp16_lt(u, th_f);
  assign fmask = !fp16_lt(u, th_l) && !fp16_lt(th_r, u);

endmodule
