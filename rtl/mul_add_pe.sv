// mul_add_pe: one Mul-Add unit of the backward FP16-convolution array.
//
// Holds a stationary FP16 weight, a 16-bit input register and a 16-bit
// partial-sum register. Each cycle it multiplies the input registered in the
// previous cycle by the weight and adds the product to the partial sum
// arriving from the left neighbour (two FP16 roundings: product, then sum).
// Units are chained along a row like the forward Mux-Add units, so psum_in
// must arrive one cycle after x_in. The paper specifies FP16 Mul-Add units;
// the chaining and register placement are this design's choice.
module mul_add_pe
  import eocas_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  w_load,
  input  fp16_t w_in,
  input  fp16_t x_in,
  input  fp16_t psum_in,
  output fp16_t psum_out
);

  fp16_t w_q, x_q, prod, sum;

  fp16_mul u_mul (.a(x_q), .b(w_q), .y(prod));
  fp16_add u_add (.a(psum_in), .b(prod), .y(sum));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      w_q      <= FP16_ZERO;
      x_q      <= FP16_ZERO;
      psum_out <= FP16_ZERO;
    end else begin
      if (w_load) w_q <= w_in;
      x_q      <= x_in;
      psum_out <= sum;
    end
  end

endmodule
