// wg_pe: one accumulating Mux-Add unit of the weight-gradient array.
//
// Accumulates dW += s ? du : 0 in its own FP16 register, so that one unit
// produces one weight gradient over a whole feature map. When the spike is 0
// the addition is skipped. init loads the accumulator (zero, or the gradient
// accumulated over earlier timesteps); en marks a valid input. The paper gives
// the Mux-Add operation of the WUP array; the local accumulator is this
// design's choice of mapping.
module wg_pe
  import eocas_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  init,
  input  fp16_t init_val,
  input  logic  en,
  input  logic  spike,
  input  fp16_t du,
  output fp16_t acc
);

  fp16_t sum;

  fp16_add u_add (.a(acc), .b(du), .y(sum));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)            acc <= FP16_ZERO;
    else if (init)         acc <= init_val;
    else if (en && spike)  acc <= sum;
  end

endmodule
