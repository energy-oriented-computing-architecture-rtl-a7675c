// mux_add_pe: one Mux-Add unit of the forward spike-convolution array.
//
// Holds a stationary FP16 weight, a 1-bit spike register and a 16-bit
// partial-sum register, as the paper describes the unit. Each cycle the spike
// registered in the previous cycle selects whether the weight is added to the
// partial sum arriving from the left neighbour; when the spike is 0 the
// addition is skipped and the partial sum passes through unchanged. Units are
// chained along a row (the chain is this design's reading of the row wiring
// in the block diagram), so psum_in must arrive one cycle after spike_in.
//   w_load     : capture w_in into the weight register
//   spike_in   : spike of this column, registered
//   psum_in    : partial sum from the left, aligned with the registered spike
//   psum_out   : registered partial sum to the right
module mux_add_pe
  import eocas_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  w_load,
  input  fp16_t w_in,
  input  logic  spike_in,
  input  fp16_t psum_in,
  output fp16_t psum_out
);

  fp16_t w_q;
  logic  s_q;
  fp16_t sum;

  fp16_add u_add (.a(psum_in), .b(w_q), .y(sum));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      w_q      <= FP16_ZERO;
      s_q      <= 1'b0;
      psum_out <= FP16_ZERO;
    end else begin
      if (w_load) w_q <= w_in;
      s_q      <= spike_in;
      psum_out <= s_q ? sum : psum_in;
    end
  end

endmodule
