// mac_matrix: ROWS x COLS weight-stationary array of Mul-Add units for the
// backward FP16 convolution (ConvBP = du (*) w').
//
// Row r computes output channel r, column c serves input channel c; all rows
// see the same input vector (one FP16 potential gradient per channel, for one
// pixel and one kernel position). Each row is a systolic multiply-accumulate
// chain: a partial sum enters at column 0 and gains x[c]*w[r][c] at every
// column. Input c is delayed c cycles to meet the partial sum as it passes.
// Timing: x and psum_init of a pixel presented in cycle k give that pixel's
// psum_out in cycle k + LATENCY (LATENCY = COLS + 1); one pixel per cycle.
// The 16x16 size is the paper's; chaining and skew are this design's choices,
// mirroring the forward adder matrix.
module mac_matrix
  import eocas_pkg::*;
#(
  parameter int unsigned ROWS = ARRAY_ROWS,
  parameter int unsigned COLS = ARRAY_COLS
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  w_load,
  input  fp16_t w_in      [ROWS][COLS],
  input  fp16_t x         [COLS],
  input  fp16_t psum_init [ROWS],
  output fp16_t psum_out  [ROWS]
);

  localparam int unsigned LATENCY = COLS + 1;

  fp16_t skew_q [COLS][COLS];
  fp16_t skewed [COLS];
  fp16_t init_q [ROWS];
  fp16_t chain  [ROWS][COLS+1];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int c = 0; c < COLS; c++)
        for (int i = 0; i < COLS; i++) skew_q[c][i] <= FP16_ZERO;
    end else begin
      for (int c = 0; c < COLS; c++) begin
        skew_q[c][0] <= x[c];
        for (int i = 1; i < COLS; i++) skew_q[c][i] <= skew_q[c][i-1];
      end
    end
  end

  always_comb begin
    skewed[0] = x[0];
    for (int c = 1; c < COLS; c++) skewed[c] = skew_q[c][c-1];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) for (int r = 0; r < ROWS; r++) init_q[r] <= FP16_ZERO;
    else        for (int r = 0; r < ROWS; r++) init_q[r] <= psum_init[r];
  end

  for (genvar r = 0; r < ROWS; r++) begin : g_row
    assign chain[r][0] = init_q[r];
    for (genvar c = 0; c < COLS; c++) begin : g_col
      mul_add_pe u_pe (
        .clk      (clk),
        .rst_n    (rst_n),
        .w_load   (w_load),
        .w_in     (w_in[r][c]),
        .x_in     (skewed[c]),
        .psum_in  (chain[r][c]),
        .psum_out (chain[r][c+1])
      );
    end
    assign psum_out[r] = chain[r][COLS];
  end

endmodule
