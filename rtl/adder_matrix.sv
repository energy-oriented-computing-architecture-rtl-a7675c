// adder_matrix: ROWS x COLS weight-stationary array of Mux-Add units for the
// forward spike convolution (ConvFP = s (*) w).
//
// Row r computes output channel r, column c serves input channel c. All rows
// see the same spike vector (one spike per input channel, for one pixel and
// one kernel position), as in the block diagram where the single spike SRAM
// feeds every row. Each row is a systolic chain: a partial sum enters at
// column 0 and gains w[r][c] at every column whose spike is 1, so that a row
// adds the sixteen weighted spikes of one pixel to the partial sum it was
// given. The spike of column c is delayed c cycles so it meets the partial sum
// as it passes.
// Timing: spikes and psum_init of a pixel presented in cycle k give that
// pixel's psum_out in cycle k + LATENCY (LATENCY = COLS + 1); one new pixel
// per cycle. w_load copies w_in into all weight registers at once.
// The 16x16 size is the paper's; the chained row, the skew and the injection
// of the previous partial sum at column 0 are this design's choices.
module adder_matrix
  import eocas_pkg::*;
#(
  parameter int unsigned ROWS = ARRAY_ROWS,
  parameter int unsigned COLS = ARRAY_COLS
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            w_load,
  input  fp16_t           w_in      [ROWS][COLS],
  input  logic [COLS-1:0] spikes,
  input  fp16_t           psum_init [ROWS],
  output fp16_t           psum_out  [ROWS]
);

  localparam int unsigned LATENCY = COLS + 1;

  // skew[c][i]: spike of column c delayed i+1 cycles
  logic  [COLS-1:0] skewed;
  logic  [COLS-1:0] skew_q [COLS];
  fp16_t            init_q [ROWS];
  fp16_t            chain  [ROWS][COLS+1];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int c = 0; c < COLS; c++) skew_q[c] <= '0;
    end else begin
      for (int c = 0; c < COLS; c++) begin
        skew_q[c][0] <= spikes[c];
        for (int i = 1; i < COLS; i++) skew_q[c][i] <= skew_q[c][i-1];
      end
    end
  end

  always_comb begin
    skewed[0] = spikes[0];
    for (int c = 1; c < COLS; c++) skewed[c] = skew_q[c][c-1];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) for (int r = 0; r < ROWS; r++) init_q[r] <= FP16_ZERO;
    else        for (int r = 0; r < ROWS; r++) init_q[r] <= psum_init[r];
  end

  for (genvar r = 0; r < ROWS; r++) begin : g_row
    assign chain[r][0] = init_q[r];
    for (genvar c = 0; c < COLS; c++) begin : g_col
      mux_add_pe u_pe (
        .clk      (clk),
        .rst_n    (rst_n),
        .w_load   (w_load),
        .w_in     (w_in[r][c]),
        .spike_in (skewed[c]),
        .psum_in  (chain[r][c]),
        .psum_out (chain[r][c+1])
      );
    end
    assign psum_out[r] = chain[r][COLS];
  end

endmodule
