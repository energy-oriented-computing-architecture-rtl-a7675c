// wg_matrix: ROWS x COLS array of accumulating Mux-Add units for the weight
// gradient (dW = sum_t du_t (*) s_t).
//
// Unit (r,c) owns the gradient of the weight joining input channel c to output
// channel r at the kernel position being processed. Each row takes its own
// potential gradient du[r] (of output channel r at one output pixel) and its
// own spike word (the spikes of all input channels at the matching input
// pixel), as each row of the block diagram has its own du and spike SRAM.
// Unit (r,c) adds du[r] when spike bit c of row r is set.
// Timing: inputs are registered once, so an input presented with en in cycle
// k is in the accumulators at the end of cycle k+1. init loads init_val into
// all accumulators (and drops any input registered in the same cycle).
module wg_matrix
  import eocas_pkg::*;
#(
  parameter int unsigned ROWS = ARRAY_ROWS,
  parameter int unsigned COLS = ARRAY_COLS
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            init,
  input  fp16_t           init_val [ROWS][COLS],
  input  logic            en,
  input  fp16_t           du       [ROWS],
  input  logic [COLS-1:0] spikes   [ROWS],
  output fp16_t           acc      [ROWS][COLS]
);

  logic            en_q;
  fp16_t           du_q [ROWS];
  logic [COLS-1:0] s_q  [ROWS];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      en_q <= 1'b0;
      for (int r = 0; r < ROWS; r++) begin
        du_q[r] <= FP16_ZERO;
        s_q[r]  <= '0;
      end
    end else begin
      en_q <= en & ~init;
      for (int r = 0; r < ROWS; r++) begin
        du_q[r] <= du[r];
        s_q[r]  <= spikes[r];
      end
    end
  end

  for (genvar r = 0; r < ROWS; r++) begin : g_row
    for (genvar c = 0; c < COLS; c++) begin : g_col
      wg_pe u_pe (
        .clk      (clk),
        .rst_n    (rst_n),
        .init     (init),
        .init_val (init_val[r][c]),
        .en       (en_q),
        .spike    (s_q[r][c]),
        .du       (du_q[r]),
        .acc      (acc[r][c])
      );
    end
  end

endmodule
