// tb_wg_matrix: initialises the 16x16 WG array with random gradients, streams
// random (du, spike word) pairs per row with en toggling, and checks every
// accumulator against init + sum of du[r] over inputs whose spike bit c is
// set. Values are multiples of 1/8 so every sum is exact. The result is checked
// two cycles after the last input (one input register, one accumulator).
module tb_wg_matrix;
  import tb_fp16_pkg::*;
  localparam int R = 16, C = 16, N = 40;
  logic clk = 0, rst_n = 0, init = 0, en = 0;
  logic [15:0] init_val [R][C];
  logic [15:0] du [R];
  logic [C-1:0] spikes [R];
  logic [15:0] acc [R][C];
  real model [R][C];
  int checks = 0, failures = 0;

  wg_matrix #(.ROWS(R), .COLS(C)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_all(string tag);
    for (int r = 0; r < R; r++)
      for (int c = 0; c < C; c++) begin
        checks++;
        if (!h_eq(acc[r][c], r2h(model[r][c]))) begin
          failures++;
          if (failures < 10)
            $display("%s (%0d,%0d): got %h expected %h", tag, r, c, acc[r][c], r2h(model[r][c]));
        end
      end
  endtask

  initial begin
    for (int r = 0; r < R; r++) begin
      du[r] = 0; spikes[r] = 0;
      for (int c = 0; c < C; c++) init_val[r][c] = 0;
    end
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int blk = 0; blk < 3; blk++) begin
      @(negedge clk);
      init = 1;
      for (int r = 0; r < R; r++)
        for (int c = 0; c < C; c++) begin
          init_val[r][c] = rand_small();
          model[r][c] = h2r(init_val[r][c]);
        end
      @(negedge clk);
      init = 0;
      for (int i = 0; i < N; i++) begin
        en = ($urandom_range(4) != 0);
        for (int r = 0; r < R; r++) begin
          du[r] = rand_small();
          spikes[r] = C'($urandom);
          if (en)
            for (int c = 0; c < C; c++) if (spikes[r][c]) model[r][c] += h2r(du[r]);
        end
        @(negedge clk);
      end
      en = 0;
      @(negedge clk);
      check_all("acc");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
