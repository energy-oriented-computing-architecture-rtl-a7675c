// tb_wup_core: runs the WUP core at a small size (4x4 array, 5x5 padded input,
// 3x3 output, 3x3 kernel) for three timesteps, writing the spike map to all
// rows at once and du per row through the mem port, and checks the stored dW
// of every (row, column, kernel position) after each step against the same
// accumulation in reference FP16 arithmetic, in the design's order (pixels in
// raster order, dW starting from zero on the first step).
module tb_wup_core;
  import eocas_pkg::*;
  import tb_fp16_pkg::*;
  localparam int R = 4, C = 4, IN = 5, OUT = 3, K = 3, T = 3;
  localparam int KK = K * K, PIX = OUT * OUT, IN2 = IN * IN;

  logic clk = 0, rst_n, start = 0, first_step = 0;
  logic [15:0] in_base = 0;
  logic busy, done;
  mem_req_t mem;
  logic [255:0] mem_rdata;
  int checks = 0, failures = 0;

  wup_core #(.ROWS(R), .COLS(C), .IN_DIM(IN), .OUT_DIM(OUT), .KDIM(K)) dut (.*);
  always #5 clk = ~clk;
  initial begin rst_n = 1; #1 rst_n = 0; #20 rst_n = 1; end

  `include "tb_mem_tasks.svh"

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic        spk [C][IN][IN];
  logic [15:0] du  [R][PIX];
  logic [15:0] dw  [R][C][KK];

  initial begin
    logic [255:0] d;
    mem = '0;
    @(posedge rst_n);
    for (int t = 0; t < T; t++) begin
      for (int i = 0; i < IN2; i++) begin
        d = '0;
        for (int c = 0; c < C; c++) begin
          spk[c][i / IN][i % IN] = 1'($urandom);
          d[c] = spk[c][i / IN][i % IN];
        end
        mwrite(T_WU_IN_S, 0, i, d, 1'b1);
      end
      for (int m = 0; m < R; m++)
        for (int i = 0; i < PIX; i++) begin
          du[m][i] = rand_h(10, 16);
          mwrite(T_WU_IN_DU, m, i, {240'd0, du[m][i]});
        end
      first_step = (t == 0);
      run_start();
      for (int m = 0; m < R; m++)
        for (int k = 0; k < KK; k++) begin
          mread(T_WU_OUT_DW, m, k, d);
          for (int c = 0; c < C; c++) begin
            if (t == 0) dw[m][c][k] = 16'h0;
            for (int i = 0; i < PIX; i++)
              if (spk[c][i / OUT + k / K][i % OUT + k % K]) dw[m][c][k] = ref_add(dw[m][c][k], du[m][i]);
            chk(d[16*c +: 16], dw[m][c][k], $sformatf("dW t%0d m%0d c%0d k%0d", t, m, c, k));
          end
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
