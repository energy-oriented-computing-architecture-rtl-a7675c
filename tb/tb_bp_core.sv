// tb_bp_core: runs the BP core at a small size (4x4 array, 5x5 padded input,
// 3x3 output, 3x3 kernel) for two timesteps in descending order, loading
// du^{l+1}, w', u, s and f' through the mem port. Checks the partial sums
// (exact convolution: values are multiples of 1/4 and 1/8) and du_t after
// each step against the grad update in reference FP16 arithmetic, with
// du_{t+1} = 0 on the first step.
module tb_bp_core;
  import eocas_pkg::*;
  import tb_fp16_pkg::*;
  localparam int R = 4, C = 4, IN = 5, OUT = 3, K = 3, T = 2;
  localparam int KK = K * K, PIX = OUT * OUT, IN2 = IN * IN;

  logic clk = 0, rst_n, start = 0, first_tile = 1, last_tile = 1, first_step = 0;
  logic [15:0] in_base = 0, w_base = 0;
  neuron_cfg_t cfg;
  logic busy, done;
  mem_req_t mem;
  logic [255:0] mem_rdata;
  int checks = 0, failures = 0;

  bp_core #(.ROWS(R), .COLS(C), .IN_DIM(IN), .OUT_DIM(OUT), .KDIM(K)) dut (.*);
  always #5 clk = ~clk;
  initial begin rst_n = 1; #1 rst_n = 0; #20 rst_n = 1; end

  `include "tb_mem_tasks.svh"

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [15:0] dui [C][IN][IN];
  logic [15:0] wt  [C][R][KK];
  logic [15:0] u   [R][PIX];
  logic        s   [R][PIX];
  logic        f   [R][PIX];
  logic [15:0] dun [R][PIX];

  initial begin
    logic [255:0] d;
    mem = '0;
    cfg.alpha = r2h(0.75); cfg.beta = r2h(1.5);
    cfg.th_f = 0; cfg.th_l = 0; cfg.th_r = 0;
    for (int c = 0; c < C; c++)
      for (int m = 0; m < R; m++)
        for (int k = 0; k < KK; k++) wt[c][m][k] = r2h(real'(int'($urandom_range(8)) - 4) / 8.0);
    @(posedge rst_n);
    for (int m = 0; m < R; m++)
      for (int k = 0; k < KK; k++) begin
        d = '0;
        for (int c = 0; c < C; c++) d[16*c +: 16] = wt[c][m][k];
        mwrite(T_BP_IN_W, m, k, d);
      end
    for (int t = T - 1; t >= 0; t--) begin
      for (int c = 0; c < C; c++)
        for (int y = 0; y < IN; y++)
          for (int x = 0; x < IN; x++) dui[c][y][x] = r2h(real'(int'($urandom_range(8)) - 4) / 4.0);
      for (int i = 0; i < IN2; i++) begin
        d = '0;
        for (int c = 0; c < C; c++) d[16*c +: 16] = dui[c][i / IN][i % IN];
        mwrite(T_BP_IN_DU, 0, i, d);
      end
      for (int i = 0; i < PIX; i++) begin
        logic [255:0] du_, ds_, df_;
        du_ = '0; ds_ = '0; df_ = '0;
        for (int m = 0; m < R; m++) begin
          u[m][i] = rand_h(12, 16);
          s[m][i] = 1'($urandom);
          f[m][i] = 1'($urandom);
          du_[16*m +: 16] = u[m][i];
          ds_[m] = s[m][i];
          df_[m] = f[m][i];
        end
        mwrite(T_BP_IN_U, 0, i, du_);
        mwrite(T_BP_IN_S, 0, i, ds_);
        mwrite(T_BP_IN_F, 0, i, df_);
      end
      first_step = (t == T - 1);
      run_start();
      for (int i = 0; i < PIX; i++) begin
        logic [255:0] dd;
        mread(T_BP_OUT_DU, 0, i, dd);
        for (int m = 0; m < R; m++) begin
          real e;
          logic [15:0] a, ds, edu;
          logic [255:0] pw;
          e = 0.0;
          for (int c = 0; c < C; c++)
            for (int k = 0; k < KK; k++)
              e += h2r(dui[c][i / OUT + k / K][i % OUT + k % K]) * h2r(wt[c][m][k]);
          mread(T_BP_OUT_PS, m, i, pw);
          chk(pw[15:0], r2h(e), $sformatf("ps t%0d m%0d i%0d", t, m, i));
          a   = ref_mul(cfg.alpha, first_step ? 16'h0 : dun[m][i]);
          ds  = ref_add(r2h(e), ref_mul({~u[m][i][15], u[m][i][14:0]}, a));
          edu = ref_add(s[m][i] ? 16'h0 : a, ref_mul(ds, f[m][i] ? cfg.beta : 16'h0));
          chk(dd[16*m +: 16], edu, $sformatf("du t%0d m%0d i%0d", t, m, i));
          dun[m][i] = edu;
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
