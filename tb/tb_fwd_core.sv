// tb_fwd_core: runs the FWD core at a small size (4x4 array, 5x5 padded input,
// 3x3 output, 3x3 kernel) for two timesteps, each over two input-channel
// tiles, loading and reading every buffer through the mem port. Checks the
// partial sums of the first tile alone, then u, s and f' after each step
// against a reference: exact convolution (values are multiples of 1/8) and the
// soma update in reference FP16 arithmetic. Also checks the cycle count of one
// start against K*K*(OUT^2 + COLS + 6) + OUT^2 + 2.
module tb_fwd_core;
  import eocas_pkg::*;
  import tb_fp16_pkg::*;
  localparam int R = 4, C = 4, IN = 5, OUT = 3, K = 3, T = 2, NCT = 2;
  localparam int KK = K * K, PIX = OUT * OUT, IN2 = IN * IN;

  logic clk = 0, rst_n, start = 0, first_tile = 0, last_tile = 0, first_step = 0;
  logic [15:0] in_base = 0, w_base = 0;
  neuron_cfg_t cfg;
  logic busy, done;
  mem_req_t mem;
  logic [255:0] mem_rdata;
  int checks = 0, failures = 0;

  fwd_core #(.ROWS(R), .COLS(C), .IN_DIM(IN), .OUT_DIM(OUT), .KDIM(K),
             .S_DEPTH(NCT * IN2)) dut (.*);
  always #5 clk = ~clk;
  initial begin rst_n = 1; #1 rst_n = 0; #20 rst_n = 1; end

  `include "tb_mem_tasks.svh"

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic        spk [T][NCT*C][IN][IN];
  logic [15:0] w   [NCT*C][R][KK];
  logic [15:0] u_m [R][PIX];
  logic        s_m [R][PIX];

  initial begin
    logic [255:0] d;
    int cyc;
    mem = '0;
    cfg.alpha = r2h(0.75); cfg.beta = r2h(1.0);
    cfg.th_f = r2h(0.5); cfg.th_l = r2h(0.0); cfg.th_r = r2h(1.0);
    for (int t = 0; t < T; t++)
      for (int ch = 0; ch < NCT*C; ch++)
        for (int y = 0; y < IN; y++)
          for (int x = 0; x < IN; x++) spk[t][ch][y][x] = 1'($urandom);
    for (int ch = 0; ch < NCT*C; ch++)
      for (int m = 0; m < R; m++)
        for (int k = 0; k < KK; k++) w[ch][m][k] = r2h(real'(int'($urandom_range(8)) - 4) / 8.0);
    @(posedge rst_n);
    for (int t = 0; t < T; t++) begin
      for (int ct = 0; ct < NCT; ct++)
        for (int i = 0; i < IN2; i++) begin
          d = '0;
          for (int c = 0; c < C; c++) d[c] = spk[t][ct*C+c][i / IN][i % IN];
          mwrite(T_FW_IN_S, 0, ct*IN2 + i, d);
        end
      for (int ct = 0; ct < NCT; ct++) begin
        for (int m = 0; m < R; m++)
          for (int k = 0; k < KK; k++) begin
            d = '0;
            for (int c = 0; c < C; c++) d[16*c +: 16] = w[ct*C+c][m][k];
            mwrite(T_FW_IN_W, m, k, d);
          end
        first_tile = (ct == 0); last_tile = (ct == NCT - 1); first_step = (t == 0);
        in_base = 16'(ct * IN2);
        cyc = 0;
        fork
          run_start();
          begin @(negedge clk); @(negedge clk); while (busy) begin cyc++; @(negedge clk); end end
        join
        if (!last_tile) begin
          checks++;
          if (cyc != KK*(OUT*OUT + C + 6) + 1) begin
            failures++;
            $display("conv-only cycles %0d expected %0d", cyc, KK*(OUT*OUT + C + 6) + 1);
          end
        end
        // after the first tile the partial sums hold that tile's convolution
        if (ct == 0)
          for (int m = 0; m < R; m++)
            for (int i = 0; i < PIX; i++) begin
              real e;
              e = 0.0;
              for (int c = 0; c < C; c++)
                for (int k = 0; k < KK; k++)
                  if (spk[t][c][i / OUT + k / K][i % OUT + k % K]) e += h2r(w[c][m][k]);
              mread(T_FW_OUT_PS, m, i, d);
              chk(d[15:0], r2h(e), $sformatf("ps t%0d m%0d i%0d", t, m, i));
            end
      end
      for (int i = 0; i < PIX; i++) begin
        logic [255:0] du, ds, df;
        mread(T_FW_OUT_U, 0, i, du);
        mread(T_FW_OUT_S, 0, i, ds);
        mread(T_FW_OUT_F, 0, i, df);
        for (int m = 0; m < R; m++) begin
          real e;
          logic [15:0] eu;
          logic es, ef;
          e = 0.0;
          for (int ch = 0; ch < NCT*C; ch++)
            for (int k = 0; k < KK; k++)
              if (spk[t][ch][i / OUT + k / K][i % OUT + k % K]) e += h2r(w[ch][m][k]);
          eu = ref_add(r2h(e), (t == 0 || s_m[m][i]) ? 16'h0 : ref_mul(cfg.alpha, u_m[m][i]));
          es = h2r(eu) >= h2r(cfg.th_f);
          ef = (h2r(eu) >= h2r(cfg.th_l)) && (h2r(eu) <= h2r(cfg.th_r));
          u_m[m][i] = eu; s_m[m][i] = es;
          chk(du[16*m +: 16], eu, $sformatf("u t%0d m%0d i%0d", t, m, i));
          chk({15'd0, ds[m]}, {15'd0, es}, $sformatf("s t%0d m%0d i%0d", t, m, i));
          chk({15'd0, df[m]}, {15'd0, ef}, $sformatf("f t%0d m%0d i%0d", t, m, i));
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
