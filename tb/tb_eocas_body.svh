// Shared body of the end-to-end testbenches. The including module defines
// R, C, IN, OUT, K, T, NCT (input-channel tiles) and then instantiates the top
// as dut, connected by name to the signals declared here.
//
// One layer is trained end to end through the DRAM port:
//   FWD  for t = 0..T-1, NCT input-channel tiles per step (partial sums carried
//        across tiles), storing u_t, s_t, f'_t to DRAM after each step;
//   BP   for t = T-1..0, loading du^{l+1}_t and the stored u, s, f' back, and
//        storing du^l_t;
//   WG   for each input-channel tile and every t, splitting du^l_t per channel
//        into the per-row SRAMs, and storing dW.
// Every stored word is compared with a reference computed here: convolutions
// in real arithmetic on values chosen so that they are exact in FP16, the
// neuron updates and the dW accumulation with the reference FP16 rounding in
// the same order as the design.

  import eocas_pkg::*;
  import tb_fp16_pkg::*;

  localparam int KK  = K * K;
  localparam int PIX = OUT * OUT;
  localparam int IN2 = IN * IN;
  // DRAM map (16-bit word addresses)
  localparam int A_S   = 0;                           // spikes s^{l-1}
  localparam int A_W   = A_S   + T * NCT * IN2;       // FWD weights
  localparam int A_WT  = A_W   + NCT * R * KK * 16;   // BP weights w'
  localparam int A_DUI = A_WT  + R * KK * 16;         // du^{l+1}
  localparam int A_U   = A_DUI + T * IN2 * 16;        // u^l
  localparam int A_SO  = A_U   + T * PIX * 16;        // s^l
  localparam int A_F   = A_SO  + T * PIX;             // f'^l
  localparam int A_DU  = A_F   + T * PIX;             // du^l
  localparam int A_DW  = A_DU  + T * PIX * 16;        // dW
  localparam int A_END = A_DW  + NCT * R * KK * 16;

  logic clk = 0, rst_n;
  // reset is asserted by an edge before the first clock edge
  initial begin
    rst_n = 1'b1;
    #0.25 rst_n = 1'b0;
  end
  logic cmd_valid = 0, cmd_ready, busy, done;
  cmd_t cmd;
  neuron_cfg_t cfg;
  logic dram_req, dram_we, dram_gnt, dram_rvalid;
  logic [31:0] dram_addr;
  logic [15:0] dram_wdata, dram_rdata;

  dram_model #(.WORDS(A_END)) u_dram (
    .clk, .req(dram_req), .we(dram_we), .addr(dram_addr), .wdata(dram_wdata),
    .gnt(dram_gnt), .rvalid(dram_rvalid), .rdata(dram_rdata)
  );

  always #1 clk = ~clk;

  int checks = 0, failures = 0;
  longint cycles = 0;
  always @(posedge clk) cycles++;

  // mechanism counters
  int n_skip = 0, n_fire = 0, n_reset = 0, n_mask1 = 0, n_mask0 = 0;
  int n_gate = 0, n_tile_acc = 0, n_wide = 0, n_stride = 0, n_bcast = 0;

  // reference data
  logic        spk  [T][NCT*C][IN][IN];
  logic [15:0] w    [NCT*C][R][KK];      // [input ch][output ch][kpos]
  logic [15:0] wt   [C][R][KK];          // BP: [du ch][output ch][kpos]
  logic [15:0] dui  [T][C][IN][IN];
  logic [15:0] u_r  [T][R][PIX];
  logic        s_r  [T][R][PIX];
  logic        f_r  [T][R][PIX];
  logic [15:0] du_r [T][R][PIX];
  logic [15:0] dw_r [NCT][R][C][KK];

  function automatic logic [15:0] q8(real lim);   // multiple of 1/8 in [-lim, lim]
    int n;
    n = int'(lim * 8.0);
    return r2h(real'(int'($urandom_range(2 * n)) - n) / 8.0);
  endfunction
  function automatic logic [15:0] q4(real lim);
    int n;
    n = int'(lim * 4.0);
    return r2h(real'(int'($urandom_range(2 * n)) - n) / 4.0);
  endfunction

  task automatic issue(cmd_t c);
    @(negedge clk);
    cmd = c;
    cmd_valid = 1;
    do @(posedge clk); while (!cmd_ready);
    @(negedge clk);
    cmd_valid = 0;
    do @(posedge clk); while (!done);
    if (c.op inside {OP_DMA_LOAD, OP_DMA_STORE}) begin
      if (target_is_wide(c.target)) n_wide++;
      if (c.dram_stride != 0) n_stride++;
      if (c.all_rows) n_bcast++;
    end
  endtask

  task automatic dma(op_e op, sram_target_e tg, int row, logic all, int daddr,
                     int saddr, int words, int stride = 0);
    cmd_t c;
    c = '0;
    c.op = op; c.target = tg; c.row = 4'(row); c.all_rows = all;
    c.dram_addr = 32'(daddr); c.sram_addr = 16'(saddr); c.words = 16'(words);
    c.dram_stride = 16'(stride);
    issue(c);
  endtask

  task automatic compute(op_e op, logic ft, logic lt, logic fs, int in_base, int w_base);
    cmd_t c;
    c = '0;
    c.op = op; c.first_tile = ft; c.last_tile = lt; c.first_step = fs;
    c.in_base = 16'(in_base); c.w_base = 16'(w_base);
    issue(c);
  endtask

  function automatic void chk(logic [15:0] got, logic [15:0] exp, string what);
    checks++;
    if (!h_eq(got, exp)) begin
      failures++;
      if (failures < 12) $display("%s: got %h expected %h", what, got, exp);
    end
  endfunction

  // ---------------- stimulus and reference ----------------
  task automatic build();
    for (int t = 0; t < T; t++)
      for (int ch = 0; ch < NCT * C; ch++)
        for (int y = 0; y < IN; y++)
          for (int x = 0; x < IN; x++) spk[t][ch][y][x] = ($urandom_range(99) < 40);
    for (int ch = 0; ch < NCT * C; ch++)
      for (int m = 0; m < R; m++)
        for (int k = 0; k < KK; k++) w[ch][m][k] = q8(0.5);
    for (int c = 0; c < C; c++)
      for (int m = 0; m < R; m++)
        for (int k = 0; k < KK; k++) wt[c][m][k] = q8(0.5);
    for (int t = 0; t < T; t++)
      for (int c = 0; c < C; c++)
        for (int y = 0; y < IN; y++)
          for (int x = 0; x < IN; x++) dui[t][c][y][x] = q4(0.5);
    // DRAM image
    for (int t = 0; t < T; t++)
      for (int ct = 0; ct < NCT; ct++)
        for (int y = 0; y < IN; y++)
          for (int x = 0; x < IN; x++) begin
            logic [15:0] wd;
            wd = '0;
            for (int c = 0; c < C; c++) wd[c] = spk[t][ct*C+c][y][x];
            u_dram.mem[A_S + (t*NCT + ct)*IN2 + y*IN + x] = wd;
          end
    for (int ct = 0; ct < NCT; ct++)
      for (int m = 0; m < R; m++)
        for (int k = 0; k < KK; k++)
          for (int c = 0; c < 16; c++)
            u_dram.mem[A_W + ((ct*R + m)*KK + k)*16 + c] = (c < C) ? w[ct*C+c][m][k] : 16'h0;
    for (int m = 0; m < R; m++)
      for (int k = 0; k < KK; k++)
        for (int c = 0; c < 16; c++)
          u_dram.mem[A_WT + (m*KK + k)*16 + c] = (c < C) ? wt[c][m][k] : 16'h0;
    for (int t = 0; t < T; t++)
      for (int y = 0; y < IN; y++)
        for (int x = 0; x < IN; x++)
          for (int c = 0; c < 16; c++)
            u_dram.mem[A_DUI + (t*IN2 + y*IN + x)*16 + c] = (c < C) ? dui[t][c][y][x] : 16'h0;
    // forward reference
    for (int t = 0; t < T; t++)
      for (int m = 0; m < R; m++)
        for (int p = 0; p < OUT; p++)
          for (int q = 0; q < OUT; q++) begin
            real ps;
            logic [15:0] up, un;
            logic sp;
            ps = 0.0;
            for (int ch = 0; ch < NCT * C; ch++)
              for (int k = 0; k < KK; k++)
                if (spk[t][ch][p + k / K][q + k % K]) ps += h2r(w[ch][m][k]);
            up = (t == 0) ? 16'h0 : u_r[t-1][m][p*OUT+q];
            sp = (t == 0) ? 1'b0 : s_r[t-1][m][p*OUT+q];
            un = ref_add(r2h(ps), sp ? 16'h0 : ref_mul(cfg.alpha, up));
            u_r[t][m][p*OUT+q] = un;
            s_r[t][m][p*OUT+q] = h2r(un) >= h2r(cfg.th_f);
            f_r[t][m][p*OUT+q] = (h2r(un) >= h2r(cfg.th_l)) && (h2r(un) <= h2r(cfg.th_r));
            if (sp) n_reset++;
          end
    // backward reference
    for (int t = T - 1; t >= 0; t--)
      for (int m = 0; m < R; m++)
        for (int p = 0; p < OUT; p++)
          for (int q = 0; q < OUT; q++) begin
            real ps;
            logic [15:0] a, ds, dn;
            int i;
            i = p*OUT + q;
            ps = 0.0;
            for (int c = 0; c < C; c++)
              for (int k = 0; k < KK; k++)
                ps += h2r(dui[t][c][p + k / K][q + k % K]) * h2r(wt[c][m][k]);
            dn = (t == T - 1) ? 16'h0 : du_r[t+1][m][i];
            a  = ref_mul(cfg.alpha, dn);
            ds = ref_add(r2h(ps), ref_mul({~u_r[t][m][i][15], u_r[t][m][i][14:0]}, a));
            du_r[t][m][i] = ref_add(s_r[t][m][i] ? 16'h0 : a,
                                    ref_mul(ds, f_r[t][m][i] ? cfg.beta : 16'h0));
            if (s_r[t][m][i] && dn[14:0] != 0) n_gate++;
          end
    // weight-gradient reference, same order as the design (t = T-1 .. 0)
    for (int ct = 0; ct < NCT; ct++)
      for (int m = 0; m < R; m++)
        for (int c = 0; c < C; c++)
          for (int k = 0; k < KK; k++) begin
            logic [15:0] acc;
            acc = 16'h0;
            for (int t = T - 1; t >= 0; t--)
              for (int p = 0; p < OUT; p++)
                for (int q = 0; q < OUT; q++)
                  if (spk[t][ct*C+c][p + k / K][q + k % K]) acc = ref_add(acc, du_r[t][m][p*OUT+q]);
            dw_r[ct][m][c][k] = acc;
          end
  endtask

  // ---------------- the run ----------------
  initial begin
    cmd = '0;
    cfg.alpha = r2h(0.5);
    cfg.beta  = r2h(0.75);
    cfg.th_f  = r2h(1.0);
    cfg.th_l  = r2h(0.5);
    cfg.th_r  = r2h(1.5);
    build();
    repeat (3) @(negedge clk);
    rst_n = 1;

    // FWD, t = 0 .. T-1
    for (int t = 0; t < T; t++) begin
      dma(OP_DMA_LOAD, T_FW_IN_S, 0, 0, A_S + t*NCT*IN2, 0, NCT*IN2);
      for (int ct = 0; ct < NCT; ct++) begin
        for (int m = 0; m < R; m++)
          dma(OP_DMA_LOAD, T_FW_IN_W, m, 0, A_W + (ct*R + m)*KK*16, 0, KK);
        compute(OP_FWD, ct == 0, ct == NCT - 1, t == 0, ct*IN2, 0);
        if (ct != 0) n_tile_acc++;
      end
      dma(OP_DMA_STORE, T_FW_OUT_U, 0, 0, A_U + t*PIX*16, 0, PIX);
      dma(OP_DMA_STORE, T_FW_OUT_S, 0, 0, A_SO + t*PIX, 0, PIX);
      dma(OP_DMA_STORE, T_FW_OUT_F, 0, 0, A_F + t*PIX, 0, PIX);
      for (int i = 0; i < PIX; i++)
        for (int m = 0; m < R; m++) begin
          logic sb, fb;
          chk(u_dram.mem[A_U + (t*PIX + i)*16 + m], u_r[t][m][i], $sformatf("u t%0d m%0d i%0d", t, m, i));
          sb = u_dram.mem[A_SO + t*PIX + i][m];
          fb = u_dram.mem[A_F + t*PIX + i][m];
          chk({15'd0, sb}, {15'd0, s_r[t][m][i]}, $sformatf("s t%0d m%0d i%0d", t, m, i));
          chk({15'd0, fb}, {15'd0, f_r[t][m][i]}, $sformatf("f t%0d m%0d i%0d", t, m, i));
          if (sb) n_fire++;
          if (fb) n_mask1++; else n_mask0++;
        end
      $display("FWD t=%0d done at cycle %0d", t, cycles);
    end
    // spike-skipped accumulations seen by the forward array
    for (int t = 0; t < T; t++)
      for (int ch = 0; ch < NCT * C; ch++)
        for (int y = 0; y < OUT; y++)
          for (int x = 0; x < OUT; x++) if (!spk[t][ch][y][x]) n_skip++;

    // BP, t = T-1 .. 0
    for (int m = 0; m < R; m++)
      dma(OP_DMA_LOAD, T_BP_IN_W, m, 0, A_WT + m*KK*16, 0, KK);
    for (int t = T - 1; t >= 0; t--) begin
      dma(OP_DMA_LOAD, T_BP_IN_DU, 0, 0, A_DUI + t*IN2*16, 0, IN2);
      dma(OP_DMA_LOAD, T_BP_IN_U,  0, 0, A_U + t*PIX*16, 0, PIX);
      dma(OP_DMA_LOAD, T_BP_IN_S,  0, 0, A_SO + t*PIX, 0, PIX);
      dma(OP_DMA_LOAD, T_BP_IN_F,  0, 0, A_F + t*PIX, 0, PIX);
      compute(OP_BP, 1'b1, 1'b1, t == T - 1, 0, 0);
      dma(OP_DMA_STORE, T_BP_OUT_DU, 0, 0, A_DU + t*PIX*16, 0, PIX);
      for (int i = 0; i < PIX; i++)
        for (int m = 0; m < R; m++)
          chk(u_dram.mem[A_DU + (t*PIX + i)*16 + m], du_r[t][m][i], $sformatf("du t%0d m%0d i%0d", t, m, i));
      $display("BP t=%0d done at cycle %0d", t, cycles);
    end

    // WG, per input-channel tile, t = T-1 .. 0
    for (int ct = 0; ct < NCT; ct++) begin
      for (int t = T - 1; t >= 0; t--) begin
        dma(OP_DMA_LOAD, T_WU_IN_S, 0, 1, A_S + (t*NCT + ct)*IN2, 0, IN2);
        for (int m = 0; m < R; m++)
          dma(OP_DMA_LOAD, T_WU_IN_DU, m, 0, A_DU + t*PIX*16 + m, 0, PIX, 16);
        compute(OP_WG, 1'b0, 1'b0, t == T - 1, 0, 0);
      end
      for (int m = 0; m < R; m++)
        dma(OP_DMA_STORE, T_WU_OUT_DW, m, 0, A_DW + (ct*R + m)*KK*16, 0, KK);
      for (int m = 0; m < R; m++)
        for (int k = 0; k < KK; k++)
          for (int c = 0; c < C; c++)
            chk(u_dram.mem[A_DW + ((ct*R + m)*KK + k)*16 + c], dw_r[ct][m][c][k],
                $sformatf("dW ct%0d m%0d c%0d k%0d", ct, m, c, k));
      $display("WG tile %0d done at cycle %0d", ct, cycles);
    end

    $display("mechanisms: skipped-adds=%0d fires=%0d resets=%0d mask1=%0d mask0=%0d grad-gated=%0d",
             n_skip, n_fire, n_reset, n_mask1, n_mask0, n_gate);
    $display("            tile-accumulations=%0d wide-dma=%0d strided-dma=%0d broadcast-dma=%0d dram-stalls=%0d",
             n_tile_acc, n_wide, n_stride, n_bcast, u_dram.stalls);
    if (n_skip == 0)        begin failures++; $display("never: skipped add"); end
    if (n_fire == 0)        begin failures++; $display("never: spike fired"); end
    if (n_reset == 0)       begin failures++; $display("never: reset after spike"); end
    if (n_mask1 == 0 || n_mask0 == 0) begin failures++; $display("never: both mask values"); end
    if (n_gate == 0)        begin failures++; $display("never: gradient gated by spike"); end
    if (n_tile_acc == 0)    begin failures++; $display("never: partial sums across tiles"); end
    if (n_wide == 0 || n_stride == 0 || n_bcast == 0) begin failures++; $display("never: a DMA mode"); end
    if (u_dram.stalls == 0) begin failures++; $display("never: DRAM stall"); end
    $display("total cycles %0d", cycles);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
