// tb_conv_ctrl: runs the sequencer at a small size (5x5 input, 3x3 output,
// 3x3 kernel, drain 4) and compares the full sequence of weight, input,
// partial-sum and neuron-pass addresses with an independently generated list,
// checks that w_load follows each w_re, and checks the busy cycle count,
// K*K*(2 + OUT^2 + DRAIN) + OUT^2 + 1, with and without the neuron pass.
module tb_conv_ctrl;
  localparam int IN = 5, OUT = 3, K = 3, DR = 4;
  logic clk = 0, rst_n, start = 0, post = 0;
  logic [15:0] in_base = 0, w_base = 0;
  logic busy, done, w_re, w_load, in_re, first_k, post_re;
  logic [15:0] w_addr, in_addr, ps_addr, post_addr;
  int checks = 0, failures = 0;

  conv_ctrl #(.IN_DIM(IN), .OUT_DIM(OUT), .KDIM(K), .DRAIN(DR), .AW(16)) dut (.*);
  always #5 clk = ~clk;
  initial begin rst_n = 1; #1 rst_n = 0; #20 rst_n = 1; end

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic ck(logic cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  task automatic run(logic do_post, int ib, int wb);
    int exp_w [$], exp_in [$], exp_ps [$], exp_fk [$], exp_post [$];
    int got_w [$], got_in [$], got_ps [$], got_fk [$], got_post [$];
    int nbusy, loads, prev_wre;
    for (int k = 0; k < K * K; k++) begin
      exp_w.push_back(wb + k);
      for (int p = 0; p < OUT; p++)
        for (int q = 0; q < OUT; q++) begin
          exp_in.push_back(ib + (p + k / K) * IN + q + k % K);
          exp_ps.push_back(p * OUT + q);
          exp_fk.push_back(k == 0);
        end
    end
    if (do_post) for (int i = 0; i < OUT * OUT; i++) exp_post.push_back(i);
    @(negedge clk);
    start = 1; post = do_post; in_base = 16'(ib); w_base = 16'(wb);
    @(negedge clk);
    start = 0; post = 0; in_base = 16'hFFFF; w_base = 16'hFFFF;
    nbusy = 0; loads = 0; prev_wre = 0;
    while (!done) begin
      if (busy) nbusy++;
      if (w_re) got_w.push_back(int'(w_addr));
      if (w_load) begin
        loads++;
        ck(prev_wre == 1, "w_load one cycle after w_re");
      end
      prev_wre = w_re;
      if (in_re) begin
        got_in.push_back(int'(in_addr));
        got_ps.push_back(int'(ps_addr));
        got_fk.push_back(int'(first_k));
      end
      if (post_re) got_post.push_back(int'(post_addr));
      @(negedge clk);
    end
    ck(nbusy == K*K*(2 + OUT*OUT + DR) + (do_post ? OUT*OUT : 0) + 1,
       $sformatf("busy cycles %0d", nbusy));
    ck(loads == K * K, "one weight load per kernel position");
    ck(got_w == exp_w, "weight address sequence");
    ck(got_in == exp_in, "input address sequence");
    ck(got_ps == exp_ps, "partial-sum address sequence");
    ck(got_fk == exp_fk, "first kernel flag");
    ck(got_post == exp_post, "neuron-pass sequence");
  endtask

  initial begin
    @(posedge rst_n);
    run(1'b1, 7, 2);
    run(1'b0, 0, 0);
    run(1'b1, 25, 9);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
