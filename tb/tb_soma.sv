// tb_soma: checks the LIF update against the reference FP16 arithmetic in the
// same order (alpha*u_prev rounded, then added to ps), with the spike and mask
// decided by real-valued comparisons of the reference potential. Directed
// cases put u exactly on th_f, th_l and th_r.
module tb_soma;
  import tb_fp16_pkg::*;
  logic [15:0] ps, u_prev, alpha, th_f, th_l, th_r, u;
  logic s_prev, s, fmask;
  int checks = 0, failures = 0;

  soma dut (.*);

  task automatic check();
    logic [15:0] eu;
    logic es, ef;
    #1;
    eu = ref_add(ps, s_prev ? 16'h0 : ref_mul(alpha, u_prev));
    es = h2r(eu) >= h2r(th_f);
    ef = (h2r(eu) >= h2r(th_l)) && (h2r(eu) <= h2r(th_r));
    checks++;
    if (!h_eq(u, eu) || s !== es || fmask !== ef) begin
      failures++;
      if (failures < 10)
        $display("ps=%h u_prev=%h s_prev=%b: got u=%h s=%b f=%b expected %h %b %b",
                 ps, u_prev, s_prev, u, s, fmask, eu, es, ef);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    alpha = r2h(0.5); th_f = r2h(1.0); th_l = r2h(0.5); th_r = r2h(1.5);
    // exactly on the thresholds
    ps = r2h(1.0);  u_prev = 0; s_prev = 0; check();
    ps = r2h(0.5);  check();
    ps = r2h(1.5);  check();
    ps = r2h(0.25); u_prev = r2h(1.5); check();   // 0.25 + 0.75 = 1.0
    s_prev = 1; check();                           // reset: u = 0.25
    for (int i = 0; i < 5000; i++) begin
      alpha  = r2h(real'($urandom_range(1023)) / 1024.0);
      th_f   = r2h(real'($urandom_range(64)) / 32.0);
      th_l   = r2h(h2r(th_f) - real'($urandom_range(16)) / 32.0);
      th_r   = r2h(h2r(th_f) + real'($urandom_range(16)) / 32.0);
      ps     = rand_h(10, 16);
      u_prev = rand_h(10, 16);
      s_prev = 1'($urandom);
      check();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
