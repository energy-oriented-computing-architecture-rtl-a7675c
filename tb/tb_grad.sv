// tb_grad: checks the backward neuron update against the reference FP16
// arithmetic in the same order of operations:
//   a = alpha*du_next; ds = ps + (-u)*a; du = (s ? 0 : a) + ds*(f ? beta : 0).
module tb_grad;
  import tb_fp16_pkg::*;
  logic [15:0] ps, du_next, u, alpha, beta, du, ds;
  logic s, fmask;
  int checks = 0, failures = 0;

  grad dut (.*);

  task automatic check();
    logic [15:0] a, eds, edu;
    #1;
    a   = ref_mul(alpha, du_next);
    eds = ref_add(ps, ref_mul({~u[15], u[14:0]}, a));
    edu = ref_add(s ? 16'h0 : a, ref_mul(eds, fmask ? beta : 16'h0));
    checks++;
    if (!h_eq(du, edu) || !h_eq(ds, eds)) begin
      failures++;
      if (failures < 10)
        $display("ps=%h dun=%h u=%h s=%b f=%b: got du=%h ds=%h expected %h %h",
                 ps, du_next, u, s, fmask, du, ds, edu, eds);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    alpha = r2h(0.5); beta = r2h(2.0);
    ps = r2h(1.0); du_next = r2h(1.0); u = r2h(1.0); s = 0; fmask = 1;
    check();                      // a=0.5, ds=0.5, du=0.5+1.0
    s = 1; check();
    fmask = 0; check();
    for (int i = 0; i < 5000; i++) begin
      alpha   = r2h(real'($urandom_range(1023)) / 1024.0);
      beta    = rand_h(12, 17);
      ps      = rand_h(8, 18);
      du_next = rand_h(8, 18);
      u       = rand_h(8, 18);
      s       = 1'($urandom);
      fmask   = 1'($urandom);
      check();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
