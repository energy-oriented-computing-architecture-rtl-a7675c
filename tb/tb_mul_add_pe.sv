// tb_mul_add_pe: streams random inputs and partial sums through one Mul-Add
// unit and checks psum_out = psum + round(x*w), one cycle after the partial
// sum arrives (two cycles after x).
module tb_mul_add_pe;
  import tb_fp16_pkg::*;
  logic clk = 0, rst_n = 0, w_load = 0;
  logic [15:0] w_in = 0, x_in = 0, psum_in = 0, psum_out;
  logic [15:0] xs [200];
  logic [15:0] ps [200];
  logic [15:0] w;
  int checks = 0, failures = 0;

  mul_add_pe dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    w = rand_h(12, 18);
    for (int i = 0; i < 200; i++) begin
      xs[i] = rand_h(10, 20);
      ps[i] = rand_h(10, 20);
    end
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk); w_load = 1; w_in = w;
    @(negedge clk); w_load = 0; w_in = 16'h7777;
    for (int i = 0; i <= 201; i++) begin
      x_in    = (i < 200) ? xs[i] : 16'h0;
      psum_in = (i >= 1 && i <= 200) ? ps[i-1] : 16'h0;
      if (i >= 2) begin
        logic [15:0] e;
        e = ref_add(ps[i-2], ref_mul(xs[i-2], w));
        checks++;
        if (!h_eq(psum_out, e)) begin
          failures++;
          $display("pixel %0d: got %h expected %h", i - 2, psum_out, e);
        end
      end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
