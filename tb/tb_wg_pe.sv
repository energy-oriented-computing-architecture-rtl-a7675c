// tb_wg_pe: accumulates random gated gradients in one WG unit and checks the
// accumulator after every input, after init and with en low.
module tb_wg_pe;
  import tb_fp16_pkg::*;
  logic clk = 0, rst_n = 0, init = 0, en = 0, spike = 0;
  logic [15:0] init_val = 0, du = 0, acc;
  logic [15:0] model;
  int checks = 0, failures = 0;

  wg_pe dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int blk = 0; blk < 8; blk++) begin
      init = 1; init_val = rand_h(10, 18); model = init_val;
      @(negedge clk);
      init = 0;
      for (int i = 0; i < 100; i++) begin
        en = ($urandom_range(3) != 0);
        spike = 1'($urandom);
        du = rand_h(8, 18);
        if (en && spike) model = ref_add(model, du);
        @(negedge clk);
        checks++;
        if (!h_eq(acc, model)) begin
          failures++;
          $display("blk %0d step %0d: got %h expected %h", blk, i, acc, model);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
