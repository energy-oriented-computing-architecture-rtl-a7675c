// tb_eocas_full: the end-to-end training sequence of tb_eocas_body.svh on the
// top at its default size (16x16 arrays, 34x34 padded input, 32x32 output,
// 3x3 kernel), with two timesteps and two 16-channel input tiles, i.e. a
// 32-to-16-channel slice of the evaluated CIFAR-100 layer. A watchdog ends the
// run if it hangs.
module tb_eocas_full;
  localparam int R = 16, C = 16, IN = 34, OUT = 32, K = 3, T = 2, NCT = 2;
  `include "tb_eocas_body.svh"

  eocas_top dut (.*);

  initial begin
    #20000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
