// tb_eocas_top: end-to-end training of one small layer (4x4 array, 6x6 padded
// input, 4x4 output, 3x3 kernel, 3 timesteps, 2 input-channel tiles) through
// the command and DRAM ports; see tb_eocas_body.svh for the sequence and the
// checks. A watchdog ends the run if it hangs.
module tb_eocas_top;
  localparam int R = 4, C = 4, IN = 6, OUT = 4, K = 3, T = 3, NCT = 2;
  `include "tb_eocas_body.svh"

  eocas_top #(.ROWS(R), .COLS(C), .IN_DIM(IN), .OUT_DIM(OUT), .KDIM(K)) dut (.*);

  initial begin
    #4000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
