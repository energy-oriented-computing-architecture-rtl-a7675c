// tb_adder_matrix: loads random weights into the 16x16 Mux-Add array, streams
// random spike vectors and starting partial sums, and checks every row output
// against psum_init + sum over columns of spike*w, exactly LATENCY = COLS+1
// cycles after the pixel entered. Values are multiples of 1/8, so every sum is
// exact in FP16 whatever the order of addition. A second weight set checks
// that w_load replaces the weights.
module tb_adder_matrix;
  import tb_fp16_pkg::*;
  localparam int R = 16, C = 16, LAT = C + 1, N = 60;
  logic clk = 0, rst_n = 0, w_load = 0;
  logic [15:0] w_in [R][C];
  logic [C-1:0] spikes = '0;
  logic [15:0] psum_init [R];
  logic [15:0] psum_out [R];
  logic [C-1:0] sp [N];
  logic [15:0] pi [N][R];
  int checks = 0, failures = 0;

  adder_matrix #(.ROWS(R), .COLS(C)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_set();
    logic [15:0] w [R][C];
    for (int r = 0; r < R; r++) for (int c = 0; c < C; c++) w[r][c] = rand_small();
    for (int i = 0; i < N; i++) begin
      sp[i] = C'({$urandom, $urandom});
      for (int r = 0; r < R; r++) pi[i][r] = rand_small();
    end
    @(negedge clk);
    w_load = 1; w_in = w;
    @(negedge clk);
    w_load = 0;
    for (int r = 0; r < R; r++) for (int c = 0; c < C; c++) w_in[r][c] = 16'h7BFF;
    for (int k = 0; k < N + LAT + 2; k++) begin
      spikes = (k < N) ? sp[k] : '0;
      for (int r = 0; r < R; r++) psum_init[r] = (k < N) ? pi[k][r] : 16'h0;
      if (k >= LAT && k - LAT < N) begin
        int i;
        i = k - LAT;
        for (int r = 0; r < R; r++) begin
          real e;
          e = h2r(pi[i][r]);
          for (int c = 0; c < C; c++) if (sp[i][c]) e += h2r(w[r][c]);
          checks++;
          if (!h_eq(psum_out[r], r2h(e))) begin
            failures++;
            if (failures < 10)
              $display("pixel %0d row %0d: got %h expected %h", i, r, psum_out[r], r2h(e));
          end
        end
      end
      @(negedge clk);
    end
  endtask

  initial begin
    for (int r = 0; r < R; r++) begin
      psum_init[r] = 0;
      for (int c = 0; c < C; c++) w_in[r][c] = 0;
    end
    repeat (2) @(negedge clk);
    rst_n = 1;
    run_set();
    run_set();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
