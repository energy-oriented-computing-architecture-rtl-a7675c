// tb_mac_matrix: loads random weights into the 16x16 Mul-Add array, streams
// random FP16 input vectors and starting partial sums, and checks every row output
// against psum_init + sum over columns of x*w, exactly LATENCY = COLS+1
// cycles after the pixel entered. Values are multiples of 1/4 in [-2,2), so every sum is
// exact in FP16 whatever the order of addition. A second weight set checks
// that w_load replaces the weights.
module tb_mac_matrix;
  import tb_fp16_pkg::*;
  localparam int R = 16, C = 16, LAT = C + 1, N = 60;
  logic clk = 0, rst_n = 0, w_load = 0;
  logic [15:0] w_in [R][C];
  logic [15:0] x [C];
  logic [15:0] psum_init [R];
  logic [15:0] psum_out [R];
  logic [15:0] xv [N][C];
  logic [15:0] pi [N][R];
  int checks = 0, failures = 0;

  mac_matrix #(.ROWS(R), .COLS(C)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [15:0] rand_q();
    return r2h(real'(int'($urandom_range(15)) - 8) / 4.0);
  endfunction

  task automatic run_set();
    logic [15:0] w [R][C];
    for (int r = 0; r < R; r++) for (int c = 0; c < C; c++) w[r][c] = rand_q();
    for (int i = 0; i < N; i++) begin
      for (int c = 0; c < C; c++) xv[i][c] = rand_q();
      for (int r = 0; r < R; r++) pi[i][r] = rand_q();
    end
    @(negedge clk);
    w_load = 1; w_in = w;
    @(negedge clk);
    w_load = 0;
    for (int r = 0; r < R; r++) for (int c = 0; c < C; c++) w_in[r][c] = 16'h7BFF;
    for (int k = 0; k < N + LAT + 2; k++) begin
      for (int c = 0; c < C; c++) x[c] = (k < N) ? xv[k][c] : 16'h0;
      for (int r = 0; r < R; r++) psum_init[r] = (k < N) ? pi[k][r] : 16'h0;
      if (k >= LAT && k - LAT < N) begin
        int i;
        i = k - LAT;
        for (int r = 0; r < R; r++) begin
          real e;
          e = h2r(pi[i][r]);
          for (int c = 0; c < C; c++) e += h2r(xv[i][c]) * h2r(w[r][c]);
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
    for (int c = 0; c < C; c++) x[c] = 0;
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
