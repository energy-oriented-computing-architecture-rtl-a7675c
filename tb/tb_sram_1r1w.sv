// tb_sram_1r1w: writes random words, reads them back and checks the one-cycle
// read latency and read-old-data on a same-address read and write.
module tb_sram_1r1w;
  localparam int W = 24, D = 40;
  logic clk = 0, we = 0, re = 0;
  logic [5:0] waddr = 0, raddr = 0;
  logic [W-1:0] wdata = 0, rdata;
  logic [W-1:0] model [D];
  int checks = 0, failures = 0;

  sram_1r1w #(.WIDTH(W), .DEPTH(D)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < D; i++) begin
      @(negedge clk);
      we = 1; waddr = 6'(i); wdata = W'($urandom); model[i] = wdata;
    end
    @(negedge clk); we = 0;
    for (int n = 0; n < 400; n++) begin
      int a, b;
      logic [W-1:0] expv;
      a = $urandom_range(D - 1);
      b = $urandom_range(D - 1);
      @(negedge clk);
      re = 1; raddr = 6'(a);
      we = ($urandom_range(1) == 1); waddr = 6'(b); wdata = W'($urandom);
      expv = model[a];
      if (we) model[b] = wdata;
      @(negedge clk);
      re = 0; we = 0;
      checks++;
      if (rdata !== expv) begin
        failures++;
        $display("read %0d: got %h expected %h", a, rdata, expv);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
