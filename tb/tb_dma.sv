// tb_dma: drives the DMA engine against the DRAM model (random grant stalls
// and read latency) and a word-addressed SRAM model on the mem port. Checks
// narrow and wide loads, a strided load that picks one channel out of 256-bit
// pixel words, narrow and wide stores, and that target, row and the
// all-rows flag reach the mem port.
module tb_dma;
  import eocas_pkg::*;
  logic clk = 0, rst_n, start = 0, busy, done;
  cmd_t cmd;
  logic dram_req, dram_we, dram_gnt, dram_rvalid;
  logic [31:0] dram_addr;
  logic [15:0] dram_wdata, dram_rdata;
  mem_req_t mem;
  logic [255:0] mem_rdata;
  logic [255:0] sram [64];
  int checks = 0, failures = 0;

  dma dut (.*);
  dram_model #(.WORDS(4096)) u_dram (
    .clk, .req(dram_req), .we(dram_we), .addr(dram_addr), .wdata(dram_wdata),
    .gnt(dram_gnt), .rvalid(dram_rvalid), .rdata(dram_rdata)
  );
  always #5 clk = ~clk;
  initial begin rst_n = 1; #1 rst_n = 0; #20 rst_n = 1; end

  // SRAM model: write immediately, read data one cycle later
  sram_target_e last_tg;
  logic [3:0]   last_row;
  logic         last_all;
  always @(posedge clk) begin
    if (mem.we) begin
      sram[mem.addr[5:0]] <= mem.wdata;
      last_tg <= mem.target; last_row <= mem.row; last_all <= mem.all_rows;
    end
    if (mem.re) mem_rdata <= sram[mem.addr[5:0]];
  end

  initial begin
    repeat (40000) @(posedge clk);
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

  task automatic go(op_e op, sram_target_e tg, int row, logic all, int da, int sa,
                    int n, int stride);
    @(negedge clk);
    cmd = '0;
    cmd.op = op; cmd.target = tg; cmd.row = 4'(row); cmd.all_rows = all;
    cmd.dram_addr = 32'(da); cmd.sram_addr = 16'(sa); cmd.words = 16'(n);
    cmd.dram_stride = 16'(stride);
    start = 1;
    @(negedge clk);
    start = 0;
    cmd = '0;
    while (!done) @(negedge clk);
  endtask

  initial begin
    for (int i = 0; i < 4096; i++) u_dram.mem[i] = 16'($urandom);
    for (int i = 0; i < 64; i++) sram[i] = {8{32'($urandom)}};
    cmd = '0;
    @(posedge rst_n);
    // narrow load
    go(OP_DMA_LOAD, T_FW_IN_S, 0, 0, 100, 3, 10, 0);
    for (int i = 0; i < 10; i++) ck(sram[3 + i] == {240'd0, u_dram.mem[100 + i]}, $sformatf("narrow load %0d", i));
    ck(last_tg == T_FW_IN_S, "narrow target");
    // wide load
    go(OP_DMA_LOAD, T_BP_IN_U, 0, 0, 500, 20, 5, 0);
    for (int i = 0; i < 5; i++)
      for (int b = 0; b < 16; b++)
        ck(sram[20 + i][16*b +: 16] == u_dram.mem[500 + 16*i + b], $sformatf("wide load %0d.%0d", i, b));
    // strided load of channel 5 into row 3, all-rows flag
    go(OP_DMA_LOAD, T_WU_IN_DU, 3, 1, 1000 + 5, 30, 6, 16);
    for (int i = 0; i < 6; i++) ck(sram[30 + i][15:0] == u_dram.mem[1005 + 16*i], $sformatf("strided load %0d", i));
    ck(last_tg == T_WU_IN_DU && last_row == 4'd3 && last_all, "row and all-rows flag");
    // narrow store
    go(OP_DMA_STORE, T_FW_OUT_S, 0, 0, 2000, 40, 8, 0);
    for (int i = 0; i < 8; i++) ck(u_dram.mem[2000 + i] == sram[40 + i][15:0], $sformatf("narrow store %0d", i));
    // wide store
    go(OP_DMA_STORE, T_FW_OUT_U, 0, 0, 3000, 50, 4, 0);
    for (int i = 0; i < 4; i++)
      for (int b = 0; b < 16; b++)
        ck(u_dram.mem[3000 + 16*i + b] == sram[50 + i][16*b +: 16], $sformatf("wide store %0d.%0d", i, b));
    ck(u_dram.stalls > 0, "DRAM stalled at least once");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
