// Shared helpers of the core testbenches: word access through a core's mem
// port (a read returns its word one cycle after re) and start/done handling.
// The including module declares clk, mem (mem_req_t), mem_rdata, start, done,
// checks and failures.

  task automatic mwrite(sram_target_e tg, int row, int addr, logic [255:0] data,
                        logic all = 1'b0);
    @(negedge clk);
    mem = '0;
    mem.we = 1'b1; mem.target = tg; mem.row = 4'(row); mem.addr = 16'(addr);
    mem.wdata = data; mem.all_rows = all;
    @(negedge clk);
    mem = '0;
  endtask

  task automatic mread(sram_target_e tg, int row, int addr, output logic [255:0] data);
    @(negedge clk);
    mem = '0;
    mem.re = 1'b1; mem.target = tg; mem.row = 4'(row); mem.addr = 16'(addr);
    @(negedge clk);
    mem = '0;
    data = mem_rdata;
  endtask

  task automatic run_start();
    @(negedge clk);
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    while (!done) @(negedge clk);
  endtask

  function automatic void chk(logic [15:0] got, logic [15:0] exp, string what);
    checks++;
    if (!h_eq(got, exp)) begin
      failures++;
      if (failures < 12) $display("%s: got %h expected %h", what, got, exp);
    end
  endfunction
