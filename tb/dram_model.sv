// dram_model: behavioural model of the external DRAM for the testbenches.
// 16-bit words. A request is granted at random (about three cycles in four),
// so requests stall; a granted read returns its word with rvalid 1 to 3
// cycles later. One read is outstanding at a time, as the DMA issues them.
module dram_model #(
  parameter int unsigned WORDS = 1 << 20
) (
  input  logic        clk,
  input  logic        req,
  input  logic        we,
  input  logic [31:0] addr,
  input  logic [15:0] wdata,
  output logic        gnt,
  output logic        rvalid,
  output logic [15:0] rdata
);
  logic [15:0] mem [WORDS];
  int          wait_cnt = 0;
  logic        pending = 1'b0;
  logic [15:0] pdata;
  int          stalls = 0;

  // the grant is drawn once per cycle, on the falling edge
  logic gnt_q = 1'b0;
  always @(negedge clk) gnt_q = ($urandom_range(3) != 0);
  assign gnt = req && !pending && gnt_q;

  initial begin
    rvalid = 1'b0;
    rdata  = '0;
  end

  always @(posedge clk) begin
    rvalid <= 1'b0;
    if (pending) begin
      if (wait_cnt == 0) begin
        rvalid  <= 1'b1;
        rdata   <= pdata;
        pending <= 1'b0;
      end else wait_cnt <= wait_cnt - 1;
    end
    if (req && !gnt) stalls <= stalls + 1;
    if (req && gnt) begin
      if (we) mem[addr] <= wdata;
      else begin
        pdata    <= mem[addr];
        pending  <= 1'b1;
        wait_cnt <= int'($urandom_range(2));
      end
    end
  end
endmodule
