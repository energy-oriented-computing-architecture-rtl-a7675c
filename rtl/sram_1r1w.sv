// sram_1r1w: on-chip SRAM buffer with one write port and one read port.
//
// Every buffer of the accelerator (spike, weight, partial-sum, potential and
// gradient SRAMs) is an instance of this module. A write takes effect at the
// clock edge; a read returns the word one cycle after re is asserted, the
// timing of a synchronous SRAM macro. A read and a write to the same address
// in the same cycle return the old word. The array is not reset: contents are
// loaded before they are read. The paper sizes its SRAMs but gives no port
// structure; one read and one write port is this design's choice, so that a
// partial sum can be read and written back in the same cycle.
module sram_1r1w #(
  parameter int unsigned WIDTH = 16,
  parameter int unsigned DEPTH = 1024,
  parameter int unsigned AW    = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             clk,
  input  logic             we,
  input  logic [AW-1:0]    waddr,
  input  logic [WIDTH-1:0] wdata,
  input  logic             re,
  input  logic [AW-1:0]    raddr,
  output logic [WIDTH-1:0] rdata
);

  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) rdata <= mem[raddr];
  end

  // An access beyond the array is a sequencing error upstream.
  assert property (@(posedge clk) we |-> (32'(waddr) < DEPTH))
    else $error("sram_1r1w: write address %0d out of range", waddr);
  assert property (@(posedge clk) re |-> (32'(raddr) < DEPTH))
    else $error("sram_1r1w: read address %0d out of range", raddr);

endmodule
