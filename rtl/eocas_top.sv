// eocas_top: SNN training accelerator with a forward (FWD) core and a backward
// (BWD) core, the latter made of the backward-propagation part (bp_core) and
// the weight-update part (wup_core), plus a DMA engine to the external DRAM.
//
// The host drives the chip one command at a time (cmd_valid/cmd_ready; a
// command is accepted when cmd_valid and cmd_ready are both high, and the
// next one only after done). Commands:
//   OP_DMA_LOAD / OP_DMA_STORE  move words between DRAM and any SRAM
//   OP_FWD  one timestep of spike convolution + soma     (fwd_core)
//   OP_BP   one timestep of FP16 convolution + grad       (bp_core)
//   OP_WG   one timestep of weight-gradient accumulation  (wup_core)
// A layer is trained by FWD for t = 1..T (storing u, s, f' of every step),
// BP for t = T..1 (loading them back), and WG for every t. Channel tiles of
// more than 16 channels are sequenced by the host with first_tile/last_tile
// and the SRAM base addresses. The neuron constants come in on cfg.
// The DRAM is external: its port is brought out (see dma for the protocol).
// The FWD/BWD split, the three 16x16 arrays and the soma/grad units follow the
// paper; the command set and host sequencing are this design's own.
// The one-unit-busy assertion is disabled during reset, so lint sees rst_n
// used both asynchronously and synchronously; that is intended.
module eocas_top
  import eocas_pkg::*;
#(
  parameter int unsigned ROWS       = ARRAY_ROWS,
  parameter int unsigned COLS       = ARRAY_COLS,
  parameter int unsigned IN_DIM     = eocas_pkg::DEF_IN_DIM,
  parameter int unsigned OUT_DIM    = eocas_pkg::DEF_OUT_DIM,
  parameter int unsigned KDIM       = eocas_pkg::DEF_KDIM,
  parameter int unsigned FW_S_DEPTH = 2 * IN_DIM * IN_DIM
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        cmd_valid,
  output logic        cmd_ready,
  input  cmd_t        cmd,
  input  neuron_cfg_t cfg,
  output logic        busy,
  output logic        done,
  // external DRAM
  output logic        dram_req,
  output logic        dram_we,
  output logic [31:0] dram_addr,
  output logic [15:0] dram_wdata,
  input  logic        dram_gnt,
  input  logic        dram_rvalid,
  input  logic [15:0] dram_rdata
);

  logic accept;
  logic dma_busy, fwd_busy, bp_busy, wup_busy;
  logic dma_done, fwd_done, bp_done, wup_done;
  logic launch_q;

  assign busy      = dma_busy | fwd_busy | bp_busy | wup_busy | launch_q;
  assign cmd_ready = !busy;
  assign accept    = cmd_valid && cmd_ready;
  assign done      = dma_done | fwd_done | bp_done | wup_done;

  // start pulses reach the units in the accept cycle; launch_q covers the
  // cycle before their busy flags rise
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) launch_q <= 1'b0;
    else        launch_q <= accept;
  end

  mem_req_t     mem;
  logic [255:0] mem_rdata, fwd_rdata, bp_rdata, wup_rdata;
  sram_target_e rd_target_q;

  dma u_dma (
    .clk, .rst_n,
    .start(accept && (cmd.op == OP_DMA_LOAD || cmd.op == OP_DMA_STORE)),
    .cmd, .busy(dma_busy), .done(dma_done),
    .dram_req, .dram_we, .dram_addr, .dram_wdata, .dram_gnt, .dram_rvalid, .dram_rdata,
    .mem, .mem_rdata
  );

  always_ff @(posedge clk) if (mem.re) rd_target_q <= mem.target;

  always_comb begin
    unique case (rd_target_q)
      T_FW_IN_S, T_FW_IN_W, T_FW_OUT_PS, T_FW_OUT_U, T_FW_OUT_S, T_FW_OUT_F:
        mem_rdata = fwd_rdata;
      T_WU_IN_S, T_WU_IN_DU, T_WU_OUT_DW:
        mem_rdata = wup_rdata;
      default:
        mem_rdata = bp_rdata;
    endcase
  end

  fwd_core #(
    .ROWS(ROWS), .COLS(COLS), .IN_DIM(IN_DIM), .OUT_DIM(OUT_DIM), .KDIM(KDIM),
    .S_DEPTH(FW_S_DEPTH)
  ) u_fwd (
    .clk, .rst_n,
    .start(accept && cmd.op == OP_FWD),
    .first_tile(cmd.first_tile), .last_tile(cmd.last_tile), .first_step(cmd.first_step),
    .in_base(cmd.in_base), .w_base(cmd.w_base), .cfg,
    .busy(fwd_busy), .done(fwd_done),
    .mem, .mem_rdata(fwd_rdata)
  );

  bp_core #(
    .ROWS(ROWS), .COLS(COLS), .IN_DIM(IN_DIM), .OUT_DIM(OUT_DIM), .KDIM(KDIM)
  ) u_bp (
    .clk, .rst_n,
    .start(accept && cmd.op == OP_BP),
    .first_tile(cmd.first_tile), .last_tile(cmd.last_tile), .first_step(cmd.first_step),
    .in_base(cmd.in_base), .w_base(cmd.w_base), .cfg,
    .busy(bp_busy), .done(bp_done),
    .mem, .mem_rdata(bp_rdata)
  );

  wup_core #(
    .ROWS(ROWS), .COLS(COLS), .IN_DIM(IN_DIM), .OUT_DIM(OUT_DIM), .KDIM(KDIM)
  ) u_wup (
    .clk, .rst_n,
    .start(accept && cmd.op == OP_WG),
    .first_step(cmd.first_step), .in_base(cmd.in_base),
    .busy(wup_busy), .done(wup_done),
    .mem, .mem_rdata(wup_rdata)
  );

  // Only one unit runs at a time.
  assert property (@(posedge clk) disable iff (!rst_n)
      $onehot0({dma_busy, fwd_busy, bp_busy, wup_busy}))
    else $error("eocas_top: two units busy at once");

endmodule
