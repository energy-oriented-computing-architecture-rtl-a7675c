// dma: moves a block of words between the external DRAM and one on-chip SRAM.
//
// The paper places a DMA between the DRAM and each sub-core but does not
// describe it; this is a minimal engine of this design's own. A command
// (OP_DMA_LOAD or OP_DMA_STORE) names a target SRAM (and row, or all rows for
// the replicated WUP spike SRAMs), a first SRAM word, a word count and a DRAM
// word address. The DRAM side is 16 bits wide: a 16-bit SRAM word is one DRAM
// word, a 256-bit SRAM word is 16 consecutive DRAM words, lowest channel
// first. SRAM words are packed in DRAM unless dram_stride is non-zero, in
// which case word n starts at dram_addr + n*dram_stride; a stride of 16 with a
// 16-bit target picks one channel out of 256-bit pixel words (used to split a
// potential-gradient map into the per-channel WUP SRAMs).
// One DRAM access is in flight at a time.
// DRAM protocol: dram_req with dram_we/addr/wdata is held until dram_gnt; a
// granted read returns its data with dram_rvalid some cycles later.
// SRAM side: mem.we writes a word; mem.re reads one, returned on mem_rdata in
// the next cycle. start is accepted when idle; done pulses at the end.
// Lint reports the command fields meant for the compute cores (op, tile and
// step flags, base addresses) as unused bits of the registered command.
module dma
  import eocas_pkg::*;
(
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  cmd_t         cmd,
  output logic         busy,
  output logic         done,
  // DRAM port
  output logic         dram_req,
  output logic         dram_we,
  output logic [31:0]  dram_addr,
  output logic [15:0]  dram_wdata,
  input  logic         dram_gnt,
  input  logic         dram_rvalid,
  input  logic [15:0]  dram_rdata,
  // SRAM port
  output mem_req_t     mem,
  input  logic [255:0] mem_rdata
);

  typedef enum logic [2:0] {S_IDLE, S_RREQ, S_RWAIT, S_WR, S_MRD, S_MCAP, S_WREQ} state_e;

  state_e       state;
  cmd_t         c_q;
  logic [31:0]  addr_q, wbase_q;
  logic [15:0]  word_q;
  logic [3:0]   beat_q;
  logic [255:0] buf_q;
  logic         wide;

  assign wide = target_is_wide(c_q.target);
  assign busy = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state  <= S_IDLE;
      c_q    <= '0;
      addr_q <= '0;
      wbase_q <= '0;
      word_q <= '0;
      beat_q <= '0;
      buf_q  <= '0;
      done   <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          c_q    <= cmd;
          addr_q <= cmd.dram_addr;
          wbase_q <= cmd.dram_addr;
          word_q <= '0;
          beat_q <= '0;
          buf_q  <= '0;
          if (cmd.words == 16'd0) done <= 1'b1;
          else state <= (cmd.op == OP_DMA_STORE) ? S_MRD : S_RREQ;
        end
        // ---- DRAM to SRAM ----
        S_RREQ: if (dram_gnt) begin
          addr_q <= addr_q + 1'b1;
          state  <= S_RWAIT;
        end
        S_RWAIT: if (dram_rvalid) begin
          buf_q[16*beat_q +: 16] <= dram_rdata;
          if (!wide || beat_q == 4'd15) begin
            beat_q <= '0;
            state  <= S_WR;
          end else begin
            beat_q <= beat_q + 1'b1;
            state  <= S_RREQ;
          end
        end
        S_WR: begin
          buf_q  <= '0;
          word_q <= word_q + 1'b1;
          if (c_q.dram_stride != 16'd0) begin
            wbase_q <= wbase_q + 32'(c_q.dram_stride);
            addr_q  <= wbase_q + 32'(c_q.dram_stride);
          end
          if (word_q == c_q.words - 1'b1) begin
            done  <= 1'b1;
            state <= S_IDLE;
          end else state <= S_RREQ;
        end
        // ---- SRAM to DRAM ----
        S_MRD:  state <= S_MCAP;
        S_MCAP: begin
          buf_q <= mem_rdata;
          state <= S_WREQ;
        end
        S_WREQ: if (dram_gnt) begin
          addr_q <= addr_q + 1'b1;
          if (!wide || beat_q == 4'd15) begin
            beat_q <= '0;
            word_q <= word_q + 1'b1;
            if (c_q.dram_stride != 16'd0) begin
              wbase_q <= wbase_q + 32'(c_q.dram_stride);
              addr_q  <= wbase_q + 32'(c_q.dram_stride);
            end
            if (word_q == c_q.words - 1'b1) begin
              done  <= 1'b1;
              state <= S_IDLE;
            end else state <= S_MRD;
          end else beat_q <= beat_q + 1'b1;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  always_comb begin
    dram_req   = (state == S_RREQ) || (state == S_WREQ);
    dram_we    = (state == S_WREQ);
    dram_addr  = addr_q;
    dram_wdata = buf_q[16*beat_q +: 16];
    mem          = '0;
    mem.we       = (state == S_WR);
    mem.re       = (state == S_MRD);
    mem.target   = c_q.target;
    mem.row      = c_q.row;
    mem.all_rows = c_q.all_rows;
    mem.addr     = c_q.sram_addr + word_q;
    mem.wdata    = buf_q;
  end

  // A request is held, unchanged, until it is granted.
  assert property (@(posedge clk) disable iff (!rst_n)
      dram_req && !dram_gnt |=> dram_req && $stable(dram_we) && $stable(dram_addr)
                                && $stable(dram_wdata))
    else $error("dma: DRAM request changed before grant");

endmodule
