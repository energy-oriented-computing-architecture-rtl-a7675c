// wup_core: the weight-update (WUP) half of the BWD core. One start runs one
// timestep of the weight-gradient convolution
//   dW[m][c][ky][kx] += sum_{p,q} du_t[m][p][q] * s_t^{l-1}[c][p+ky][q+kx]
// for all 16x16 (m,c) pairs of a tile and all K*K kernel positions, so that
// starting every timestep of a layer accumulates dW = sum_t du_t (*) s_t.
// Since spikes are 0 or 1, the product is a multiplexer and the sum an FP16
// accumulation (Mux-Add), done in the 16x16 wg_matrix.
//
// Buffers, named after the block diagram:
//   sram_in_s[r]   spike words (16 input channels) of the padded input map;
//                  every row holds the same map, written to all rows at once
//   sram_in_du[r]  du_t of output channel r, one FP16 per output pixel
//   sram_out_dw[r] dW of output channel r, one 256-bit word (16 input
//                  channels) per kernel position
// Sequence per kernel position: read sram_out_dw (the running sum; zero when
// first_step), load it into the accumulators, stream the OUT_DIM x OUT_DIM
// output pixels (one per cycle), wait two cycles, write the accumulators back.
// in_base offsets the spike addresses. The mem port is used while idle.
// The per-row du, spike and dW SRAMs follow the block diagram; the
// output-stationary accumulation inside the array is this design's choice.
module wup_core
  import eocas_pkg::*;
#(
  parameter int unsigned ROWS    = ARRAY_ROWS,
  parameter int unsigned COLS    = ARRAY_COLS,
  parameter int unsigned IN_DIM  = eocas_pkg::DEF_IN_DIM,
  parameter int unsigned OUT_DIM = eocas_pkg::DEF_OUT_DIM,
  parameter int unsigned KDIM    = eocas_pkg::DEF_KDIM,
  parameter int unsigned S_DEPTH = IN_DIM * IN_DIM
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  logic         first_step,
  input  logic [15:0]  in_base,
  output logic         busy,
  output logic         done,
  input  mem_req_t     mem,
  output logic [255:0] mem_rdata
);

  localparam int unsigned PIX = OUT_DIM * OUT_DIM;
  localparam int unsigned KK  = KDIM * KDIM;
  localparam int unsigned PSW = (PIX > 1) ? $clog2(PIX) : 1;
  localparam int unsigned SW  = (S_DEPTH > 1) ? $clog2(S_DEPTH) : 1;
  localparam int unsigned KW  = (KK > 1) ? $clog2(KK) : 1;

  typedef enum logic [2:0] {S_IDLE, S_RD_DW, S_INIT, S_STREAM, S_WAIT, S_WRITE} state_e;

  state_e      state;
  logic        first_q;
  logic [15:0] base_q;
  logic [7:0]  ky, kx;
  logic [15:0] p, q;
  logic [1:0]  wcnt;

  assign busy = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      first_q <= 1'b0; base_q <= '0;
      ky <= '0; kx <= '0; p <= '0; q <= '0; wcnt <= '0;
      done <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          first_q <= first_step;
          base_q  <= in_base;
          ky <= '0; kx <= '0;
          state <= S_RD_DW;
        end
        S_RD_DW: state <= S_INIT;
        S_INIT: begin
          p <= '0; q <= '0;
          state <= S_STREAM;
        end
        S_STREAM: begin
          if (q == 16'(OUT_DIM - 1)) begin
            q <= '0;
            if (p == 16'(OUT_DIM - 1)) begin
              wcnt  <= '0;
              state <= S_WAIT;
            end else p <= p + 1'b1;
          end else q <= q + 1'b1;
        end
        S_WAIT: begin
          wcnt <= wcnt + 1'b1;
          if (wcnt == 2'd1) state <= S_WRITE;
        end
        S_WRITE: begin
          if (kx == 8'(KDIM - 1)) begin
            kx <= '0;
            if (ky == 8'(KDIM - 1)) begin
              done  <= 1'b1;
              state <= S_IDLE;
            end else begin
              ky <= ky + 1'b1;
              state <= S_RD_DW;
            end
          end else begin
            kx <= kx + 1'b1;
            state <= S_RD_DW;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  logic          stream;
  logic [KW-1:0] kpos;
  logic [15:0]   s_addr, du_addr;
  logic          stream_q;

  assign stream  = (state == S_STREAM);
  assign kpos    = KW'(ky * KDIM + kx);
  assign s_addr  = base_q + 16'((32'(p) + 32'(ky)) * IN_DIM + 32'(q) + 32'(kx));
  assign du_addr = 16'(32'(p) * OUT_DIM + 32'(q));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) stream_q <= 1'b0;
    else        stream_q <= stream;
  end

  logic ext_we, ext_re;
  assign ext_we = mem.we && !busy;
  assign ext_re = mem.re && !busy;

  sram_target_e rd_target_q;
  logic [3:0]   rd_row_q;
  always_ff @(posedge clk) begin
    if (ext_re) begin
      rd_target_q <= mem.target;
      rd_row_q    <= mem.row;
    end
  end

  logic [COLS-1:0] s_rdata  [ROWS];
  logic [15:0]     s_word   [ROWS];
  fp16_t           du_rdata [ROWS];
  logic [255:0]    dw_rdata [ROWS];
  logic [255:0]    dw_wdata [ROWS];
  fp16_t           init_val [ROWS][COLS];
  fp16_t           acc      [ROWS][COLS];

  for (genvar r = 0; r < ROWS; r++) begin : g_row
    logic row_sel;
    assign row_sel = (mem.row == 4'(r));

    sram_1r1w #(.WIDTH(16), .DEPTH(S_DEPTH)) u_sram_in_s (
      .clk,
      .we(ext_we && mem.target == T_WU_IN_S && (row_sel || mem.all_rows)),
      .waddr(SW'(mem.addr)), .wdata(mem.wdata[15:0]),
      .re(busy ? stream : (ext_re && mem.target == T_WU_IN_S && row_sel)),
      .raddr(SW'(busy ? s_addr : mem.addr)),
      .rdata(s_word[r])
    );
    assign s_rdata[r] = COLS'(s_word[r]);

    sram_1r1w #(.WIDTH(16), .DEPTH(PIX)) u_sram_in_du (
      .clk,
      .we(ext_we && mem.target == T_WU_IN_DU && row_sel),
      .waddr(PSW'(mem.addr)), .wdata(mem.wdata[15:0]),
      .re(busy ? stream : (ext_re && mem.target == T_WU_IN_DU && row_sel)),
      .raddr(PSW'(busy ? du_addr : mem.addr)),
      .rdata(du_rdata[r])
    );

    sram_1r1w #(.WIDTH(256), .DEPTH(KK)) u_sram_out_dw (
      .clk,
      .we((state == S_WRITE) || (ext_we && mem.target == T_WU_OUT_DW && row_sel)),
      .waddr(KW'((state == S_WRITE) ? 16'(kpos) : mem.addr)),
      .wdata((state == S_WRITE) ? dw_wdata[r] : mem.wdata),
      .re((state == S_RD_DW) || (ext_re && mem.target == T_WU_OUT_DW && row_sel)),
      .raddr(KW'(busy ? 16'(kpos) : mem.addr)),
      .rdata(dw_rdata[r])
    );

    for (genvar c = 0; c < COLS; c++) begin : g_col
      assign init_val[r][c] = first_q ? FP16_ZERO : dw_rdata[r][16*c +: 16];
      assign dw_wdata[r][16*c +: 16] = acc[r][c];
    end
    if (COLS < 16) begin : g_pad
      assign dw_wdata[r][255:16*COLS] = '0;
    end
  end

  wg_matrix #(.ROWS(ROWS), .COLS(COLS)) u_matrix (
    .clk, .rst_n,
    .init(state == S_INIT), .init_val,
    .en(stream_q), .du(du_rdata), .spikes(s_rdata),
    .acc
  );

  always_comb begin
    unique case (rd_target_q)
      T_WU_IN_S:   mem_rdata = {240'd0, s_word[rd_row_q]};
      T_WU_IN_DU:  mem_rdata = {240'd0, du_rdata[rd_row_q]};
      T_WU_OUT_DW: mem_rdata = dw_rdata[rd_row_q];
      default:     mem_rdata = '0;
    endcase
  end

endmodule
