// fwd_core: the forward (FWD) core. One start runs one timestep of one layer
// tile: the spike convolution ConvFP_t = s_t^{l-1} (*) w^{l-1} on the 16x16
// Mux-Add array, then (on the last input-channel tile) the soma pass that turns
// ConvFP_t into u_t, s_t and the surrogate mask f'(u_t).
//
// Buffers, named after the block diagram:
//   sram_in_s        spike words (one bit per input channel) of the padded
//                    input map, IN_DIM x IN_DIM words per channel tile
//   sram_in_w[r]     weights of output channel r, one 256-bit word (16 input
//                    channels) per kernel position
//   sram_out_ps[r]   FP16 partial sums of output channel r, one per pixel
//   sram_out_u       u_t of the 16 output channels, one 256-bit word per pixel
//   sram_out_s/_f    s_t and f'(u_t), one 16-bit word per pixel
// The soma pass reads u_{t-1} and s_{t-1} from sram_out_u/_s and overwrites
// them with u_t and s_t in place; first_step treats u_{t-1} and s_{t-1} as 0.
// first_tile starts the partial sums from zero at kernel position 0; a later
// input-channel tile adds onto them. The host moves data in and out through
// the mem port while the core is idle (the port is ignored while busy).
// Timing: an input word read in cycle j enters the array in j+1 and its
// partial sum is written in j+COLS+2; conv_ctrl drains the array between
// kernel positions. One timestep takes about K*K*(OUT_DIM^2 + COLS + 6)
// + OUT_DIM^2 cycles.
// The split into these buffers, one spike SRAM feeding all rows, a weight
// SRAM and a partial-sum SRAM per row, and soma units per row follow the block
// diagram; word formats and the in-place neuron state are this design's.
// Lint reports the beta field of cfg (a backward-pass constant) and
// the all_rows bit of the mem request (used only by the WUP buffers) as unused.
module fwd_core
  import eocas_pkg::*;
#(
  parameter int unsigned ROWS    = ARRAY_ROWS,
  parameter int unsigned COLS    = ARRAY_COLS,
  parameter int unsigned IN_DIM  = eocas_pkg::DEF_IN_DIM,
  parameter int unsigned OUT_DIM = eocas_pkg::DEF_OUT_DIM,
  parameter int unsigned KDIM    = eocas_pkg::DEF_KDIM,
  parameter int unsigned S_DEPTH = 2 * IN_DIM * IN_DIM,
  parameter int unsigned W_DEPTH = KDIM * KDIM
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic        first_tile,
  input  logic        last_tile,
  input  logic        first_step,
  input  logic [15:0] in_base,
  input  logic [15:0] w_base,
  input  neuron_cfg_t cfg,
  output logic        busy,
  output logic        done,
  input  mem_req_t    mem,
  output logic [255:0] mem_rdata
);

  localparam int unsigned PIX   = OUT_DIM * OUT_DIM;
  localparam int unsigned DELAY = COLS + 2;  // read to partial-sum write

  // ---------------- sequencer ----------------
  logic        c_busy, w_re, w_load, in_re, first_k, post_re;
  logic [15:0] w_addr, in_addr, ps_addr, post_addr;
  logic        first_tile_q, first_step_q;

  conv_ctrl #(.IN_DIM(IN_DIM), .OUT_DIM(OUT_DIM), .KDIM(KDIM), .DRAIN(COLS + 4)) u_ctrl (
    .clk, .rst_n, .start, .post(last_tile), .in_base, .w_base,
    .busy(c_busy), .done, .w_re, .w_addr, .w_load, .in_re, .in_addr, .ps_addr,
    .first_k, .post_re, .post_addr
  );
  assign busy = c_busy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      first_tile_q <= 1'b0;
      first_step_q <= 1'b0;
    end else if (start && !c_busy) begin
      first_tile_q <= first_tile;
      first_step_q <= first_step;
    end
  end

  // ---------------- external access decode ----------------
  logic ext_we, ext_re;
  assign ext_we = mem.we && !c_busy;
  assign ext_re = mem.re && !c_busy;

  sram_target_e rd_target_q;
  logic [3:0]   rd_row_q;
  always_ff @(posedge clk) begin
    if (ext_re) begin
      rd_target_q <= mem.target;
      rd_row_q    <= mem.row;
    end
  end

  // ---------------- spike input SRAM ----------------
  logic [15:0] s_rdata;
  sram_1r1w #(.WIDTH(16), .DEPTH(S_DEPTH)) u_sram_in_s (
    .clk,
    .we(ext_we && mem.target == T_FW_IN_S), .waddr($clog2(S_DEPTH)'(mem.addr)),
    .wdata(mem.wdata[15:0]),
    .re(c_busy ? in_re : (ext_re && mem.target == T_FW_IN_S)),
    .raddr($clog2(S_DEPTH)'(c_busy ? in_addr : mem.addr)),
    .rdata(s_rdata)
  );

  // ---------------- per-row weight and partial-sum SRAMs ----------------
  logic [255:0] w_rdata  [ROWS];
  fp16_t        ps_rdata [ROWS];
  fp16_t        w_mat    [ROWS][COLS];
  fp16_t        psum_init[ROWS];
  fp16_t        psum_out [ROWS];
  logic         pipe_vld  [DELAY];
  logic [15:0]  pipe_addr [DELAY];
  logic         in_vld_q, zero_init_q;
  logic         post_vld_q;
  logic [15:0]  post_addr_q;

  localparam int unsigned PSW = (PIX > 1) ? $clog2(PIX) : 1;

  for (genvar r = 0; r < ROWS; r++) begin : g_row
    sram_1r1w #(.WIDTH(256), .DEPTH(W_DEPTH)) u_sram_in_w (
      .clk,
      .we(ext_we && mem.target == T_FW_IN_W && mem.row == 4'(r)),
      .waddr($clog2(W_DEPTH)'(mem.addr)), .wdata(mem.wdata),
      .re(c_busy ? w_re : (ext_re && mem.target == T_FW_IN_W && mem.row == 4'(r))),
      .raddr($clog2(W_DEPTH)'(c_busy ? w_addr : mem.addr)),
      .rdata(w_rdata[r])
    );

    for (genvar c = 0; c < COLS; c++) begin : g_w
      assign w_mat[r][c] = w_rdata[r][16*c +: 16];
    end

    sram_1r1w #(.WIDTH(16), .DEPTH(PIX)) u_sram_out_ps (
      .clk,
      .we(c_busy ? pipe_vld[DELAY-1]
                 : (ext_we && mem.target == T_FW_OUT_PS && mem.row == 4'(r))),
      .waddr(PSW'(c_busy ? pipe_addr[DELAY-1] : mem.addr)),
      .wdata(c_busy ? psum_out[r] : mem.wdata[15:0]),
      .re(c_busy ? (in_re || post_re)
                 : (ext_re && mem.target == T_FW_OUT_PS && mem.row == 4'(r))),
      .raddr(PSW'(c_busy ? (in_re ? ps_addr : post_addr) : mem.addr)),
      .rdata(ps_rdata[r])
    );

    assign psum_init[r] = zero_init_q ? FP16_ZERO : ps_rdata[r];
  end

  // ---------------- spike convolution array ----------------
  adder_matrix #(.ROWS(ROWS), .COLS(COLS)) u_matrix (
    .clk, .rst_n, .w_load, .w_in(w_mat),
    .spikes(in_vld_q ? COLS'(s_rdata) : '0),
    .psum_init, .psum_out
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      in_vld_q    <= 1'b0;
      zero_init_q <= 1'b0;
      post_vld_q  <= 1'b0;
      post_addr_q <= '0;
      for (int i = 0; i < DELAY; i++) begin
        pipe_vld[i]  <= 1'b0;
        pipe_addr[i] <= '0;
      end
    end else begin
      in_vld_q    <= in_re;
      zero_init_q <= in_re && first_k && first_tile_q;
      post_vld_q  <= post_re;
      post_addr_q <= post_addr;
      pipe_vld[0]  <= in_re;
      pipe_addr[0] <= ps_addr;
      for (int i = 1; i < DELAY; i++) begin
        pipe_vld[i]  <= pipe_vld[i-1];
        pipe_addr[i] <= pipe_addr[i-1];
      end
    end
  end

  // ---------------- soma pass ----------------
  logic [255:0] u_rdata, u_wdata;
  logic [15:0]  so_rdata, so_wdata, f_wdata, f_rdata;

  for (genvar r = 0; r < ROWS; r++) begin : g_soma
    fp16_t u_new;
    logic  s_new, f_new;
    soma u_soma (
      .ps(ps_rdata[r]),
      .u_prev(first_step_q ? FP16_ZERO : u_rdata[16*r +: 16]),
      .s_prev(first_step_q ? 1'b0 : so_rdata[r]),
      .alpha(cfg.alpha), .th_f(cfg.th_f), .th_l(cfg.th_l), .th_r(cfg.th_r),
      .u(u_new), .s(s_new), .fmask(f_new)
    );
    assign u_wdata[16*r +: 16] = u_new;
    assign so_wdata[r] = s_new;
    assign f_wdata[r]  = f_new;
  end
  if (ROWS < 16) begin : g_pad
    assign u_wdata[255:16*ROWS] = '0;
    assign so_wdata[15:ROWS]    = '0;
    assign f_wdata[15:ROWS]     = '0;
  end

  logic post_we;
  assign post_we = c_busy && post_vld_q;

  sram_1r1w #(.WIDTH(256), .DEPTH(PIX)) u_sram_out_u (
    .clk,
    .we(post_we || (ext_we && mem.target == T_FW_OUT_U)),
    .waddr(PSW'(post_we ? post_addr_q : mem.addr)),
    .wdata(post_we ? u_wdata : mem.wdata),
    .re(c_busy ? post_re : (ext_re && mem.target == T_FW_OUT_U)),
    .raddr(PSW'(c_busy ? post_addr : mem.addr)),
    .rdata(u_rdata)
  );

  sram_1r1w #(.WIDTH(16), .DEPTH(PIX)) u_sram_out_s (
    .clk,
    .we(post_we || (ext_we && mem.target == T_FW_OUT_S)),
    .waddr(PSW'(post_we ? post_addr_q : mem.addr)),
    .wdata(post_we ? so_wdata : mem.wdata[15:0]),
    .re(c_busy ? post_re : (ext_re && mem.target == T_FW_OUT_S)),
    .raddr(PSW'(c_busy ? post_addr : mem.addr)),
    .rdata(so_rdata)
  );

  sram_1r1w #(.WIDTH(16), .DEPTH(PIX)) u_sram_out_f (
    .clk,
    .we(post_we || (ext_we && mem.target == T_FW_OUT_F)),
    .waddr(PSW'(post_we ? post_addr_q : mem.addr)),
    .wdata(post_we ? f_wdata : mem.wdata[15:0]),
    .re(!c_busy && ext_re && mem.target == T_FW_OUT_F),
    .raddr(PSW'(mem.addr)),
    .rdata(f_rdata)
  );

  // ---------------- external read data ----------------
  always_comb begin
    unique case (rd_target_q)
      T_FW_IN_S:   mem_rdata = {240'd0, s_rdata};
      T_FW_IN_W:   mem_rdata = w_rdata[rd_row_q];
      T_FW_OUT_PS: mem_rdata = {240'd0, ps_rdata[rd_row_q]};
      T_FW_OUT_U:  mem_rdata = u_rdata;
      T_FW_OUT_S:  mem_rdata = {240'd0, so_rdata};
      T_FW_OUT_F:  mem_rdata = {240'd0, f_rdata};
      default:     mem_rdata = '0;
    endcase
  end

endmodule
