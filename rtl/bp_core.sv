// bp_core: the backward-propagation (BP) half of the BWD core. One start runs
// one timestep (in descending order, t = T first) of one layer tile: the FP16
// convolution ConvBP_t = du_t^{l+1} (*) w'^l on the 16x16 Mul-Add array, then
// (on the last input-channel tile) the grad pass that forms du_t^l.
//
// Buffers, named after the block diagram:
//   sram_in_du       du_t^{l+1} of the padded map, one 256-bit word (16
//                    channels of FP16) per pixel
//   sram_in_w[r]     transposed, flipped weights w' of output channel r, one
//                    256-bit word per kernel position
//   sram_out_ps[r]   FP16 partial sums of channel r, one per pixel
//   sram_in_s/_u/_f  s_t, u_t and f'(u_t) of this layer, saved by the FWD pass
//   sram_out_du      du_t^l, one 256-bit word per pixel
// The grad pass reads du_{t+1} from sram_out_du and overwrites it with du_t
// in place; first_step (t = T) treats du_{t+1} as 0. first_tile starts the
// partial sums from zero. The mem port is used by the host while idle.
// Timing is that of the FWD core: an input word read in cycle j enters the
// array in j+1 and its partial sum is written in j+COLS+2.
// Buffer split and per-row grad units follow the block diagram; word formats
// and in-place state are this design's choices. The spike-gradient output of
// the grad units is not stored: nothing downstream in the paper reads it.
// Lint therefore reports ds_new as unused; it also reports the threshold
// fields of cfg (only alpha and beta matter here) and the all_rows bit of the
// mem request (only the WUP buffers are broadcast) as unused.
module bp_core
  import eocas_pkg::*;
#(
  parameter int unsigned ROWS    = ARRAY_ROWS,
  parameter int unsigned COLS    = ARRAY_COLS,
  parameter int unsigned IN_DIM  = eocas_pkg::DEF_IN_DIM,
  parameter int unsigned OUT_DIM = eocas_pkg::DEF_OUT_DIM,
  parameter int unsigned KDIM    = eocas_pkg::DEF_KDIM,
  parameter int unsigned S_DEPTH = IN_DIM * IN_DIM,
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

  // ---------------- gradient input SRAM ----------------
  logic [255:0] x_rdata;
  fp16_t        x_vec [COLS];
  sram_1r1w #(.WIDTH(256), .DEPTH(S_DEPTH)) u_sram_in_du (
    .clk,
    .we(ext_we && mem.target == T_BP_IN_DU), .waddr($clog2(S_DEPTH)'(mem.addr)),
    .wdata(mem.wdata),
    .re(c_busy ? in_re : (ext_re && mem.target == T_BP_IN_DU)),
    .raddr($clog2(S_DEPTH)'(c_busy ? in_addr : mem.addr)),
    .rdata(x_rdata)
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
      .we(ext_we && mem.target == T_BP_IN_W && mem.row == 4'(r)),
      .waddr($clog2(W_DEPTH)'(mem.addr)), .wdata(mem.wdata),
      .re(c_busy ? w_re : (ext_re && mem.target == T_BP_IN_W && mem.row == 4'(r))),
      .raddr($clog2(W_DEPTH)'(c_busy ? w_addr : mem.addr)),
      .rdata(w_rdata[r])
    );

    for (genvar c = 0; c < COLS; c++) begin : g_w
      assign w_mat[r][c] = w_rdata[r][16*c +: 16];
    end

    sram_1r1w #(.WIDTH(16), .DEPTH(PIX)) u_sram_out_ps (
      .clk,
      .we(c_busy ? pipe_vld[DELAY-1]
                 : (ext_we && mem.target == T_BP_OUT_PS && mem.row == 4'(r))),
      .waddr(PSW'(c_busy ? pipe_addr[DELAY-1] : mem.addr)),
      .wdata(c_busy ? psum_out[r] : mem.wdata[15:0]),
      .re(c_busy ? (in_re || post_re)
                 : (ext_re && mem.target == T_BP_OUT_PS && mem.row == 4'(r))),
      .raddr(PSW'(c_busy ? (in_re ? ps_addr : post_addr) : mem.addr)),
      .rdata(ps_rdata[r])
    );

    assign psum_init[r] = zero_init_q ? FP16_ZERO : ps_rdata[r];
  end

  // ---------------- FP16 convolution array ----------------
  for (genvar c = 0; c < COLS; c++) begin : g_x
    assign x_vec[c] = in_vld_q ? x_rdata[16*c +: 16] : FP16_ZERO;
  end

  mac_matrix #(.ROWS(ROWS), .COLS(COLS)) u_matrix (
    .clk, .rst_n, .w_load, .w_in(w_mat),
    .x(x_vec),
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

  // ---------------- grad pass ----------------
  logic [255:0] u_rdata, du_rdata, du_wdata;
  logic [15:0]  s_rdata, f_rdata;

  for (genvar r = 0; r < ROWS; r++) begin : g_grad
    fp16_t du_new, ds_new;
    grad u_grad (
      .ps(ps_rdata[r]),
      .du_next(first_step_q ? FP16_ZERO : du_rdata[16*r +: 16]),
      .u(u_rdata[16*r +: 16]), .s(s_rdata[r]), .fmask(f_rdata[r]),
      .alpha(cfg.alpha), .beta(cfg.beta),
      .du(du_new), .ds(ds_new)
    );
    assign du_wdata[16*r +: 16] = du_new;
  end
  if (ROWS < 16) begin : g_pad
    assign du_wdata[255:16*ROWS] = '0;
  end

  logic post_we;
  assign post_we = c_busy && post_vld_q;

  sram_1r1w #(.WIDTH(256), .DEPTH(PIX)) u_sram_in_u (
    .clk,
    .we(ext_we && mem.target == T_BP_IN_U), .waddr(PSW'(mem.addr)), .wdata(mem.wdata),
    .re(c_busy ? post_re : (ext_re && mem.target == T_BP_IN_U)),
    .raddr(PSW'(c_busy ? post_addr : mem.addr)),
    .rdata(u_rdata)
  );

  sram_1r1w #(.WIDTH(16), .DEPTH(PIX)) u_sram_in_s (
    .clk,
    .we(ext_we && mem.target == T_BP_IN_S), .waddr(PSW'(mem.addr)), .wdata(mem.wdata[15:0]),
    .re(c_busy ? post_re : (ext_re && mem.target == T_BP_IN_S)),
    .raddr(PSW'(c_busy ? post_addr : mem.addr)),
    .rdata(s_rdata)
  );

  sram_1r1w #(.WIDTH(16), .DEPTH(PIX)) u_sram_in_f (
    .clk,
    .we(ext_we && mem.target == T_BP_IN_F), .waddr(PSW'(mem.addr)), .wdata(mem.wdata[15:0]),
    .re(c_busy ? post_re : (ext_re && mem.target == T_BP_IN_F)),
    .raddr(PSW'(c_busy ? post_addr : mem.addr)),
    .rdata(f_rdata)
  );

  sram_1r1w #(.WIDTH(256), .DEPTH(PIX)) u_sram_out_du (
    .clk,
    .we(post_we || (ext_we && mem.target == T_BP_OUT_DU)),
    .waddr(PSW'(post_we ? post_addr_q : mem.addr)),
    .wdata(post_we ? du_wdata : mem.wdata),
    .re(c_busy ? post_re : (ext_re && mem.target == T_BP_OUT_DU)),
    .raddr(PSW'(c_busy ? post_addr : mem.addr)),
    .rdata(du_rdata)
  );

  // ---------------- external read data ----------------
  always_comb begin
    unique case (rd_target_q)
      T_BP_IN_DU:  mem_rdata = x_rdata;
      T_BP_IN_W:   mem_rdata = w_rdata[rd_row_q];
      T_BP_OUT_PS: mem_rdata = {240'd0, ps_rdata[rd_row_q]};
      T_BP_IN_U:   mem_rdata = u_rdata;
      T_BP_IN_S:   mem_rdata = {240'd0, s_rdata};
      T_BP_IN_F:   mem_rdata = {240'd0, f_rdata};
      T_BP_OUT_DU: mem_rdata = du_rdata;
      default:     mem_rdata = '0;
    endcase
  end

endmodule
