// eocas_pkg: types and constants shared by the SNN training accelerator.
//
// All real-valued data (weights, membrane potentials, partial sums and
// gradients) is IEEE-754 half precision (FP16), as in the paper. Spikes and
// the surrogate-gradient mask f'(u) are single bits, packed sixteen channels
// to a word. The array geometry defaults (16x16) and the layer geometry
// defaults (34x34 padded input, 3x3 kernel, 32x32 output, 6 timesteps) are the
// representative CIFAR-100 layer the paper evaluates. The SRAM map, command
// format and DMA target encoding are this design's own choices.
package eocas_pkg;

  typedef logic [15:0] fp16_t;

  localparam fp16_t FP16_ZERO = 16'h0000;
  localparam fp16_t FP16_ONE  = 16'h3C00;
  localparam fp16_t FP16_INF  = 16'h7C00;
  localparam fp16_t FP16_QNAN = 16'h7E00;

  // Array and layer geometry of the implemented configuration.
  localparam int unsigned ARRAY_ROWS = 16;  // output channels per tile
  localparam int unsigned ARRAY_COLS = 16;  // input channels per tile
  localparam int unsigned DEF_KDIM       = 3;   // R = S = 3
  localparam int unsigned DEF_IN_DIM     = 34;  // padded input height/width
  localparam int unsigned DEF_OUT_DIM    = 32;  // P = Q = 32

  // Sign flip (used for -u in the grad unit).
  function automatic fp16_t fp16_neg(fp16_t a);
    return {~a[15], a[14:0]};
  endfunction

  // a < b for finite FP16 values; +0 and -0 compare equal and subnormals
  // are treated as zero (the arithmetic flushes them).
  function automatic logic fp16_lt(fp16_t a, fp16_t b);
    logic az, bz;
    logic [14:0] ma, mb;
    az = (a[14:10] == 5'd0);
    bz = (b[14:10] == 5'd0);
    ma = az ? 15'd0 : a[14:0];
    mb = bz ? 15'd0 : b[14:0];
    if (ma == 15'd0 && mb == 15'd0) return 1'b0;
    if (ma == 15'd0) return !b[15];            // 0 < b  iff b positive
    if (mb == 15'd0) return a[15];             // a < 0  iff a negative
    if (a[15] != b[15]) return a[15];
    if (!a[15]) return ma < mb;
    return ma > mb;
  endfunction

  // Targets reachable by the DMA engine. Row-indexed targets take the row
  // number from the command; WU_IN_S may be written to all rows at once.
  typedef enum logic [3:0] {
    T_FW_IN_S   = 4'd0,   // FWD spike input s^{l-1}        (16-bit words)
    T_FW_IN_W   = 4'd1,   // FWD weights, one per row       (256-bit words)
    T_FW_OUT_PS = 4'd2,   // FWD partial sums ConvFP, per row (16-bit)
    T_FW_OUT_U  = 4'd3,   // FWD membrane potential u^l     (256-bit)
    T_FW_OUT_S  = 4'd4,   // FWD output spikes s^l          (16-bit)
    T_FW_OUT_F  = 4'd5,   // FWD surrogate mask f'(u^l)     (16-bit)
    T_BP_IN_DU  = 4'd6,   // BWD input gradient du^{l+1}    (256-bit)
    T_BP_IN_W   = 4'd7,   // BWD transposed weights, per row (256-bit)
    T_BP_OUT_PS = 4'd8,   // BWD partial sums ConvBP, per row (16-bit)
    T_BP_IN_S   = 4'd9,   // BWD spikes s^l                 (16-bit)
    T_BP_IN_U   = 4'd10,  // BWD potentials u^l             (256-bit)
    T_BP_IN_F   = 4'd11,  // BWD mask f'(u^l)               (16-bit)
    T_BP_OUT_DU = 4'd12,  // BWD output gradient du^l       (256-bit)
    T_WU_IN_S   = 4'd13,  // WUP spikes s^{l-1}, per row    (16-bit)
    T_WU_IN_DU  = 4'd14,  // WUP gradient du^l, per row     (16-bit)
    T_WU_OUT_DW = 4'd15   // WUP weight gradient, per row   (256-bit)
  } sram_target_e;

  // 256-bit targets move as 16 DRAM beats, lowest channel first.
  function automatic logic target_is_wide(sram_target_e t);
    return (t == T_FW_IN_W) || (t == T_FW_OUT_U) || (t == T_BP_IN_DU) ||
           (t == T_BP_IN_W) || (t == T_BP_IN_U)  || (t == T_BP_OUT_DU) ||
           (t == T_WU_OUT_DW);
  endfunction

  // Word-level access to the SRAMs of a core, made by the DMA engine while the
  // cores are idle. A read returns its word one cycle after re.
  typedef struct packed {
    logic         we;
    logic         re;
    sram_target_e target;
    logic [3:0]   row;
    logic         all_rows;
    logic [15:0]  addr;
    logic [255:0] wdata;
  } mem_req_t;

  typedef enum logic [2:0] {
    OP_DMA_LOAD  = 3'd0,  // DRAM -> SRAM
    OP_DMA_STORE = 3'd1,  // SRAM -> DRAM
    OP_FWD       = 3'd2,  // one FWD timestep (spike conv, then soma)
    OP_BP        = 3'd3,  // one BP timestep (FP16 conv, then grad)
    OP_WG        = 3'd4   // one WG timestep over all kernel positions
  } op_e;

  // Command accepted by the top. Fields not used by an operation are ignored.
  typedef struct packed {
    op_e          op;
    // DMA fields
    sram_target_e target;
    logic [3:0]   row;        // row of a row-indexed target
    logic         all_rows;   // WU_IN_S: write every row
    logic [31:0]  dram_addr;  // word (16-bit) address in DRAM
    logic [15:0]  sram_addr;  // first SRAM word
    logic [15:0]  words;      // number of SRAM words
    logic [15:0]  dram_stride;// DRAM words between SRAM words; 0 = packed
    // compute fields
    logic         first_tile; // conv: start partial sums from zero
    logic         last_tile;  // conv: run soma / grad after the conv
    logic         first_step; // soma: t = 1; grad: t = T; WG: clear dW
    logic [15:0]  in_base;    // input SRAM base (spikes or du)
    logic [15:0]  w_base;     // weight SRAM base (kernel position 0)
  } cmd_t;

  // Neuron constants programmed by the host.
  typedef struct packed {
    fp16_t alpha;  // leak factor
    fp16_t beta;   // gradient scale
    fp16_t th_f;   // firing threshold
    fp16_t th_l;   // surrogate window, low edge
    fp16_t th_r;   // surrogate window, high edge
  } neuron_cfg_t;

endpackage
