// conv_ctrl: loop sequencer for one weight-stationary convolution pass and the
// neuron pass that follows it (soma in the FWD core, grad in the BP core).
//
// Loop nest, outermost first (the kernel loops outside the spatial loops, as
// in the paper's advanced-WS mapping where the weights of one kernel position
// stay in the array while the whole output map streams past):
//   for kpos in 0 .. K*K-1           load the 16x16 weights of (ky,kx)
//     for p in 0 .. OUT-1, q in 0 .. OUT-1
//       read input word at in_base + (p+ky)*IN + (q+kx)
//       read partial sums at p*OUT+q, add the array output, write back
//     drain the array (DRAIN cycles) so that the next kernel position never
//     reads a partial sum that is still in flight
//   if post: for pix in 0 .. OUT*OUT-1: neuron pass at pix
// Outputs per cycle:
//   w_re/w_addr       weight word read (all rows), w_load one cycle later
//   in_re/in_addr     input word read, ps_addr the partial sum it updates,
//                     first_k marks kernel position 0
//   post_re/post_addr neuron-pass read; the core writes one cycle later
// start is accepted in IDLE; done pulses for one cycle at the end.
// The loop order is this design's reading of the paper's mapping; the paper
// gives no controller.
module conv_ctrl #(
  parameter int unsigned IN_DIM  = 34,
  parameter int unsigned OUT_DIM = 32,
  parameter int unsigned KDIM    = 3,
  parameter int unsigned DRAIN   = 20,
  parameter int unsigned AW      = 16
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic          post,
  input  logic [AW-1:0] in_base,
  input  logic [AW-1:0] w_base,
  output logic          busy,
  output logic          done,
  output logic          w_re,
  output logic [AW-1:0] w_addr,
  output logic          w_load,
  output logic          in_re,
  output logic [AW-1:0] in_addr,
  output logic [AW-1:0] ps_addr,
  output logic          first_k,
  output logic          post_re,
  output logic [AW-1:0] post_addr
);

  typedef enum logic [2:0] {S_IDLE, S_WREAD, S_WLOAD, S_STREAM, S_DRAIN, S_POST, S_FINISH}
    state_e;

  state_e        state;
  logic          post_q;
  logic [AW-1:0] in_base_q, w_base_q;
  logic [7:0]    ky, kx;
  logic [15:0]   p, q;
  logic [15:0]   cnt;

  assign busy = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      post_q    <= 1'b0;
      in_base_q <= '0;
      w_base_q  <= '0;
      ky <= '0; kx <= '0; p <= '0; q <= '0; cnt <= '0;
      done      <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          post_q    <= post;
          in_base_q <= in_base;
          w_base_q  <= w_base;
          ky <= '0; kx <= '0;
          state <= S_WREAD;
        end
        S_WREAD: state <= S_WLOAD;
        S_WLOAD: begin
          p <= '0; q <= '0;
          state <= S_STREAM;
        end
        S_STREAM: begin
          if (q == 16'(OUT_DIM - 1)) begin
            q <= '0;
            if (p == 16'(OUT_DIM - 1)) begin
              cnt   <= '0;
              state <= S_DRAIN;
            end else p <= p + 1'b1;
          end else q <= q + 1'b1;
        end
        S_DRAIN: begin
          cnt <= cnt + 1'b1;
          if (cnt == 16'(DRAIN - 1)) begin
            if (kx == 8'(KDIM - 1)) begin
              kx <= '0;
              if (ky == 8'(KDIM - 1)) begin
                cnt   <= '0;
                state <= post_q ? S_POST : S_FINISH;
              end else begin
                ky <= ky + 1'b1;
                state <= S_WREAD;
              end
            end else begin
              kx <= kx + 1'b1;
              state <= S_WREAD;
            end
          end
        end
        S_POST: begin
          cnt <= cnt + 1'b1;
          if (cnt == 16'(OUT_DIM * OUT_DIM - 1)) state <= S_FINISH;
        end
        S_FINISH: begin
          // one cycle for the last neuron-pass write
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  always_comb begin
    w_re      = (state == S_WREAD);
    w_addr    = w_base_q + AW'(ky * KDIM + kx);
    w_load    = (state == S_WLOAD);
    in_re     = (state == S_STREAM);
    in_addr   = in_base_q + AW'((32'(p) + 32'(ky)) * IN_DIM + 32'(q) + 32'(kx));
    ps_addr   = AW'(32'(p) * OUT_DIM + 32'(q));
    first_k   = (ky == '0) && (kx == '0);
    post_re   = (state == S_POST);
    post_addr = cnt[AW-1:0];
  end

endmodule
