// cenn_stage: one forward-Euler iteration of a CeNN over a whole image.
//
// For every cell (i, j), with 3x3 templates A, B, bias I and step dt = 2^s:
//   x'(i,j) = x + dt * ( -x + I + sum A_kl y(i+k, j+l) + sum B_kl u(i+k, j+l) )
//   y'(i,j) = clamp(x'(i,j), -1, +1)
// Pixels {u, x, y} arrive in raster order; a line-buffer FIFO (window_fifo)
// forms the 3x3 neighbourhood, one convolution unit computes sum A*y and a
// second one sum B*u (time-variant templates: each stage has its own A and
// B). The two sums, the bias and -x are added, shifted by dt in S2, added to
// x, clamped to 18 bits and passed through f(x). u is forwarded unchanged to
// the next stage, together with x' and y'.
//
// Pipeline and throughput: a pixel is taken when both convolution units can
// start (one pixel per max(cycles_a, cycles_b) clock cycles in a steady
// stream) and a slot of the OUT_DEPTH-entry output FIFO is reserved for it.
// Results leave in order through the output FIFO (valid/ready). After the
// last pixel of a frame the stage pushes img_w + 1 zero pixels of its own
// into the line buffer to bring out the last row and a half, then takes the
// next frame. Latency from a pixel entering to the result of the pixel
// img_w + 1 places earlier: max cycle count + 4 clock cycles.
//
// Departures and choices: the -x term of the Euler equation is added before
// S2 (the block diagram of the paper omits it; the equation is followed); u
// and x ride through the line buffer with y so that they line up with the
// window centre; x' saturates at the 18-bit range; the zero boundary, the
// handshakes and the output FIFO are this design's choices. tpl may change
// only between frames, with a cfg_load pulse while the stage is idle; the
// frame size img_w x img_h (2 <= img_w <= IMG_W, 1 <= img_h <= IMG_H) too.
module cenn_stage
  import cenn_pkg::*;
#(
  parameter int IMG_W      = 1920,
  parameter int IMG_H      = 1080,
  parameter int N_SHIFT    = 1,
  parameter bit SPARSITY   = 1'b1,
  parameter bit REPETITION = 1'b1,
  parameter int OUT_DEPTH  = 8
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   cfg_load,
  input  tpl_t   tpl,
  input  logic [15:0] img_w,
  input  logic [15:0] img_h,
  input  logic   in_valid,
  output logic   in_ready,
  input  pixel_t in_px,
  output logic   out_valid,
  input  logic   out_ready,
  output pixel_t out_px,
  output logic [3:0] cycles_a,
  output logic [3:0] cycles_b
);

  localparam int QW    = $clog2(OUT_DEPTH);

  // ---------------- input side and line buffer ----------------
  logic [15:0]    in_row, in_col; // position of the next input pixel
  logic [15:0]    fcnt;           // flush pushes done
  logic           flushing, push, push_ok, start;
  logic [OUT_DEPTH > 1 ? QW : 1:0] occ;  // pixels started and not yet popped
  logic           rdy_a, rdy_b;
  pixel_t [NTAP-1:0] win;
  logic           ctr_valid;
  logic           pop;

  assign push_ok  = rdy_a && rdy_b && (int'(occ) < OUT_DEPTH);
  assign in_ready = push_ok && !flushing;
  assign push     = push_ok && (flushing || in_valid);
  assign start    = push && ctr_valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      in_row   <= '0;
      in_col   <= '0;
      fcnt     <= '0;
      flushing <= 1'b0;
    end else if (push) begin
      if (flushing) begin
        fcnt <= fcnt + 16'd1;
        if (fcnt == img_w) flushing <= 1'b0;
      end else if (in_col == img_w - 16'd1) begin
        in_col <= '0;
        if (in_row == img_h - 16'd1) begin
          in_row   <= '0;
          fcnt     <= '0;
          flushing <= 1'b1;
        end else begin
          in_row <= in_row + 16'd1;
        end
      end else begin
        in_col <= in_col + 16'd1;
      end
    end
  end

  window_fifo #(.IMG_W(IMG_W), .IMG_H(IMG_H), .WD($bits(pixel_t))) u_fifo (
    .clk(clk), .rst_n(rst_n), .push(push), .sof(!flushing && in_row == '0 && in_col == '0), .img_w(img_w), .img_h(img_h),
    .din(flushing ? '0 : in_px), .win(win),
    .ctr_valid(ctr_valid), .ctr_row(), .ctr_col()
  );

  // ---------------- the two 2D convolution units ----------------
  data_t [NTAP-1:0] win_y, win_u;
  always_comb
    for (int i = 0; i < NTAP; i++) begin
      win_y[i] = win[i].y;
      win_u[i] = win[i].u;
    end

  logic done_a, done_b;
  acc_t sum_a, sum_b;

  conv2d_unit #(.N_SHIFT(N_SHIFT), .SPARSITY(SPARSITY), .REPETITION(REPETITION)) u_conv_a (
    .clk(clk), .rst_n(rst_n), .cfg_load(cfg_load), .coef(tpl.a),
    .start(start), .win(win_y), .ready(rdy_a), .done(done_a), .sum(sum_a), .cycles(cycles_a)
  );

  conv2d_unit #(.N_SHIFT(N_SHIFT), .SPARSITY(SPARSITY), .REPETITION(REPETITION)) u_conv_b (
    .clk(clk), .rst_n(rst_n), .cfg_load(cfg_load), .coef(tpl.b),
    .start(start), .win(win_u), .ready(rdy_b), .done(done_b), .sum(sum_b), .cycles(cycles_b)
  );

  // centre cells (u, x) of the windows in flight, in start order
  pixel_t       ctr_q [OUT_DEPTH];
  logic [QW-1:0] cq_wr, cq_rd;

  // hold the first of the two sums that arrives
  logic hold_a_v, hold_b_v, both;
  acc_t hold_a, hold_b, use_a, use_b;

  assign both  = (hold_a_v || done_a) && (hold_b_v || done_b);
  assign use_a = hold_a_v ? hold_a : sum_a;
  assign use_b = hold_b_v ? hold_b : sum_b;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      hold_a_v <= 1'b0;
      hold_b_v <= 1'b0;
      cq_wr    <= '0;
      cq_rd    <= '0;
    end else begin
      if (both) begin
        hold_a_v <= 1'b0;
        hold_b_v <= 1'b0;
      end else begin
        if (done_a) hold_a_v <= 1'b1;
        if (done_b) hold_b_v <= 1'b1;
      end
      if (start) cq_wr <= cq_wr + 1'b1;
      if (both)  cq_rd <= cq_rd + 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (done_a && !both) hold_a <= sum_a;
    if (done_b && !both) hold_b <= sum_b;
    if (start) ctr_q[cq_wr] <= win[4];
  end

  // ---------------- sum, S2, state update, f(x) ----------------
  pixel_t ctr;
  sum_t   dsum, s2q;
  logic   s2_v;
  pixel_t s2_ctr;

  assign ctr  = ctr_q[cq_rd];
  assign dsum = sum_t'(use_a) + sum_t'(use_b)
              + (sum_t'(tpl.bias) <<< (-QK)) - (sum_t'(ctr.x) <<< (-QK));

  shifter_s2 #(.W(SW)) u_s2 (
    .clk(clk), .en(both), .d(dsum), .dt_shift(tpl.dt_shift), .q(s2q)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) s2_v <= 1'b0;
    else        s2_v <= both;
  end
  always_ff @(posedge clk) if (both) s2_ctr <= ctr;

  sum_t  xw, xf;
  data_t x_new, y_new;
  always_comb begin
    xw = (sum_t'(s2_ctr.x) <<< (-QK)) + s2q;
    xf = xw >>> (-QK);
    if (xf > sum_t'(data_t'({1'b0, {(DW-1){1'b1}}})))       x_new = {1'b0, {(DW-1){1'b1}}};
    else if (xf < sum_t'(data_t'({1'b1, {(DW-1){1'b0}}})))  x_new = {1'b1, {(DW-1){1'b0}}};
    else                                                     x_new = xf[DW-1:0];
  end

  cenn_output_fn u_f (.x(x_new), .y(y_new));

  // ---------------- output FIFO ----------------
  pixel_t        oq [OUT_DEPTH];
  logic [QW-1:0] oq_wr, oq_rd;
  logic [QW:0]   oq_cnt;

  assign out_valid = oq_cnt != 0;
  assign out_px    = oq[oq_rd];
  assign pop       = out_valid && out_ready;

  always_ff @(posedge clk) begin
    if (s2_v) oq[oq_wr] <= '{u: s2_ctr.u, x: x_new, y: y_new};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      oq_wr  <= '0;
      oq_rd  <= '0;
      oq_cnt <= '0;
      occ    <= '0;
    end else begin
      if (s2_v) oq_wr <= oq_wr + 1'b1;
      if (pop)  oq_rd <= oq_rd + 1'b1;
      oq_cnt <= oq_cnt + $bits(oq_cnt)'(s2_v) - $bits(oq_cnt)'(pop);
      occ    <= occ + $bits(occ)'(start) - $bits(occ)'(pop);
    end
  end

  // the output FIFO never overflows: a slot is reserved at start
  assert property (@(posedge clk) disable iff (!rst_n) !(s2_v && oq_cnt == (QW+1)'(OUT_DEPTH) && !pop))
    else $error("cenn_stage: output FIFO overflow");

endmodule
