// tb_cenn_layer_obstacle: the obstacle-detection template structure through
// the layer with its default 24 stages and one shifter (sparsity and
// repetition on), on a 128 x 72 frame; the frame size of that application is
// not known, so a small one is used.
//
// The templates have one value on the eight neighbours and another at the
// centre, A = {a0 x8, a1} and B = {a2 x8, a3}, with powers-of-two values chosen
// here. Nine taps are active and eight share a value, so the scheduler
// pre-sums four of them (at most half of the active taps) and a pixel takes
// 9 - 4 + 1 = 6 cycles in both convolution units. The test checks those
// schedule lengths, every output pixel against the reference model after 24
// Euler steps, and a steady rate of one pixel per 6 clock cycles.
module tb_cenn_layer_obstacle;
  import cenn_pkg::*;
  import cenn_ref_pkg::*;

  localparam int NS = 24, W = 128, H = 72, NPIX = W * H;

  logic clk = 1'b0, rst_n = 1'b0, cfg_load = 1'b0;
  tpl_t [NS-1:0] tpl;
  logic in_valid = 1'b0, in_ready, out_valid, out_ready = 1'b1;
  pixel_t in_px, out_px;
  logic [NS-1:0][3:0] cyc_a, cyc_b;
  int checks = 0, failures = 0;
  longint cyc_now = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cyc_now++;

  cenn_layer #(.IMG_W(W), .IMG_H(H)) dut (
    .clk(clk), .rst_n(rst_n), .cfg_load(cfg_load), .tpl(tpl), .img_w(16'(W)), .img_h(16'(H)),
    .in_valid(in_valid), .in_ready(in_ready), .in_px(in_px),
    .out_valid(out_valid), .out_ready(out_ready), .out_px(out_px),
    .cycles_a(cyc_a), .cycles_b(cyc_b));

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  data_t u[], x[], y[], xo[], yo[];
  longint t_first_out, t_last_out, t_first_in;

  initial begin
    qcoef_t [3:0] a;
    int sent = 0, got = 0, nbad = 0;
    u = new[NPIX]; x = new[NPIX]; y = new[NPIX]; xo = new[NPIX]; yo = new[NPIX];
    for (int i = 0; i < H; i++)
      for (int j = 0; j < W; j++) begin
        int v = (j * 8192) / W - 4096;
        int di = (i % 36) - 18, dj = (j % 40) - 20;
        if (di * di + dj * dj < 12 * 12) v = 4096;
        u[i * W + j] = data_t'(v);
        x[i * W + j] = data_t'(v);
        y[i * W + j] = clamp_y(longint'(v));
      end
    for (int s = 0; s < NS; s++) begin
      a[0] = mk_coef(1, -3 - (s % 2)); a[1] = mk_coef(0, 1);
      a[2] = mk_coef(0, -3); a[3] = mk_coef(0, 2 - (s % 3));
      tpl[s].a = {a[0], a[0], a[0], a[0], a[1], a[0], a[0], a[0], a[0]};
      tpl[s].b = {a[2], a[2], a[2], a[2], a[3], a[2], a[2], a[2], a[2]};
      tpl[s].bias = data_t'(-256 + 32 * (s % 5));
      tpl[s].dt_shift = 3'(1 + (s % 3));
    end
    // reference: NS Euler steps
    fork
      begin
        data_t xr[], yr[];
        xr = x;
        yr = y;
        for (int s = 0; s < NS; s++) begin
          euler_step(tpl[s], W, H, u, xr, yr, xo, yo);
          xr = xo;
          yr = yo;
        end
      end
    join
    $display("reference computed");

    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    cfg_load = 1'b1;
    @(negedge clk);
    cfg_load = 1'b0;

    fork
      while (sent < NPIX) begin
        @(negedge clk);
        in_valid = 1'b1;
        in_px = '{u: u[sent], x: x[sent], y: y[sent]};
        @(posedge clk);
        if (in_ready) begin
          if (sent == 0) t_first_in = cyc_now;
          sent++;
        end
        #1 in_valid = 1'b0;
      end
      while (got < NPIX) begin
        @(posedge clk);
        if (out_valid) begin
          checks++;
          if (out_px.u != u[got] || out_px.x != xo[got] || out_px.y != yo[got]) begin
            failures++;
            if (nbad++ < 10) $display("pixel %0d: x %0d want %0d, y %0d want %0d", got, out_px.x, xo[got], out_px.y, yo[got]);
          end
          if (got == 0) t_first_out = cyc_now;
          t_last_out = cyc_now;
          got++;
          if (got % (NPIX / 8) == 0) $display("%0d pixels out at cycle %0d", got, cyc_now);
        end
      end
    join
    checks++;
    if (cyc_a[0] != 4'd6 || cyc_b[0] != 4'd6) begin
      failures++;
      $display("schedule lengths %0d %0d", cyc_a[0], cyc_b[0]);
    end
    // rate: one output pixel per 6 cycles in steady state
    checks++;
    if (t_last_out - t_first_out != longint'(NPIX - 1) * 6) begin
      failures++;
      $display("rate: %0d cycles for %0d pixels", t_last_out - t_first_out, NPIX);
    end
    $display("frame: first input at %0d, first output at %0d, last output at %0d", t_first_in, t_first_out, t_last_out);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
