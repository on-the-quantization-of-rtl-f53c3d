// tb_cenn_layer_full: one full-size frame through the layer at its default
// parameters (24 stages, 1920 x 1080 pixels, one shifter per convolution
// unit with sparsity and repetition scheduling).
//
// Templates follow the symmetric structure used for medical image
// segmentation, A = {a0 a1 a2; a3 a4 a3; a2 a1 a0} and
// B = {a5 a6 a7; a8 a9 a8; a7 a6 a5}, with powers-of-two values chosen here
// (a7 = a5, so B has a four-fold repeat); dt changes from stage to stage
// (time-variant templates). The input is a synthetic image with a gradient
// and a few bright discs; x(0) = u. The output after 24 iterations is
// compared pixel by pixel with the reference model, and the run must take
// one pixel per max(cycles) clock cycles (here 8, the figure the paper
// reports for one shifter with repetition).
module tb_cenn_layer_full;
  import cenn_pkg::*;
  import cenn_ref_pkg::*;

  localparam int NS = 24, W = 1920, H = 1080, NPIX = W * H;

  logic clk = 1'b0, rst_n = 1'b0, cfg_load = 1'b0;
  tpl_t [NS-1:0] tpl;
  logic in_valid = 1'b0, in_ready, out_valid, out_ready = 1'b1;
  pixel_t in_px, out_px;
  logic [NS-1:0][3:0] cyc_a, cyc_b;
  int checks = 0, failures = 0;
  longint cyc_now = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cyc_now++;

  cenn_layer dut (
    .clk(clk), .rst_n(rst_n), .cfg_load(cfg_load), .tpl(tpl), .img_w(16'(W)), .img_h(16'(H)),
    .in_valid(in_valid), .in_ready(in_ready), .in_px(in_px),
    .out_valid(out_valid), .out_ready(out_ready), .out_px(out_px),
    .cycles_a(cyc_a), .cycles_b(cyc_b));

  initial begin
    repeat (40000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  data_t u[], x[], y[], xo[], yo[];
  longint t_first_out, t_last_out, t_first_in;

  initial begin
    qcoef_t [9:0] a;
    int sent = 0, got = 0, nbad = 0;
    u = new[NPIX]; x = new[NPIX]; y = new[NPIX]; xo = new[NPIX]; yo = new[NPIX];
    for (int i = 0; i < H; i++)
      for (int j = 0; j < W; j++) begin
        int v = (j * 8192) / W - 4096;
        int di = (i % 270) - 135, dj = (j % 320) - 160;
        if (di * di + dj * dj < 60 * 60) v = 4096;
        u[i * W + j] = data_t'(v);
        x[i * W + j] = data_t'(v);
        y[i * W + j] = clamp_y(longint'(v));
      end
    for (int s = 0; s < NS; s++) begin
      a[0] = mk_coef(0, -3); a[1] = mk_coef(0, -2); a[2] = mk_coef(1, -3);
      a[3] = mk_coef(1, -1 - (s % 2)); a[4] = mk_coef(0, 1);
      a[5] = mk_coef(1, -2); a[6] = mk_coef(0, -1); a[7] = a[5];
      a[8] = mk_coef(1, -4); a[9] = mk_coef(0, 0);
      tpl[s].a = {a[0], a[1], a[2], a[3], a[4], a[3], a[2], a[1], a[0]};
      tpl[s].b = {a[5], a[6], a[7], a[8], a[9], a[8], a[7], a[6], a[5]};
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
    if (cyc_a[0] != 4'd8 || cyc_b[0] != 4'd6) begin
      failures++;
      $display("schedule lengths %0d %0d", cyc_a[0], cyc_b[0]);
    end
    // rate: one output pixel per 8 cycles in steady state
    checks++;
    if (t_last_out - t_first_out != longint'(NPIX - 1) * 8) begin
      failures++;
      $display("rate: %0d cycles for %0d pixels", t_last_out - t_first_out, NPIX);
    end
    $display("frame: first input at %0d, first output at %0d, last output at %0d", t_first_in, t_first_out, t_last_out);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
