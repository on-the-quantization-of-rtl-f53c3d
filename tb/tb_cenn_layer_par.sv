// tb_cenn_layer_par: the fully parallel configuration, nine shifters per
// convolution unit and seven stages (the stage count reported for this
// configuration on the small reference FPGA), on a 64 x 16 frame.
//
// With nine shifters every window takes one clock cycle whatever the
// template, so a frame streams at one pixel per cycle; the test checks the
// results of seven Euler steps against the reference model and that the
// outputs leave back to back. The layer runs in its time-invariant mode
// (TIME_VARIANT = 0): every stage must use the templates of stage 0 even
// though tpl[1..] hold different random sets.
module tb_cenn_layer_par;
  import cenn_pkg::*;
  import cenn_ref_pkg::*;

  localparam int NS = 7, W = 64, H = 16, NPIX = W * H;

  logic clk = 1'b0, rst_n = 1'b0, cfg_load = 1'b0;
  tpl_t [NS-1:0] tpl;
  logic in_valid = 1'b0, in_ready, out_valid, out_ready = 1'b1;
  pixel_t in_px, out_px;
  logic [NS-1:0][3:0] cyc_a, cyc_b;
  int checks = 0, failures = 0;
  int cyc_now = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cyc_now++;

  cenn_layer #(.NUM_STAGES(NS), .IMG_W(W), .IMG_H(H), .N_SHIFT(9), .TIME_VARIANT(1'b0)) dut (
    .clk(clk), .rst_n(rst_n), .cfg_load(cfg_load), .tpl(tpl), .img_w(16'(W)), .img_h(16'(H)),
    .in_valid(in_valid), .in_ready(in_ready), .in_px(in_px),
    .out_valid(out_valid), .out_ready(out_ready), .out_px(out_px),
    .cycles_a(cyc_a), .cycles_b(cyc_b));

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    data_t u[], x[], y[], xo[], yo[], x0[], y0[];
    int sent = 0, got = 0, t_first = 0, t_last = 0;
    u = new[NPIX]; x = new[NPIX]; y = new[NPIX]; xo = new[NPIX]; yo = new[NPIX];
    for (int i = 0; i < NPIX; i++) begin
      u[i] = data_t'($urandom_range(8192)) - 18'sd4096;
      x[i] = u[i];
      y[i] = clamp_y(longint'(x[i]));
    end
    x0 = x;
    y0 = y;
    for (int s = 0; s < NS; s++) begin
      for (int i = 0; i < NTAP; i++) begin
        tpl[s].a[i] = rand_coef(10);
        tpl[s].b[i] = rand_coef(10);
      end
      tpl[s].bias = data_t'($urandom_range(2048)) - 18'sd1024;
      tpl[s].dt_shift = 3'($urandom_range(1, 4));
      euler_step(tpl[0], W, H, u, x, y, xo, yo);
      x = xo;
      y = yo;
    end
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
        in_px = '{u: u[sent], x: x0[sent], y: y0[sent]};
        @(posedge clk);
        if (in_ready) sent++;
        #1 in_valid = 1'b0;
      end
      while (got < NPIX) begin
        @(posedge clk);
        if (out_valid) begin
          checks++;
          if (out_px.u != u[got] || out_px.x != x[got] || out_px.y != y[got]) begin
            failures++;
            if (failures < 10) $display("pixel %0d: x %0d want %0d", got, out_px.x, x[got]);
          end
          if (got == 0) t_first = cyc_now;
          t_last = cyc_now;
          got++;
        end
      end
    join
    for (int s = 0; s < NS; s++) begin
      checks++;
      if (cyc_a[s] != 4'd1 || cyc_b[s] != 4'd1) failures++;
    end
    checks++;
    if (t_last - t_first != NPIX - 1) begin
      failures++;
      $display("rate: %0d cycles for %0d pixels", t_last - t_first, NPIX);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
