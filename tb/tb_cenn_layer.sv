// tb_cenn_layer: end-to-end test of a 4-stage layer on small frames.
//
// Each stage gets its own template set (time-variant templates):
//   stage 0  the worked-example template for A (zeros and a four-fold
//            repeated coefficient: sparsity and repetition, 4 cycles);
//   stage 1  random sparse templates;
//   stage 2  dense templates with large coefficients (2^5), so that x'
//            reaches the 18-bit limit and saturates;
//   stage 3  dt = 1 (discrete-time CeNN).
// Frames of two sizes (12x7 and 9x5, inside the 12x8 maximum) are driven
// with random input gaps and output back-pressure. Every output pixel is
// compared with four reference Euler steps. The test also counts how often
// each mechanism happened and fails if one never did: windows processed
// with zero taps skipped, with repetition pre-summing, input stalls (pixel
// offered but not taken), output back-pressure, f(x) saturation, x'
// saturation, frame flushes, a frame-size change.
module tb_cenn_layer;
  import cenn_pkg::*;
  import cenn_ref_pkg::*;

  localparam int NS = 4, WMAX = 12, HMAX = 8;

  logic clk = 1'b0, rst_n = 1'b0, cfg_load = 1'b0;
  tpl_t [NS-1:0] tpl;
  logic [15:0] img_w, img_h;
  logic in_valid = 1'b0, in_ready, out_valid, out_ready = 1'b0;
  pixel_t in_px, out_px;
  logic [NS-1:0][3:0] cyc_a, cyc_b;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  cenn_layer #(.NUM_STAGES(NS), .IMG_W(WMAX), .IMG_H(HMAX)) dut (
    .clk(clk), .rst_n(rst_n), .cfg_load(cfg_load), .tpl(tpl), .img_w(img_w), .img_h(img_h),
    .in_valid(in_valid), .in_ready(in_ready), .in_px(in_px),
    .out_valid(out_valid), .out_ready(out_ready), .out_px(out_px),
    .cycles_a(cyc_a), .cycles_b(cyc_b));

  // mechanism counters
  int n_sparse = 0, n_rep = 0, n_in_stall = 0, n_out_stall = 0;
  int n_ysat = 0, n_xsat = 0, n_flush = 0, n_resize = 0;

  always @(posedge clk) begin
    if (in_valid && !in_ready) n_in_stall++;
    if (out_valid && !out_ready) n_out_stall++;
  end

  function automatic int nnz(qcoef_t [NTAP-1:0] c);
    int n = 0;
    for (int i = 0; i < NTAP; i++) n += c[i].nz ? 1 : 0;
    return n;
  endfunction

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  initial begin
    repeat (500000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_frame(input int w, input int h, input int gap_pct, input int stall_pct);
    data_t u[], x[], y[], xo[], yo[], x0[], y0[];
    int sent = 0, got = 0, npix = w * h;
    u = new[npix]; x = new[npix]; y = new[npix]; xo = new[npix]; yo = new[npix];
    for (int i = 0; i < npix; i++) begin
      u[i] = data_t'($urandom_range(8192)) - 18'sd4096;
      x[i] = data_t'($urandom_range(16384)) - 18'sd8192;
      y[i] = clamp_y(longint'(x[i]));
    end
    x0 = x;
    y0 = y;
    for (int s = 0; s < NS; s++) begin
      euler_step(tpl[s], w, h, u, x, y, xo, yo);
      x = xo;
      y = yo;
      if (s == 2)
        for (int i = 0; i < npix; i++) if (x[i] == 18'sd131071 || x[i] == -18'sd131072) n_xsat++;
    end
    fork
      while (sent < npix) begin
        @(negedge clk);
        in_valid = ($urandom_range(99) >= gap_pct);
        in_px = '{u: u[sent], x: x0[sent], y: y0[sent]};
        @(posedge clk);
        if (in_valid && in_ready) sent++;
        #1 in_valid = 1'b0;
      end
      while (got < npix) begin
        @(negedge clk);
        out_ready = ($urandom_range(99) >= stall_pct);
        @(posedge clk);
        if (out_valid && out_ready) begin
          check(out_px.u == u[got], "u forwarded");
          check(out_px.x == x[got], $sformatf("x pixel %0d: got %0d want %0d", got, out_px.x, x[got]));
          check(out_px.y == y[got], $sformatf("y pixel %0d: got %0d want %0d", got, out_px.y, y[got]));
          if (out_px.y == 18'sd4096 || out_px.y == -18'sd4096) n_ysat++;
          // every pixel went through stage 1 (sparse A) and stage 0 (repeated A)
          if (int'(cyc_a[1]) < 9 && int'(cyc_a[1]) <= nnz(tpl[1].a)) n_sparse++;
          if (int'(cyc_a[0]) < nnz(tpl[0].a)) n_rep++;
          got++;
        end
      end
    join
    n_flush++;
    @(negedge clk);
    out_ready = 1'b0;
  endtask

  initial begin
    tpl = '0;
    img_w = 16'(WMAX);
    img_h = 16'(7);
    // stage 0: worked example for A, symmetric B
    tpl[0].a[1] = mk_coef(0, -1); tpl[0].a[3] = mk_coef(0, -1); tpl[0].a[4] = mk_coef(1, 2);
    tpl[0].a[5] = mk_coef(0, -1); tpl[0].a[7] = mk_coef(0, -1); tpl[0].a[8] = mk_coef(0, 0);
    for (int i = 0; i < NTAP; i++) tpl[0].b[i] = (i == 4) ? mk_coef(0, 1) : mk_coef(1, -3);
    tpl[0].bias = 18'sd512;
    tpl[0].dt_shift = 3'd2;
    // stage 1: random sparse
    for (int i = 0; i < NTAP; i++) begin
      tpl[1].a[i] = rand_coef(50);
      tpl[1].b[i] = rand_coef(50);
    end
    tpl[1].a[0] = '0;
    tpl[1].bias = -18'sd300;
    tpl[1].dt_shift = 3'd4;
    // stage 2: dense, large
    for (int i = 0; i < NTAP; i++) begin
      tpl[2].a[i] = mk_coef(0, 5);
      tpl[2].b[i] = mk_coef(i % 2, 5);
    end
    tpl[2].bias = 18'sd4000;
    tpl[2].dt_shift = 3'd0;
    // stage 3: discrete-time
    for (int i = 0; i < NTAP; i++) begin
      tpl[3].a[i] = (i == 4) ? mk_coef(0, 1) : '0;
      tpl[3].b[i] = (i % 2 == 0) ? mk_coef(0, -2) : '0;
    end
    tpl[3].bias = 18'sd0;
    tpl[3].dt_shift = 3'd0;

    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    cfg_load = 1'b1;
    @(negedge clk);
    cfg_load = 1'b0;
    repeat (40) @(negedge clk);   // schedules are built in 29 cycles
    check(cyc_a[0] == 4, "stage 0 A: 4 cycles per pixel");

    run_frame(WMAX, 7, 20, 20);
    run_frame(WMAX, 7, 0, 50);
    img_w = 16'd9;
    img_h = 16'd5;
    n_resize++;
    run_frame(9, 5, 40, 10);
    run_frame(9, 5, 0, 0);

    check(n_sparse > 0, "sparsity-skipped windows seen");
    check(n_rep > 0, "repetition windows seen");
    check(n_in_stall > 0, "input stalls seen");
    check(n_out_stall > 0, "output back-pressure seen");
    check(n_ysat > 0, "f(x) saturation seen");
    check(n_xsat > 0, "x' saturation seen");
    check(n_flush == 4, "frame flushes");
    check(n_resize > 0, "frame size change");
    $display("mechanisms: sparse=%0d repetition=%0d in_stall=%0d out_stall=%0d ysat=%0d xsat=%0d flush=%0d resize=%0d",
             n_sparse, n_rep, n_in_stall, n_out_stall, n_ysat, n_xsat, n_flush, n_resize);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
