// tb_cenn_stage: runs frames through one CeNN stage and compares every output
// pixel (u, x', y') with the reference Euler step of cenn_ref_pkg.
//
// Frames: 9x6 pixels, random u, x, y (x partly beyond +-1 so that f(x)
// saturates), random templates and dt, bias. Phase 1 drives the input with
// random gaps and the output with random back-pressure; phase 2 runs a
// frame with no gaps and checks the rate: one window per max(cycles_a,
// cycles_b) clock cycles. Phase 3 uses the worked-example template for A
// (4 cycles) and a dense B, so that the slower unit sets the rate.
module tb_cenn_stage;
  import cenn_pkg::*;
  import cenn_ref_pkg::*;

  localparam int W = 9, H = 6, NPIX = W * H;

  logic clk = 1'b0, rst_n = 1'b0, cfg_load = 1'b0;
  tpl_t tpl;
  logic in_valid = 1'b0, in_ready, out_valid, out_ready = 1'b0;
  pixel_t in_px, out_px;
  logic [3:0] cyc_a, cyc_b;
  int checks = 0, failures = 0;
  int cyc_now = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cyc_now++;

  cenn_stage #(.IMG_W(W), .IMG_H(H)) dut (
    .clk(clk), .rst_n(rst_n), .cfg_load(cfg_load), .tpl(tpl), .img_w(16'(W)), .img_h(16'(H)),
    .in_valid(in_valid), .in_ready(in_ready), .in_px(in_px),
    .out_valid(out_valid), .out_ready(out_ready), .out_px(out_px),
    .cycles_a(cyc_a), .cycles_b(cyc_b));

  // output times, for the rate check (outputs leave at the rate windows start)
  int first_start, last_start, n_start;
  always @(posedge clk)
    if (out_valid && out_ready) begin
      if (n_start == 0) first_start = cyc_now;
      last_start = cyc_now;
      n_start++;
    end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_frame(input int gap_pct, input int stall_pct);
    data_t u[], x[], y[], xo[], yo[];
    int sent = 0, got = 0;
    u = new[NPIX]; x = new[NPIX]; y = new[NPIX]; xo = new[NPIX]; yo = new[NPIX];
    for (int i = 0; i < NPIX; i++) begin
      u[i] = data_t'($urandom_range(8192)) - 18'sd4096;
      x[i] = data_t'($urandom_range(16384)) - 18'sd8192;
      y[i] = clamp_y(longint'(x[i]));
    end
    euler_step(tpl, W, H, u, x, y, xo, yo);
    n_start = 0;
    fork
      while (sent < NPIX) begin
        @(negedge clk);
        in_valid = ($urandom_range(99) >= gap_pct);
        in_px = '{u: u[sent], x: x[sent], y: y[sent]};
        @(posedge clk);
        if (in_valid && in_ready) sent++;
        #1 in_valid = 1'b0;
      end
      while (got < NPIX) begin
        @(negedge clk);
        out_ready = ($urandom_range(99) >= stall_pct);
        @(posedge clk);
        if (out_valid && out_ready) begin
          check(out_px.u == u[got], "u forwarded");
          check(out_px.x == xo[got], $sformatf("x' pixel %0d: got %0d want %0d", got, out_px.x, xo[got]));
          check(out_px.y == yo[got], $sformatf("y' pixel %0d: got %0d want %0d", got, out_px.y, yo[got]));
          got++;
        end
      end
    join
    @(negedge clk);
    out_ready = 1'b0;
  endtask

  task automatic load(input tpl_t t);
    @(negedge clk);
    tpl = t;
    cfg_load = 1'b1;
    @(negedge clk);
    cfg_load = 1'b0;
  endtask

  function automatic tpl_t rand_tpl();
    tpl_t t;
    for (int i = 0; i < NTAP; i++) begin
      t.a[i] = ($urandom_range(2) == 0) ? mk_coef(0, -2) : rand_coef(40);
      t.b[i] = ($urandom_range(2) == 0) ? mk_coef(1, -1) : rand_coef(30);
    end
    t.bias = data_t'($urandom_range(4096)) - 18'sd2048;
    t.dt_shift = 3'($urandom_range(7));
    return t;
  endfunction

  initial begin
    tpl_t t;
    int p;
    tpl = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    // phase 1: random templates, gaps and back-pressure
    for (int n = 0; n < 6; n++) begin
      load(rand_tpl());
      run_frame(30, 30);
    end
    // phase 2: streaming rate
    for (int n = 0; n < 3; n++) begin
      t = rand_tpl();
      if (n == 2) t.dt_shift = 0;   // discrete-time CeNN, dt = 1
      load(t);
      run_frame(0, 0);
      p = (cyc_a > cyc_b) ? int'(cyc_a) : int'(cyc_b);
      check(n_start == NPIX, "one output per pixel");
      check(last_start - first_start == (NPIX - 1) * p,
            $sformatf("rate: %0d cycles for %0d windows at %0d", last_start - first_start, NPIX, p));
    end
    // phase 3: worked-example A (4 cycles), dense B (9 non-zero taps)
    t = '0;
    t.a[1] = mk_coef(0, -1); t.a[3] = mk_coef(0, -1); t.a[4] = mk_coef(1, 2);
    t.a[5] = mk_coef(0, -1); t.a[7] = mk_coef(0, -1); t.a[8] = mk_coef(0, 0);
    for (int i = 0; i < NTAP; i++) t.b[i] = mk_coef(i % 2, i - 4);
    t.bias = 18'sd1024;
    t.dt_shift = 3'd3;
    load(t);
    run_frame(0, 0);
    check(cyc_a == 4 && cyc_b == 9, "example cycles 4 and 9");
    check(last_start - first_start == (NPIX - 1) * 9, "rate set by the slower unit");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
