// tb_conv2d_unit: streams random windows through the 3x3 convolution unit in
// five configurations (one shifter with sparsity and repetition, one shifter
// dense, nine shifters, three shifters, one shifter with sparsity only) and
// checks
//   * every result against sum c_k d_k computed directly,
//   * the cycles per window (4 for the worked example, 9 dense, 1 with nine
//     shifters, ceil(nnz/3) with three, nnz with sparsity only) and that
//     back-to-back windows are accepted at that rate,
//   * the latency start -> done of cycles + 2.
module tb_conv2d_unit;
  import cenn_pkg::*;
  import cenn_ref_pkg::*;

  localparam int NCFG = 5;

  logic clk = 1'b0, rst_n = 1'b0, cfg_load = 1'b0;
  qcoef_t [NTAP-1:0] coef;
  data_t  [NTAP-1:0] win;
  logic   [NCFG-1:0] start, ready, done;
  acc_t   [NCFG-1:0] sum;
  logic   [NCFG-1:0][3:0] cyc;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  conv2d_unit #(.N_SHIFT(1)) dut0 (.clk(clk), .rst_n(rst_n), .cfg_load(cfg_load), .coef(coef),
    .start(start[0]), .win(win), .ready(ready[0]), .done(done[0]), .sum(sum[0]), .cycles(cyc[0]));
  conv2d_unit #(.N_SHIFT(1), .SPARSITY(1'b0), .REPETITION(1'b0)) dut1 (.clk(clk), .rst_n(rst_n),
    .cfg_load(cfg_load), .coef(coef), .start(start[1]), .win(win), .ready(ready[1]), .done(done[1]),
    .sum(sum[1]), .cycles(cyc[1]));
  conv2d_unit #(.N_SHIFT(9)) dut2 (.clk(clk), .rst_n(rst_n), .cfg_load(cfg_load), .coef(coef),
    .start(start[2]), .win(win), .ready(ready[2]), .done(done[2]), .sum(sum[2]), .cycles(cyc[2]));
  conv2d_unit #(.N_SHIFT(3)) dut3 (.clk(clk), .rst_n(rst_n), .cfg_load(cfg_load), .coef(coef),
    .start(start[3]), .win(win), .ready(ready[3]), .done(done[3]), .sum(sum[3]), .cycles(cyc[3]));
  conv2d_unit #(.N_SHIFT(1), .REPETITION(1'b0)) dut4 (.clk(clk), .rst_n(rst_n), .cfg_load(cfg_load),
    .coef(coef), .start(start[4]), .win(win), .ready(ready[4]), .done(done[4]), .sum(sum[4]),
    .cycles(cyc[4]));

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

  // run NWIN back-to-back windows through configuration k
  task automatic run_cfg(input int k, input int nwin, input int exp_cycles);
    longint exp_q [$];
    int t_start [$];
    int issued = 0, got = 0, cyc_now = 0, t_first = -1, t_last = 0;
    data_t [NTAP-1:0] nxt;
    check(int'(cyc[k]) == exp_cycles, $sformatf("cfg %0d cycles per window", k));
    for (int i = 0; i < NTAP; i++) nxt[i] = data_t'($urandom);
    fork
      begin
        while (issued < nwin) begin
          @(negedge clk);
          win = nxt;
          start[k] = 1'b1;
          #1;
          if (ready[k]) begin
            longint dd [NTAP];
            for (int i = 0; i < NTAP; i++) dd[i] = longint'(nxt[i]);
            exp_q.push_back(conv9(coef, dd));
            t_start.push_back(cyc_now);
            if (t_first < 0) t_first = cyc_now;
            t_last = cyc_now;
            issued++;
            for (int i = 0; i < NTAP; i++) nxt[i] = data_t'($urandom);
          end
          @(posedge clk);
        end
        @(negedge clk);
        start[k] = 1'b0;
      end
      begin
        while (got < nwin) begin
          @(posedge clk);
          cyc_now++;
          #1;
          if (done[k]) begin
            check(longint'(sum[k]) == exp_q.pop_front(), $sformatf("cfg %0d result", k));
            check(cyc_now - t_start.pop_front() == exp_cycles + 2, $sformatf("cfg %0d latency", k));
            got++;
          end
        end
      end
    join
    check(t_last - t_first == (nwin - 1) * exp_cycles, $sformatf("cfg %0d rate %0d", k, t_last - t_first));
  endtask

  initial begin
    qcoef_t a1, a2, a3;
    start = '0;
    win = '0;
    coef = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    // worked example template
    a1 = mk_coef(0, -1); a2 = mk_coef(1, 2); a3 = mk_coef(0, 0);
    coef = '0;
    coef[1] = a1; coef[3] = a1; coef[4] = a2; coef[5] = a1; coef[7] = a1; coef[8] = a3;
    @(negedge clk); cfg_load = 1'b1; @(negedge clk); cfg_load = 1'b0;
    check(ready == '0, "not ready while the schedule is built");
    wait (ready == '1);
    run_cfg(0, 50, 4);
    run_cfg(1, 50, 9);
    run_cfg(2, 50, 1);
    run_cfg(3, 50, 2);
    run_cfg(4, 50, 6);
    // random templates
    for (int n = 0; n < 40; n++) begin
      int nnz;
      for (int i = 0; i < NTAP; i++) coef[i] = ($urandom_range(2) == 0) ? mk_coef(1, 2) : rand_coef(40);
      @(negedge clk); cfg_load = 1'b1; @(negedge clk); cfg_load = 1'b0;
      wait (ready == '1);
      @(negedge clk);
      nnz = 0;
      for (int i = 0; i < NTAP; i++) nnz += coef[i].nz ? 1 : 0;
      check(int'(cyc[0]) <= (nnz == 0 ? 1 : nnz), "sparsity bound on cycles");
      run_cfg(0, 20, int'(cyc[0]));
      run_cfg(1, 10, 9);
      run_cfg(2, 20, 1);
      run_cfg(3, 20, nnz == 0 ? 1 : (nnz + 2) / 3);
      run_cfg(4, 20, nnz == 0 ? 1 : nnz);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
