// tb_data_scheduler: checks the schedules built from 3x3 templates.
//
// 1. The worked example of the architecture (taps b1..b9 with coefficients
//    0 a1 0 / a1 a2 a1 / 0 a1 a3) must give exactly: shifter b5*a2, b9*a3,
//    b8*a1, (b2+b4+b6)*a1; side adder b2, b4, b6; 4 cycles.
// 2. For random templates (with many repeats and zeros) the schedule is
//    executed on random data and must give sum c_k d_k; the group sum must
//    not be used before the adder has finished; every non-zero tap must be
//    used exactly once; the cycle count must be nnz without repetition and
//    below nnz when two or more taps are pre-summed.
// 3. Instances without sparsity / with nine shifters: 9 items, 9 and 1 cycles.
module tb_data_scheduler;
  import cenn_pkg::*;
  import cenn_ref_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0, load = 1'b0;
  qcoef_t [NTAP-1:0] coef;
  sched_t s1, s_ns, s9;
  logic b1, b_ns, b9;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  data_scheduler #(.N_SHIFT(1)) dut (.clk(clk), .rst_n(rst_n), .load(load), .coef(coef), .busy(b1), .sched(s1));
  data_scheduler #(.N_SHIFT(1), .SPARSITY(1'b0), .REPETITION(1'b0)) dut_dense (
    .clk(clk), .rst_n(rst_n), .load(load), .coef(coef), .busy(b_ns), .sched(s_ns));
  data_scheduler #(.N_SHIFT(9)) dut9 (.clk(clk), .rst_n(rst_n), .load(load), .coef(coef), .busy(b9), .sched(s9));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  task automatic do_load(input qcoef_t [NTAP-1:0] c);
    @(negedge clk);
    coef = c;
    load = 1'b1;
    @(negedge clk);
    load = 1'b0;
    // the schedule is ready LOAD_CYCLES = 29 cycles after the load
    repeat (29) begin
      check(b1 && b_ns && b9, "busy while building");
      @(negedge clk);
    end
    check(!b1 && !b_ns && !b9, "schedule ready after 29 cycles");
  endtask

  initial begin
    repeat (500000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    qcoef_t a1, a2, a3;
    qcoef_t [NTAP-1:0] c;
    longint d [NTAP];
    longint ref_s, got, gsum;
    int nnz, used [NTAP], rep;
    coef = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;

    // 1. worked example
    a1 = mk_coef(0, -1);
    a2 = mk_coef(1, 2);
    a3 = mk_coef(0, 0);
    c = '0;
    c[1] = a1; c[3] = a1; c[4] = a2; c[5] = a1; c[7] = a1; c[8] = a3;
    do_load(c);
    check(s1.cycles == 4, "example: 4 cycles");
    check(s1.n_items == 4, "example: 4 shifter items");
    check(s1.src[0] == 4 && s1.icoef[0] == a2, "example: cycle 1 b5*a2");
    check(s1.src[1] == 8 && s1.icoef[1] == a3, "example: cycle 2 b9*a3");
    check(s1.src[2] == 7 && s1.icoef[2] == a1, "example: cycle 3 b8*a1");
    check(s1.src[3] == SRC_SUM && s1.icoef[3] == a1, "example: cycle 4 A*a1");
    check(s1.n_add == 3 && s1.add_src[0] == 1 && s1.add_src[1] == 3 && s1.add_src[2] == 5,
          "example: adder b2, b4, b6");
    check(s_ns.cycles == 9 && s_ns.n_items == 9, "dense: 9 cycles");
    check(s9.cycles == 1 && s9.n_items == 6 && s9.n_add == 0, "nine shifters: 1 cycle, no repetition");

    // 2. random templates
    for (int n = 0; n < 3000; n++) begin
      // draw coefficients from a small set to create repeats
      for (int i = 0; i < NTAP; i++) begin
        case ($urandom_range(3))
          0: c[i] = '0;
          1: c[i] = mk_coef(0, -1);
          2: c[i] = mk_coef(1, 1);
          default: c[i] = rand_coef(20);
        endcase
      end
      do_load(c);
      nnz = 0;
      for (int i = 0; i < NTAP; i++) begin
        d[i] = longint'($signed($urandom_range(262143))) - 131072;
        nnz += c[i].nz ? 1 : 0;
        used[i] = 0;
      end
      ref_s = conv9(c, d);
      // execute: side adder first, then the shifter list
      gsum = 0;
      for (int k = 0; k < s1.n_add; k++) begin
        gsum += d[s1.add_src[k]];
        used[s1.add_src[k]]++;
      end
      got = 0;
      for (int k = 0; k < s1.n_items; k++) begin
        if (s1.src[k] == SRC_SUM) begin
          got += coef_val(s1.icoef[k]) * gsum;
          check(k >= s1.n_add, "group sum used after adder finished");
          for (int m = 0; m < s1.n_add; m++)
            check(c[s1.add_src[m]] == s1.icoef[k], "pre-summed taps share the coefficient");
        end else begin
          got += coef_val(s1.icoef[k]) * d[s1.src[k]];
          check(s1.icoef[k] == c[s1.src[k]], "item coefficient is the tap's");
          used[s1.src[k]]++;
        end
      end
      check(got == ref_s, "schedule computes the convolution");
      for (int i = 0; i < NTAP; i++)
        check(used[i] == (c[i].nz ? 1 : 0), "every non-zero tap used once");
      if (s1.n_add >= 2) check(int'(s1.cycles) == nnz - int'(s1.n_add) + 1 && int'(s1.cycles) < nnz,
                               "repetition saves cycles");
      else check(int'(s1.cycles) == (nnz == 0 ? 1 : nnz), "sparsity: nnz cycles");
      check(s_ns.cycles == 9, "dense: always 9 cycles");
      check(s9.cycles == 1, "nine shifters: 1 cycle");
    end

    // 3. template of the noise-cancellation example (4x b0, 4x b1, 1x b2)
    c = '0;
    for (int i = 0; i < NTAP; i++) c[i] = (i % 2 == 0) ? mk_coef(0, 0) : mk_coef(0, -2);
    c[4] = mk_coef(0, 1);
    do_load(c);
    check(s1.cycles == 6 && s1.n_add == 4, "symmetric template: 6 cycles");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
