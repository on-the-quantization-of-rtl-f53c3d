// tb_cenn_output_fn: checks y = 0.5 * (|x+1| - |x-1|) over the whole 18-bit
// input range (every value), computed from the formula itself.
module tb_cenn_output_fn;
  import cenn_pkg::*;

  data_t x, y;
  int    checks = 0, failures = 0;

  cenn_output_fn dut (.x(x), .y(y));

  initial begin
    #10000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int xv, ax1, ax2, exp_v;
    for (xv = -131072; xv <= 131071; xv++) begin
      x = data_t'(xv);
      #1;
      ax1 = (xv + 4096) < 0 ? -(xv + 4096) : (xv + 4096);
      ax2 = (xv - 4096) < 0 ? -(xv - 4096) : (xv - 4096);
      exp_v = (ax1 - ax2) / 2;
      checks++;
      if (int'(y) != exp_v) begin
        failures++;
        if (failures < 10) $display("mismatch x=%0d y=%0d exp=%0d", xv, y, exp_v);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
