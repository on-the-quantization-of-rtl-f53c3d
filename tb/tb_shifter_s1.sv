// tb_shifter_s1: checks the power-of-two shifter against an ordinary
// multiplication by 2^(p-k) for random data and every coefficient code,
// including zero, both signs and the extreme exponents, and checks the
// one-cycle latency.
module tb_shifter_s1;
  import cenn_pkg::*;

  logic   clk = 1'b0;
  logic   en;
  gdata_t d;
  qcoef_t c;
  prod_t  p;
  int     checks = 0, failures = 0;

  always #5 clk = ~clk;

  shifter_s1 dut (.clk(clk), .en(en), .d(d), .c(c), .p(p));

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint exp_v, mult;
    en = 1'b1;
    d  = '0;
    c  = '0;
    for (int n = 0; n < 4000; n++) begin
      @(negedge clk);
      if (n < 200) d = gdata_t'(n[0] ? -9 * 131072 : 9 * 131071);  // extremes of a 9-datum sum
      else         d = gdata_t'(int'($urandom_range(9 * 262143)) - 9 * 131072);
      c.nz  = ($urandom_range(7) != 0);
      c.sgn = $urandom_range(1);
      c.e   = QEW'($urandom_range(QM - QK));
      mult  = c.nz ? (longint'(1) << c.e) : 0;
      if (c.sgn) mult = -mult;
      exp_v = longint'(d) * mult;
      @(posedge clk);
      #1;
      checks++;
      if (longint'(p) !== exp_v) begin
        failures++;
        if (failures < 10) $display("mismatch d=%0d c=%b p=%0d exp=%0d", d, c, p, exp_v);
      end
    end
    // en low holds the output
    @(negedge clk);
    en = 1'b0;
    d  = 22'sd7;
    c  = '{nz: 1'b1, sgn: 1'b0, e: 4'd3};
    exp_v = longint'(p);
    @(posedge clk);
    #1;
    checks++;
    if (longint'(p) !== exp_v) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
