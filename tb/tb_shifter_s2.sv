// tb_shifter_s2: checks the dt shifter against floor(d / 2^(-s)) computed
// with integer division, for every s in [-7, 0] and random signed sums.
module tb_shifter_s2;
  import cenn_pkg::*;

  logic       clk = 1'b0;
  logic       en;
  sum_t       d, q;
  logic [2:0] sh;
  int         checks = 0, failures = 0;

  always #5 clk = ~clk;

  shifter_s2 dut (.clk(clk), .en(en), .d(d), .dt_shift(sh), .q(q));

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint dv, div, exp_v;
    en = 1'b1;
    for (int n = 0; n < 4000; n++) begin
      @(negedge clk);
      d  = sum_t'({$urandom, $urandom});
      if (n % 3 == 0) d = sum_t'($signed($urandom_range(200)) - 100);
      sh = 3'($urandom_range(7));
      dv = longint'(d);
      div = longint'(1) << sh;
      // floor division
      exp_v = (dv >= 0) ? dv / div : -((-dv + div - 1) / div);
      @(posedge clk);
      #1;
      checks++;
      if (longint'(q) !== exp_v) begin
        failures++;
        if (failures < 10) $display("mismatch d=%0d s=-%0d q=%0d exp=%0d", d, sh, q, exp_v);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
