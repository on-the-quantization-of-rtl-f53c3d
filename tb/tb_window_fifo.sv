// tb_window_fifo: pushes two 7x5 frames (pixel value = frame * 1000 + index
// + 1) through the line-buffer FIFO, each followed by the IMG_W + 1 flush
// pushes, and checks every window whose centre lies in the image against
// the frame itself, with zeros outside. Also checks that exactly IMG_W *
// IMG_H centres are reported per frame, in raster order.
module tb_window_fifo;
  localparam int W = 7, H = 5, WD = 20;

  logic clk = 1'b0, rst_n = 1'b0, push = 1'b0, sof = 1'b0;
  logic [WD-1:0] din;
  logic [8:0][WD-1:0] win;
  logic ctr_valid;
  logic [15:0] ctr_row, ctr_col;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  window_fifo #(.IMG_W(W), .IMG_H(H), .WD(WD)) dut (
    .clk(clk), .rst_n(rst_n), .push(push), .sof(sof), .img_w(16'(W)), .img_h(16'(H)), .din(din), .win(win),
    .ctr_valid(ctr_valid), .ctr_row(ctr_row), .ctr_col(ctr_col));

  function automatic logic [WD-1:0] pix(int f, int r, int c);
    if (r < 0 || r >= H || c < 0 || c >= W) return '0;
    return WD'(f * 1000 + r * W + c + 1);
  endfunction

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int centres, exp_lin;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int f = 1; f <= 2; f++) begin
      centres = 0;
      for (int n = 0; n < W * H + W + 1; n++) begin
        @(negedge clk);
        // idle cycles in between must not disturb anything
        if ($urandom_range(3) == 0) begin
          push = 1'b0;
          @(negedge clk);
        end
        push = 1'b1;
        sof  = (n == 0);
        din  = (n < W * H) ? pix(f, n / W, n % W) : WD'($urandom);
        #1;
        if (ctr_valid) begin
          exp_lin = centres;
          checks++;
          if (int'(ctr_row) * W + int'(ctr_col) != exp_lin) begin
            failures++;
            $display("centre order: got %0d,%0d want %0d", ctr_row, ctr_col, exp_lin);
          end
          for (int k = 0; k < 3; k++)
            for (int l = 0; l < 3; l++) begin
              checks++;
              if (win[3*k+l] !== pix(f, int'(ctr_row) + k - 1, int'(ctr_col) + l - 1)) begin
                failures++;
                if (failures < 10) $display("frame %0d centre %0d,%0d tap %0d: got %0d want %0d", f, ctr_row,
                                            ctr_col, 3*k+l, win[3*k+l], pix(f, int'(ctr_row) + k - 1, int'(ctr_col) + l - 1));
              end
            end
          centres++;
        end
        @(posedge clk);
      end
      @(negedge clk);
      push = 1'b0;
      checks++;
      if (centres != W * H) begin
        failures++;
        $display("frame %0d: %0d centres", f, centres);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
