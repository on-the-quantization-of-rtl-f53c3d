// window_fifo: line-buffer FIFO that turns a raster-order pixel stream into
// 3x3 neighbourhoods (the single-input, multiple-output memory in front of
// the convolution units of a stage).
//
// Two line memories of IMG_W words keep the two previous image rows; a 3x3
// register window holds the last three columns. Pushing the pixel at (R, C)
// completes the window centred on (R-1, C-1), i.e. the centre trails the
// input by IMG_W + 1 pixels. The window is produced combinationally for the
// pixel being pushed (win is the neighbourhood that exists once din is in),
// so a consumer can start on it in the same cycle. Neighbours outside the
// image read as zero (fixed zero boundary, this design's choice).
//
// Interface: the frame is img_w x img_h pixels (at most IMG_W x IMG_H; the
// size may change only between frames). push with sof marks the first pixel
// (0,0) of a frame. After the last pixel of a frame, img_w + 1 further pushes
// (any data) bring out the remaining centres. ctr_valid says whether the centre of win lies inside the
// image; ctr_row / ctr_col give its position. win is indexed 3*row + col,
// row 0 on top.
module window_fifo #(
  parameter int IMG_W = 1920,
  parameter int IMG_H = 1080,
  parameter int WD    = 54
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     push,
  input  logic                     sof,
  input  logic [15:0]              img_w,
  input  logic [15:0]              img_h,
  input  logic [WD-1:0]            din,
  output logic [8:0][WD-1:0]       win,
  output logic                     ctr_valid,
  output logic [15:0]              ctr_row,
  output logic [15:0]              ctr_col
);

  localparam int CW = $clog2(IMG_W);

  logic [WD-1:0] lm1 [IMG_W];   // row R-1
  logic [WD-1:0] lm2 [IMG_W];   // row R-2
  logic [2:0][2:0][WD-1:0] w;   // [row][col], registered window
  logic [CW-1:0] nc;            // column of the next push
  logic [15:0]   nr;            // row of the next push
  logic [CW-1:0] pc;            // column of the pixel being pushed
  logic [15:0]   pr;
  logic [WD-1:0] col_top, col_mid;

  always_comb begin
    pc = sof ? '0 : nc;
    pr = sof ? '0 : nr;
    col_top = lm2[pc];
    col_mid = lm1[pc];
  end

  // centre of the window completed by this push
  int cr, cc;
  always_comb begin
    if (pc == 0) begin
      cr = int'(pr) - 2;
      cc = int'(img_w) - 1;
    end else begin
      cr = int'(pr) - 1;
      cc = int'(pc) - 1;
    end
    ctr_valid = cr >= 0 && cr < int'(img_h);
    ctr_row   = 16'(cr);
    ctr_col   = 16'(cc);
  end

  // window after the push, with zero boundary
  logic [2:0][2:0][WD-1:0] wn;
  always_comb begin
    for (int r = 0; r < 3; r++) begin
      wn[r][0] = w[r][1];
      wn[r][1] = w[r][2];
    end
    wn[0][2] = col_top;
    wn[1][2] = col_mid;
    wn[2][2] = din;
    for (int r = 0; r < 3; r++)
      for (int c = 0; c < 3; c++) begin
        if ((r == 0 && cr == 0) || (r == 2 && cr == int'(img_h) - 1) ||
            (c == 0 && cc == 0) || (c == 2 && cc == int'(img_w) - 1))
          win[3*r+c] = '0;
        else
          win[3*r+c] = wn[r][c];
      end
  end

  always_ff @(posedge clk) begin
    if (push) begin
      lm2[pc] <= col_mid;
      lm1[pc] <= din;
      w       <= wn;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      nc <= '0;
      nr <= '0;
    end else if (push) begin
      if (int'(pc) == int'(img_w) - 1) begin
        nc <= '0;
        nr <= pr + 16'd1;
      end else begin
        nc <= pc + 1'b1;
        nr <= pr;
      end
    end
  end

endmodule
