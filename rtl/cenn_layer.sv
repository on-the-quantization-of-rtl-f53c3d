// cenn_layer: a CeNN layer, NUM_STAGES stages in a pipeline, one Euler
// iteration per stage (top of the design).
//
// The input stream carries u, the initial state x(0) and the initial output
// y(0) of every pixel in raster order; stage n turns (u, x(n), y(n)) into
// (u, x(n+1), y(n+1)) and hands it to stage n+1, so after NUM_STAGES stages
// the stream holds the result of NUM_STAGES iterations. Every stage has its
// own template set tpl[n] (time-variant templates A(n), B(n), I(n), dt(n)),
// loaded by a cfg_load pulse between frames. The frame is img_w x img_h
// pixels, up to the IMG_W x IMG_H the line buffers are sized for. Stages overlap: stage n+1 works
// on the first rows while stage n is still on later ones, so a frame takes
// about IMG_W * IMG_H * max(cycles) clock cycles plus NUM_STAGES * (IMG_W +
// small) cycles of fill.
//
// TIME_VARIANT = 1 (default) gives every stage its own template set; with
// TIME_VARIANT = 0 all stages use tpl[0] (time-invariant templates, the
// other configuration the paper's stage supports) and tpl[1..] are unused.
// In that mode each stage still computes B*u itself; the architecture would
// drop the u line buffer and the B convolution from the stage instead, which
// is not done here (same results, more area).
//
// The layer of stages connected in sequence follows the paper; the
// valid/ready links between stages are this design's choice. cycles_a /
// cycles_b report the per-pixel schedule length of every stage.
module cenn_layer
  import cenn_pkg::*;
#(
  parameter int NUM_STAGES = 24,
  parameter int IMG_W      = 1920,
  parameter int IMG_H      = 1080,
  parameter int N_SHIFT    = 1,
  parameter bit SPARSITY   = 1'b1,
  parameter bit REPETITION = 1'b1,
  parameter bit TIME_VARIANT = 1'b1
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        cfg_load,
  input  tpl_t   [NUM_STAGES-1:0]     tpl,
  input  logic   [15:0]               img_w,
  input  logic   [15:0]               img_h,
  input  logic                        in_valid,
  output logic                        in_ready,
  input  pixel_t                      in_px,
  output logic                        out_valid,
  input  logic                        out_ready,
  output pixel_t                      out_px,
  output logic   [NUM_STAGES-1:0][3:0] cycles_a,
  output logic   [NUM_STAGES-1:0][3:0] cycles_b
);

  logic   [NUM_STAGES:0] v, r;
  pixel_t [NUM_STAGES:0] px;

  assign v[0]      = in_valid;
  assign in_ready  = r[0];
  assign px[0]     = in_px;
  assign out_valid = v[NUM_STAGES];
  assign r[NUM_STAGES] = out_ready;
  assign out_px    = px[NUM_STAGES];

  for (genvar n = 0; n < NUM_STAGES; n++) begin : g_stage
    cenn_stage #(
      .IMG_W(IMG_W), .IMG_H(IMG_H), .N_SHIFT(N_SHIFT),
      .SPARSITY(SPARSITY), .REPETITION(REPETITION)
    ) u_stage (
      .clk(clk), .rst_n(rst_n), .cfg_load(cfg_load), .tpl(TIME_VARIANT ? tpl[n] : tpl[0]), .img_w(img_w), .img_h(img_h),
      .in_valid(v[n]), .in_ready(r[n]), .in_px(px[n]),
      .out_valid(v[n+1]), .out_ready(r[n+1]), .out_px(px[n+1]),
      .cycles_a(cycles_a[n]), .cycles_b(cycles_b[n])
    );
  end

endmodule
