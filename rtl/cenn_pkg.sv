// cenn_pkg: types and constants shared by the quantized CeNN stage pipeline.
//
// A discrete-time cellular neural network (CeNN) updates every cell of an
// image with the forward-Euler step
//   x(n+1) = x(n) + dt * ( -x(n) + I + sum_kl A_kl y(n) + sum_kl B_kl u )
//   y(n+1) = f(x(n+1)) = clamp(x(n+1), -1, +1)
// over a 3x3 neighbourhood. The templates A and B are quantized offline to
// powers of two, {0, +-2^p : QK <= p <= QM}, so that each product is a shift.
//
// Number formats (u, x, y are 18 bits wide as in the reference FPGA design;
// the binary point is this design's choice):
//   data_t   signed Q5.12, FRAC = 12 fraction bits, +1.0 = 4096.
//   qcoef_t  {nz, sgn, e}: value = nz ? (sgn ? -1 : +1) * 2^(e + QK) : 0.
//            1 + 1 + 4 = 6 bits, the bit width the quantization set with
//            m = 5, k = -5 needs.
//   Products and sums are kept in a wide format with FRAC - QK = 17 fraction
//   bits, so a right shift by a negative exponent never drops a bit; the only
//   rounding (a floor) happens when the new state is brought back to Q5.12.
package cenn_pkg;

  localparam int DW    = 18;            // width of u, x, y
  localparam int FRAC  = 12;            // fraction bits of u, x, y
  localparam int QM    = 5;             // largest coefficient exponent m
  localparam int QK    = -5;            // smallest coefficient exponent k
  localparam int QEW   = 4;             // exponent field: ceil(log2(QM-QK+1))
  localparam int XFRAC = FRAC - QK;     // fraction bits of the wide format
  localparam int GW    = DW + 4;        // shifter operand: datum or a sum of up to 9 data
  localparam int PW    = GW + QM - QK;  // shifter product
  localparam int AW    = PW + 4;        // convolution accumulator (up to 9 products)
  localparam int SW    = AW + 3;        // A-sum + B-sum + bias - x
  localparam int DT_SMAX = 7;           // dt = 2^s, -DT_SMAX <= s <= 0
  localparam int NTAP  = 9;             // 3x3 template
  localparam int SRC_SUM = 9;           // schedule source code: repetition group sum

  localparam logic signed [DW-1:0] ONE = DW'(1 << FRAC);

  typedef logic signed [DW-1:0] data_t;
  typedef logic signed [GW-1:0] gdata_t;
  typedef logic signed [PW-1:0] prod_t;
  typedef logic signed [AW-1:0] acc_t;
  typedef logic signed [SW-1:0] sum_t;

  typedef struct packed {
    logic           nz;   // coefficient is non-zero
    logic           sgn;  // 1: negative
    logic [QEW-1:0] e;    // exponent p - QK
  } qcoef_t;

  // Template set of one stage (one Euler iteration); time-variant templates
  // give every stage its own set.
  typedef struct packed {
    qcoef_t [NTAP-1:0] a;        // feedback template, index 3*row + col
    qcoef_t [NTAP-1:0] b;        // feedforward template
    data_t             bias;     // I, not quantized
    logic [2:0]        dt_shift; // -s, dt = 2^s
  } tpl_t;

  // One pixel of the stream between stages.
  typedef struct packed {
    data_t u;
    data_t x;
    data_t y;
  } pixel_t;

  // Per-template schedule built by the data scheduler.
  typedef struct packed {
    logic [3:0]             n_items;  // shifter items per pixel
    logic [NTAP-1:0][3:0]   src;      // item source: window index or SRC_SUM
    qcoef_t [NTAP-1:0]      icoef;    // item coefficient
    logic [3:0]             n_add;    // data pre-summed by the side adder
    logic [NTAP-1:0][3:0]   add_src;  // window index of each pre-summed datum
    logic [3:0]             cycles;   // shifter cycles per pixel (>= 1)
  } sched_t;

  // Real value of a quantized coefficient times 2^-QK (an integer), for models.
  function automatic int qcoef_scaled(qcoef_t c);
    int v;
    v = c.nz ? (1 << c.e) : 0;
    return c.sgn ? -v : v;
  endfunction

endpackage
