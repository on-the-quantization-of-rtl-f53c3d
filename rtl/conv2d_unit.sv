// conv2d_unit: 3x3 convolution of a data window with a quantized template,
// using N_SHIFT power-of-two shifters instead of multipliers.
//
// Parts (as in the 2D convolution unit of the stage architecture):
//   data scheduler   builds the work list from the template (data_scheduler);
//   reg bank         holds the 9 data of the window being processed;
//   coefficient counter  steps through the work list, one slot per cycle;
//   side adder       pre-sums data that share a repeated coefficient;
//   MUX              feeds each shifter a reg-bank datum or the side-adder sum;
//   shifters S1      one per lane (shifter_s1);
//   accumulator      adds the lane products of every cycle.
//
// Timing: start is accepted when ready is high; the window is captured in
// that cycle. The shifters are then busy for sched.cycles cycles (shown on
// the cycles output), and ready is high again in the last of them, so a
// continuous stream gets one window per sched.cycles cycles. done pulses for
// one cycle, sched.cycles + 2 cycles after start, with the result on sum
// (held until the next done). cfg_load (re)builds the schedule from coef; it
// must not be raised while a window is in progress, and ready stays low for
// the 29 cycles the scheduler takes.
//
// The structure follows the architecture; the sizes of the reg bank, the
// wide exact accumulator and the one-slot-per-cycle stepping are this
// design's choices.
module conv2d_unit
  import cenn_pkg::*;
#(
  parameter int N_SHIFT    = 1,
  parameter bit SPARSITY   = 1'b1,
  parameter bit REPETITION = 1'b1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              cfg_load,
  input  qcoef_t [NTAP-1:0] coef,
  input  logic              start,
  input  data_t  [NTAP-1:0] win,
  output logic              ready,
  output logic              done,
  output acc_t              sum,
  output logic [3:0]        cycles
);

  sched_t sched;
  logic   sched_busy;

  data_scheduler #(
    .N_SHIFT(N_SHIFT), .SPARSITY(SPARSITY), .REPETITION(REPETITION)
  ) u_sched (
    .clk(clk), .rst_n(rst_n), .load(cfg_load), .coef(coef), .busy(sched_busy), .sched(sched)
  );

  assign cycles = sched.cycles;

  data_t [NTAP-1:0] rb;         // reg bank
  logic             issuing;
  logic [3:0]       t;          // coefficient counter (cycle within a window)
  gdata_t           grp_sum;    // side adder
  logic             last_issue;

  assign last_issue = issuing && (t == sched.cycles - 4'd1);
  assign ready      = !sched_busy && (!issuing || last_issue);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      issuing <= 1'b0;
      t       <= '0;
    end else if (start && ready) begin
      issuing <= 1'b1;
      t       <= '0;
    end else if (last_issue) begin
      issuing <= 1'b0;
    end else if (issuing) begin
      t <= t + 4'd1;
    end
  end

  always_ff @(posedge clk) begin
    if (start && ready) rb <= win;
  end

  // side adder: one datum per cycle, in schedule order
  always_ff @(posedge clk) begin
    if (issuing && t < sched.n_add)
      grp_sum <= ((t == 0) ? gdata_t'(0) : grp_sum) + gdata_t'(rb[sched.add_src[t]]);
  end

  // lanes: MUX + shifter
  gdata_t [N_SHIFT-1:0] opnd;
  qcoef_t [N_SHIFT-1:0] lcoef;
  prod_t  [N_SHIFT-1:0] prod;

  for (genvar l = 0; l < N_SHIFT; l++) begin : g_lane
    int unsigned idx;
    always_comb begin
      idx      = int'(t) * N_SHIFT + l;
      opnd[l]  = '0;
      lcoef[l] = '0;
      if (issuing && idx < int'(sched.n_items) && idx < NTAP) begin
        lcoef[l] = sched.icoef[idx];
        opnd[l]  = (sched.src[idx] == 4'(SRC_SUM)) ? grp_sum
                                                   : gdata_t'(rb[sched.src[idx]]);
      end
    end
    shifter_s1 #(.IW(GW), .OW(PW)) u_s1 (
      .clk(clk), .en(1'b1), .d(opnd[l]), .c(lcoef[l]), .p(prod[l])
    );
  end

  // accumulator
  logic p_valid, p_first, p_last;
  acc_t lane_sum;

  always_comb begin
    lane_sum = '0;
    for (int l = 0; l < N_SHIFT; l++) lane_sum += acc_t'(prod[l]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      p_valid <= 1'b0;
      p_first <= 1'b0;
      p_last  <= 1'b0;
      done    <= 1'b0;
      sum     <= '0;
    end else begin
      p_valid <= issuing;
      p_first <= issuing && t == 0;
      p_last  <= last_issue;
      done    <= p_valid && p_last;
      if (p_valid) sum <= (p_first ? acc_t'(0) : sum) + lane_sum;
    end
  end

endmodule
