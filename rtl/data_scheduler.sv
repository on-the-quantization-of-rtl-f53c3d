// data_scheduler: turns a 3x3 quantized template into the per-pixel work list
// of a 2D convolution unit, exploiting sparsity and repetition.
//
// Sparsity: taps whose coefficient is zero are left out of the list.
// Repetition: with a single shifter, the data of taps that share one
// coefficient value can be added first and multiplied once
// (a*b1 + a*b2 + a*b3 = a*(b1+b2+b3)). The side adder of the convolution
// unit adds one datum per cycle while the shifter works on the other taps,
// then the shifter multiplies the group sum in the last cycle.
//
// Rule used to build the list (the worked example of the architecture, six
// non-zero taps with one value repeated four times, is reproduced exactly):
//   * take the non-zero coefficient value repeated most often (the first such
//     tap in row-major order on a tie), count r;
//   * pre-sum its first j = min(r, nact/2) members in tap order, where nact is
//     the number of taps to process; the sum is ready after j cycles;
//   * the shifter list is: the other taps in tap order, then the members of
//     the group not pre-summed, then the group sum.
//   The list has nact - j + 1 items and is used only when j >= 2. Because
//   j <= nact/2 the group sum is never needed before the adder has finished.
//   With more than one shifter, repetition is not used (the paper drops it
//   there since it gains little) and items are dealt N_SHIFT per cycle.
//
// How: templates change only between frames, so the list is built by a small
// sequential walk over the taps rather than by a large combinational network:
// after load, a COUNT pass (9 cycles, one tap per cycle, nine comparators)
// finds the most repeated value, a SEL cycle fixes j, and two BUILD passes
// (9 cycles each) append the taps to the adder and shifter lists.
//
// Interface: load samples coef; busy is high from the next cycle for
// LOAD_CYCLES = 29 cycles, during which sched is being rewritten and must not
// be used. Reset gives an empty schedule (one idle cycle, result 0). The rule
// for general templates and the sequential build are this design's choices.
module data_scheduler
  import cenn_pkg::*;
#(
  parameter int N_SHIFT    = 1,
  parameter bit SPARSITY   = 1'b1,
  parameter bit REPETITION = 1'b1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              load,
  input  qcoef_t [NTAP-1:0] coef,
  output logic              busy,
  output sched_t            sched
);

  typedef enum logic [2:0] {S_IDLE, S_COUNT, S_SEL, S_BUILD1, S_BUILD2, S_FINISH} state_t;

  state_t            state;
  qcoef_t [NTAP-1:0] creg;
  logic   [3:0]      i;
  logic   [3:0]      best_cnt, best_idx, nact, jsel, k, ni, na;
  logic   [NTAP-1:0] pre;

  // per-tap terms of the tap under the walk
  logic   [3:0] cnt;
  logic         act_i, grp_i;
  qcoef_t       ci, cbest;

  always_comb begin
    ci    = creg[i];
    cbest = creg[best_idx];
    cnt   = '0;
    for (int m = 0; m < NTAP; m++)
      if (ci.nz && creg[m] == ci) cnt = cnt + 4'd1;
    act_i = SPARSITY ? ci.nz : 1'b1;
    grp_i = jsel != 0 && cbest.nz && ci == cbest;
  end

  assign busy = state != S_IDLE;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state        <= S_IDLE;
      creg         <= '0;
      i            <= '0;
      best_cnt     <= '0;
      best_idx     <= '0;
      nact         <= '0;
      jsel         <= '0;
      k            <= '0;
      ni           <= '0;
      na           <= '0;
      pre          <= '0;
      sched        <= '0;
      sched.cycles <= 4'd1;
    end else begin
      case (state)
        S_IDLE:
          if (load) begin
            creg     <= coef;
            i        <= '0;
            best_cnt <= '0;
            best_idx <= '0;
            nact     <= '0;
            state    <= S_COUNT;
          end
        S_COUNT: begin
          nact <= nact + (act_i ? 4'd1 : 4'd0);
          if (cnt > best_cnt) begin
            best_cnt <= cnt;
            best_idx <= i;
          end
          if (i == 4'(NTAP - 1)) state <= S_SEL;
          else                   i <= i + 4'd1;
        end
        S_SEL: begin
          jsel  <= (REPETITION && N_SHIFT == 1 && best_cnt >= 2 && nact >= 4)
                   ? ((best_cnt < nact / 2) ? best_cnt : nact / 2) : 4'd0;
          i     <= '0;
          k     <= '0;
          ni    <= '0;
          na    <= '0;
          pre   <= '0;
          sched <= '0;
          state <= S_BUILD1;
        end
        S_BUILD1: begin
          if (grp_i && k < jsel) begin
            sched.add_src[na] <= i;
            na     <= na + 4'd1;
            k      <= k + 4'd1;
            pre[i] <= 1'b1;
          end else if (act_i && !grp_i) begin
            sched.src[ni]   <= i;
            sched.icoef[ni] <= ci;
            ni <= ni + 4'd1;
          end
          if (i == 4'(NTAP - 1)) begin
            i     <= '0;
            state <= S_BUILD2;
          end else begin
            i <= i + 4'd1;
          end
        end
        S_BUILD2: begin
          if (grp_i && !pre[i]) begin
            sched.src[ni]   <= i;
            sched.icoef[ni] <= ci;
            ni <= ni + 4'd1;
          end
          if (i == 4'(NTAP - 1)) state <= S_FINISH;
          else                   i <= i + 4'd1;
        end
        default: begin  // S_FINISH
          if (jsel != 0) begin
            sched.src[ni]   <= 4'(SRC_SUM);
            sched.icoef[ni] <= cbest;
            sched.n_items   <= ni + 4'd1;
            sched.cycles    <= 4'((int'(ni) + N_SHIFT) / N_SHIFT);
          end else begin
            sched.n_items   <= ni;
            sched.cycles    <= (ni == 0) ? 4'd1 : 4'((int'(ni) + N_SHIFT - 1) / N_SHIFT);
          end
          sched.n_add <= na;
          state       <= S_IDLE;
        end
      endcase
    end
  end

endmodule
