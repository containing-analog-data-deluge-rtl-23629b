// mi_adc_ctrl -- memory-immersed digitization controller.
//
// Digitises the multiply-average (MAV) of a product array by steering the
// column-line precharge of up to LANES neighbouring arrays, each of which
// then acts as a capacitive DAC, and reading one comparator per lane. It
// keeps the search interval [lo, hi) of the output code and narrows it each
// comparison cycle. A reference code m on a lane precharges m of the 2^BITS
// column lines, so the lane's comparator answers "code >= m".
//
// Modes (cim_pkg::adc_mode_e):
//   ADC_SAR    one lane per cycle at the interval midpoint: BITS cycles.
//   ADC_FLASH  three lanes per cycle at the quarter points of the interval:
//              two bits per cycle (32 -> 8 -> 2 -> 1 for 5 bits, 3 cycles).
//   ADC_HYBRID first cycle flash with the programmable references qref[0..2]
//              (8/16/24 gives the two MSBs), then SAR on one lane.
//   ADC_ASYM   asymmetric binary search on one lane: first qref[1] (Q2, the
//              median of the MAV distribution), then qref[2] (Q3) if the
//              code is >= Q2 or qref[0] (Q1) if below, then SAR. Codes near
//              the median resolve in two comparisons.
// After each cycle lo becomes the largest enabled reference whose
// comparator said 1 and hi the smallest one that said 0. The conversion ends
// when hi - lo == 1; code = lo. A reference that falls outside (lo, hi) is
// not used; if no lane is usable the cycle falls back to the midpoint.
//
// Timing: one comparison cycle is three clk cycles, PCH (ref_code on the
// arrays' precharge inputs), CMP (arrays settled, lane_cmp_en high, the
// comparators decide at its end) and DECIDE (cmp read, interval updated).
// ref_code/lane_en are stable over the three. While hold is high the
// controller waits in PCH (references applied, nothing compared), which lets
// a network share its reference arrays among several controllers. start is
// taken in IDLE; done
// pulses for one cycle with code, n_cycles (comparison cycles) and n_cmp
// (individual comparisons, the measure of the asymmetric-search study)
// valid; they hold until the next start. flash_cycle / sar_cycle mark
// comparison cycles that use three lanes / one lane.
//
// From the paper: precharge-and-compare cycles that set the next precharge
// state from the comparator, flash with three reference arrays for two bits
// per cycle, hybrid flash-then-SAR, asymmetric search with Q1=10111,
// Q2=11000, Q3=11001 around a skewed MAV. Own choices: the interval
// formulation, the quarter-point rule in flash mode, the fall-back rule,
// three clk cycles per comparison.
module mi_adc_ctrl
  import cim_pkg::*;
#(
  parameter int unsigned BITS  = cim_pkg::ADC_BITS,
  parameter int unsigned LANES = cim_pkg::NUM_LANES
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  logic                 hold,
  input  adc_mode_e            mode,
  input  logic [BITS-1:0]      qref [LANES],
  input  logic [LANES-1:0]     cmp,
  output logic [BITS:0]        ref_code [LANES],
  output logic [LANES-1:0]     lane_en,
  output logic [LANES-1:0]     lane_cmp_en,
  output logic                 busy,
  output logic                 done,
  output logic [BITS-1:0]      code,
  output logic [3:0]           n_cycles,
  output logic [5:0]           n_cmp,
  output logic                 flash_cycle,
  output logic                 sar_cycle
);
  typedef enum logic [1:0] {C_IDLE, C_PCH, C_CMP, C_DECIDE} cstate_e;
  cstate_e     state;
  adc_mode_e   mode_q;
  logic [BITS:0] lo, hi, mid, width, cand;
  logic [BITS:0] new_lo, new_hi;
  logic [BITS-1:0] q_q [LANES];
  logic [3:0]  cyc;
  logic        above_q2;   // result of the first ASYM comparison

  // Reference selection for the current comparison cycle.
  always_comb begin
    width = hi - lo;
    mid   = lo + (width >> 1);
    for (int unsigned j = 0; j < LANES; j++) begin
      ref_code[j] = mid;
      lane_en[j]  = 1'b0;
    end
    cand = mid;
    unique case (mode_q)
      ADC_FLASH: begin
        for (int unsigned j = 0; j < LANES; j++) begin
          ref_code[j] = lo + (BITS+1)'(((2*BITS+2)'(width) * (2*BITS+2)'(j + 1)) >> 2);
          lane_en[j]  = ref_code[j] > lo && ref_code[j] < hi;
        end
      end
      ADC_HYBRID: begin
        if (cyc == 4'd0) begin
          for (int unsigned j = 0; j < LANES; j++) begin
            ref_code[j] = {1'b0, q_q[j]};
            lane_en[j]  = ref_code[j] > lo && ref_code[j] < hi;
          end
        end else begin
          lane_en[0] = 1'b1;
        end
      end
      ADC_ASYM: begin
        if (cyc == 4'd0)      cand = {1'b0, q_q[LANES/2]};
        else if (cyc == 4'd1) cand = above_q2 ? {1'b0, q_q[LANES-1]} : {1'b0, q_q[0]};
        ref_code[0] = (cand > lo && cand < hi) ? cand : mid;
        lane_en[0]  = 1'b1;
      end
      default: begin  // ADC_SAR
        lane_en[0] = 1'b1;
      end
    endcase
    if (lane_en == '0) begin
      ref_code[0] = mid;
      lane_en[0]  = 1'b1;
    end
    lane_cmp_en = (state == C_CMP) ? lane_en : '0;
    flash_cycle = (state == C_DECIDE) && ($countones(lane_en) > 1);
    sar_cycle   = (state == C_DECIDE) && ($countones(lane_en) == 1);
  end

  // Interval update from the comparator outputs.
  always_comb begin
    new_lo = lo;
    new_hi = hi;
    for (int unsigned j = 0; j < LANES; j++) begin
      if (lane_en[j] && cmp[j]  && ref_code[j] > new_lo) new_lo = ref_code[j];
    end
    for (int unsigned j = 0; j < LANES; j++) begin
      if (lane_en[j] && !cmp[j] && ref_code[j] < new_hi) new_hi = ref_code[j];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= C_IDLE;
      mode_q   <= ADC_SAR;
      lo       <= '0;
      hi       <= '0;
      cyc      <= '0;
      above_q2 <= 1'b0;
      done     <= 1'b0;
      code     <= '0;
      n_cycles <= '0;
      n_cmp    <= '0;
      for (int unsigned j = 0; j < LANES; j++) q_q[j] <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        C_IDLE: if (start) begin
          mode_q   <= mode;
          for (int unsigned j = 0; j < LANES; j++) q_q[j] <= qref[j];
          lo       <= '0;
          hi       <= (BITS+1)'(1) << BITS;
          cyc      <= '0;
          n_cycles <= '0;
          n_cmp    <= '0;
          state    <= C_PCH;
        end
        C_PCH: if (!hold) state <= C_CMP;
        C_CMP: state <= C_DECIDE;
        C_DECIDE: begin
          if (cyc == 4'd0) above_q2 <= cmp[0];
          lo       <= new_lo;
          hi       <= new_hi;
          cyc      <= cyc + 1'b1;
          n_cycles <= n_cycles + 1'b1;
          n_cmp    <= n_cmp + 6'($countones(lane_en));
          if (new_hi - new_lo <= (BITS+1)'(1)) begin
            code  <= new_lo[BITS-1:0];
            done  <= 1'b1;
            state <= C_IDLE;
          end else begin
            state <= C_PCH;
          end
        end
        default: state <= C_IDLE;
      endcase
    end
  end

  assign busy = (state != C_IDLE);

endmodule
