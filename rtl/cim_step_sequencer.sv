// cim_step_sequencer -- strobes for the four-step operation of the Walsh
// crossbar.
//
// One bitplane takes four steps: (1) precharge and input application,
// (2) local computation on O/OB with the row lines on, (3) row merge onto the
// sum lines, (4) comparison of SL against SLB. The paper fits the four steps
// into two clock cycles, one step per clock phase; here clk is that phase
// clock, so one step is one clk cycle and a bitplane takes four clk cycles
// (two cycles of the paper's clock).
//
// Interface: while run is high the sequencer cycles step 1,2,3,4,1,...;
// exactly one of pch/rl/rm/cmp is high per cycle and cm (column merge)
// accompanies pch. plane_end marks step 4. When run falls the step counter
// returns to step 1. Strobe polarity is active-high throughout; the
// transistor-level polarity of PCH is not modelled.
//
// From the paper: the order of the steps and which signal is on in each
// ("RL = ON while PCH, Col-Merge (CM) = OFF" in step 2, RM on in step 3).
// Own choice: CM on during step 1 only, one clk per step.
module cim_step_sequencer (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       run,
  output logic [1:0] step,       // 0..3 for steps 1..4
  output logic       pch,
  output logic       cm,
  output logic       rl,
  output logic       rm,
  output logic       cmp,
  output logic       plane_end
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)   step <= 2'd0;
    else if (run) step <= step + 2'd1;
    else          step <= 2'd0;
  end

  always_comb begin
    pch       = run && (step == 2'd0);
    cm        = pch;
    rl        = run && (step == 2'd1);
    rm        = run && (step == 2'd2);
    cmp       = run && (step == 2'd3);
    plane_end = cmp;
  end
endmodule
