// clocked_comparator -- behavioural model of the clocked rail-to-rail
// comparator that decides the MAV against a reference.
//
// The circuit combines an n-type and a p-type latch comparator so that it
// works across the whole supply range; here it is a clocked decision:
// at a clk edge with en high, q <= (v_in >= v_ref + OFFSET). q holds
// otherwise. OFFSET models an input-referred offset and is 0 by default.
// Only the function comes from the paper; the decision rule at equality
// (q = 1) is this model's choice.
module clocked_comparator #(
  parameter real OFFSET = 0.0
) (
  input  logic clk,
  input  logic rst_n,
  input  logic en,
  input  real  v_in,     // MAV from the product array
  input  real  v_ref,    // reference from a DAC array
  output logic q
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)  q <= 1'b0;
    else if (en) q <= (v_in >= v_ref + OFFSET);
  end
endmodule
