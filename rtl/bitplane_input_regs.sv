// bitplane_input_regs -- input registers for bitplane-wise application.
//
// Holds an N-element input vector in sign-magnitude form (B magnitude bits
// and one sign bit per element) and presents one magnitude bitplane at a
// time, most significant bitplane first, as in the bitplane-wise flow where
// bits of equal significance of all elements are applied in one step.
//
// Interface: load captures in_sign/in_mag and presents bitplane B-1;
// each shift pulse moves to the next lower bitplane. plane_bit[i] is the
// current bit of element i, plane_sign[i] its sign, plane_idx the number of
// bitplanes already shifted out (0 = MSB plane). load has priority over
// shift.
//
// From the paper: one register column per input element (IN_i) with a sign
// S_i, MSB-first processing. Own choice: shift-register implementation.
module bitplane_input_regs #(
  parameter int unsigned N = cim_pkg::WHT_N,
  parameter int unsigned B = cim_pkg::WHT_BITS
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 load,
  input  logic                 shift,
  input  logic [N-1:0]         in_sign,
  input  logic [B-1:0]         in_mag [N],
  output logic [N-1:0]         plane_bit,
  output logic [N-1:0]         plane_sign,
  output logic [$clog2(B+1)-1:0] plane_idx
);
  logic [B-1:0] mag_q [N];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int unsigned i = 0; i < N; i++) mag_q[i] <= '0;
      plane_sign <= '0;
      plane_idx  <= '0;
    end else if (load) begin
      for (int unsigned i = 0; i < N; i++) mag_q[i] <= in_mag[i];
      plane_sign <= in_sign;
      plane_idx  <= '0;
    end else if (shift) begin
      for (int unsigned i = 0; i < N; i++) mag_q[i] <= mag_q[i] << 1;
      plane_idx <= plane_idx + 1'b1;
    end
  end

  always_comb begin
    for (int unsigned i = 0; i < N; i++) plane_bit[i] = mag_q[i][B-1];
  end
endmodule
