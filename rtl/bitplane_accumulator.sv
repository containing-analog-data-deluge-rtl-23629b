// bitplane_accumulator -- concatenates the 1-bit outputs of successive
// bitplanes into a multi-bit value per row and decides early termination.
//
// The crossbar answers each input bitplane with one bit per row (+1 or -1).
// Bitplanes arrive most significant first; the bit of bitplane k (k = 0 for
// the MSB plane of a B-bit input) carries weight 2^(B-1-k). The row value is
//     x = sum_k (2*b_k - 1) * 2^(B-1-k),
// i.e. the concatenated output bits read as an offset-binary number. It is
// an odd value in [-(2^B-1), 2^B-1] once all B planes are in.
//
// Early termination: after plane k the planes still to come can move x by at
// most R_k = 2^(B-1-k) - 1. When |x_k| + R_k <= T the final value is sure to
// lie in [-T, T], where the soft threshold outputs 0, so the row is done.
// term[r] marks such rows; all_term_next (combinational, from the update in
// progress) tells the controller that every row is done and the remaining
// bitplanes can be skipped. Terminated rows keep their partial value.
//
// Interface: clear resets all rows; valid with plane_idx and bits adds one
// plane. Results are registered.
//
// From the paper: concatenation of output bitplanes and termination once the
// partial result is known to fall in [-T, T]. Own choice: the bound R_k,
// which makes termination exact (see the README for the conflicting
// sentences about the termination threshold).
module bitplane_accumulator #(
  parameter int unsigned N = cim_pkg::WHT_N,
  parameter int unsigned B = cim_pkg::WHT_BITS
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     clear,
  input  logic                     valid,
  input  logic [$clog2(B+1)-1:0]   plane_idx,
  input  logic [N-1:0]             bits,
  input  logic [B-1:0]             thr [N],
  output logic signed [B:0]        x [N],
  output logic [N-1:0]             term,
  output logic                     all_term_next
);
  logic signed [B+1:0] x_next [N];
  logic [N-1:0]        term_next;
  logic [B+1:0]        w, rem, mag;

  always_comb begin
    w   = (B+2)'(1) << ((B+2)'(B - 1) - (B+2)'(plane_idx));
    rem = w - 1'b1;
    mag = '0;
    for (int unsigned r = 0; r < N; r++) begin
      x_next[r]    = {x[r][B], x[r]};
      term_next[r] = term[r];
      if (valid && !term[r]) begin
        x_next[r] = bits[r] ? x_next[r] + $signed(w) : x_next[r] - $signed(w);
        mag       = x_next[r][B+1] ? (B+2)'(-x_next[r]) : (B+2)'(x_next[r]);
        term_next[r] = (mag + rem) <= {2'b00, thr[r]};
      end
    end
    all_term_next = &term_next;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int unsigned r = 0; r < N; r++) x[r] <= '0;
      term <= '0;
    end else if (clear) begin
      for (int unsigned r = 0; r < N; r++) x[r] <= '0;
      term <= '0;
    end else if (valid) begin
      for (int unsigned r = 0; r < N; r++) x[r] <= x_next[r][B:0];
      term <= term_next;
    end
  end
endmodule
