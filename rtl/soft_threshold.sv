// soft_threshold -- soft-thresholding activation S_T(x) = sign(x)(|x| - T).
//
// y = x + T for x < -T, 0 for |x| <= T, x - T for x > T. Combinational.
// x is a W-bit two's-complement value, thr an unsigned threshold of W-1
// bits; y has the width of x and cannot overflow because |y| <= |x|.
// The function is the paper's; widths are this design's.
module soft_threshold #(
  parameter int unsigned W = cim_pkg::WHT_BITS + 1
) (
  input  logic signed [W-1:0] x,
  input  logic        [W-2:0] thr,
  output logic signed [W-1:0] y
);
  logic signed [W:0] xe, te;
  always_comb begin
    xe = {x[W-1], x};
    te = {2'b00, thr};
    if (xe > te)        y = W'(xe - te);
    else if (xe < -te)  y = W'(xe + te);
    else                y = '0;
  end
endmodule
