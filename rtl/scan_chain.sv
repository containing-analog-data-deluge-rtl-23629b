// scan_chain -- serial load path for configuration and weight data.
//
// A W-bit shift register: with scan_en high, every clk cycle shifts scan_in
// in at bit 0 and moves the register up by one; scan_out is the top bit, so
// chains can be cascaded and the shifted-in data read back. q gives the
// whole register in parallel. The first bit shifted in ends up at bit W-1.
// The test chip has SCAN_IN, SCAN_OUT and SCAN_CLK pins and a scan chain;
// its length, its frame format and the use of scan_en as a clock enable
// (instead of a separate scan clock) are this design's choices.
module scan_chain #(
  parameter int unsigned W = 38
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         scan_en,
  input  logic         scan_in,
  output logic         scan_out,
  output logic [W-1:0] q
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)       q <= '0;
    else if (scan_en) q <= {q[W-2:0], scan_in};
  end
  assign scan_out = q[W-1];
endmodule
