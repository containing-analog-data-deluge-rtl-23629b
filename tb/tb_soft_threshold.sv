// tb_soft_threshold -- exhaustive check of S_T(x) for 9-bit x and 8-bit T
// against the reference formula.
module tb_soft_threshold;
  localparam int W = 9;
  logic signed [W-1:0] x, y;
  logic [W-2:0] thr;
  int checks = 0, failures = 0;
  soft_threshold #(.W(W)) dut (.*);
  initial begin
    for (int xi = -(1 << (W-1)) + 1; xi < (1 << (W-1)); xi++)
      for (int t = 0; t < (1 << (W-1)); t += 3) begin
        x = W'(xi); thr = (W-1)'(t);
        #1;
        checks++;
        if (int'(y) != tb_ref_pkg::soft_thr(xi, t)) begin
          failures++;
          if (failures < 10) $display("FAIL x=%0d t=%0d y=%0d", xi, t, y);
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
