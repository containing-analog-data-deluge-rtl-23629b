// tb_clocked_comparator -- checks that the comparator decides
// v_in >= v_ref only on enabled clock edges and holds its output otherwise.
module tb_clocked_comparator;
  logic clk = 0, rst_n = 0, en = 0, q;
  real v_in, v_ref;
  int checks = 0, failures = 0;
  clocked_comparator dut (.*);
  always #5 clk = ~clk;
  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    v_in = 0.0; v_ref = 0.0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 200; t++) begin
      bit exp_q, held;
      v_in  = real'($urandom_range(0, 32)) / 32.0;
      v_ref = real'($urandom_range(0, 32)) / 32.0;
      en = 1;
      exp_q = (v_in >= v_ref);
      @(negedge clk);
      checks++;
      if (q !== exp_q) failures++;
      held = q;
      en = 0; v_in = 1.0 - v_in; v_ref = 1.0 - v_ref;
      @(negedge clk);
      checks++;
      if (q !== held) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
