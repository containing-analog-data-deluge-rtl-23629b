// tb_bitplane_input_regs -- loads random sign-magnitude vectors and checks
// that the bitplanes come out MSB first with the right index and sign.
module tb_bitplane_input_regs;
  localparam int N = 32, B = 8;
  logic clk = 0, rst_n = 0, load = 0, shift = 0;
  logic [N-1:0] in_sign, plane_bit, plane_sign;
  logic [B-1:0] in_mag [N];
  logic [3:0] plane_idx;
  int checks = 0, failures = 0;
  bitplane_input_regs #(.N(N), .B(B)) dut (.*);
  always #5 clk = ~clk;
  initial begin
    #200000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 20; t++) begin
      logic [B-1:0] mag [N];
      logic [N-1:0] sg;
      sg = $urandom;
      for (int i = 0; i < N; i++) mag[i] = B'($urandom);
      in_sign = sg; in_mag = mag;
      @(negedge clk); load = 1; @(negedge clk); load = 0;
      in_sign = ~sg;  // must not matter after load
      for (int k = 0; k < B; k++) begin
        checks++;
        if (plane_idx != 4'(k) || plane_sign != sg) failures++;
        for (int i = 0; i < N; i++) begin
          checks++;
          if (plane_bit[i] !== mag[i][B-1-k]) failures++;
        end
        @(negedge clk); shift = 1; @(negedge clk); shift = 0;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
