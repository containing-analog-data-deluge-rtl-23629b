// tb_walsh_crossbar -- drives the four steps of the crossbar with random
// signed bitplanes and checks each row bit against the sign of the exact
// product-sum with the reference Walsh matrix (1 when the sum is positive).
// Also checks that the result appears one cycle after the compare strobe and
// that a step omitted (no row merge) leaves the old sums in place.
module tb_walsh_crossbar;
  localparam int N = 32;
  localparam int K = 5;
  logic clk = 0;
  logic pch = 0, cm = 0, rl = 0, rm = 0, cmp = 0;
  logic [N-1:0] in_bit, in_sign, out_bit;
  int checks = 0, failures = 0;
  int w [N][N];

  walsh_crossbar #(.N(N)) dut (.*);

  always #5 clk = ~clk;
  initial begin
    #200000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_plane();
    @(negedge clk); pch = 1; cm = 1;
    @(negedge clk); pch = 0; cm = 0; rl = 1;
    @(negedge clk); rl = 0; rm = 1;
    @(negedge clk); rm = 0; cmp = 1;
    @(negedge clk); cmp = 0;
  endtask

  initial begin
    for (int r = 0; r < N; r++)
      for (int c = 0; c < N; c++) w[r][c] = tb_ref_pkg::walsh_ref(K, r, c);
    for (int t = 0; t < 300; t++) begin
      int pos, zero_cnt;
      in_bit  = {$urandom, $urandom} ;
      in_sign = $urandom;
      if (t % 7 == 0) in_bit = in_bit & $urandom & $urandom;  // sparse planes
      if (t == 5) in_bit = '0;
      run_plane();
      for (int r = 0; r < N; r++) begin
        int s;
        s = 0;
        for (int c = 0; c < N; c++)
          if (in_bit[c]) s += w[r][c] * (in_sign[c] ? -1 : 1);
        checks++;
        if (out_bit[r] !== (s > 0)) begin
          failures++;
          if (failures < 10) $display("FAIL t=%0d row=%0d sum=%0d out=%b", t, r, s, out_bit[r]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
