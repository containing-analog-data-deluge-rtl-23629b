// tb_wht_engine -- runs the frequency-domain layer on random sign-magnitude
// vectors, with and without early termination, and compares every output
// with a reference computed here: per bitplane the row bit is the sign of
// the exact product-sum with the Walsh matrix, the bits are concatenated
// MSB first, a row stops once |x| + (remaining weight) <= T, and the output
// is S_T(x) (0 for stopped rows). Also checks planes_used and the latency of
// 4 clk cycles (two cycles of the paper's clock) per bitplane:
// done arrives 4*P + 4 cycles after the start cycle.
module tb_wht_engine;
  localparam int N = 32;
  localparam int B = 8;
  localparam int K = $clog2(N);
  logic clk = 0, rst_n = 0, start = 0, et_en = 0;
  logic [N-1:0] in_sign, early_term;
  logic [B-1:0] in_mag [N];
  logic [B-1:0] thr [N];
  logic busy, done;
  logic signed [B:0] y [N];
  logic [$clog2(B+1)-1:0] planes_used;
  int checks = 0, failures = 0, n_early = 0, n_full = 0;
  int w [N][N];

  wht_engine #(.N(N), .B(B)) dut (.*);
  always #5 clk = ~clk;
  initial begin
    #2000000; failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // kind 0: random vector; kind 1: only element 0 non-zero, equal to
  // 2^(B-1), so every row answers 1 then 0 and can stop after two planes.
  task automatic one_run(input bit et, input int tmin, input int tmax, input int kind);
    int ref_x [N], ref_y [N];
    bit ref_t [N];
    int planes, cycles;
    bit all;
    for (int i = 0; i < N; i++) begin
      in_mag[i] = (kind == 1) ? ((i == 0) ? B'(1 << (B - 1)) : '0) : B'($urandom);
      thr[i]    = B'($urandom_range(tmin, tmax));
    end
    in_sign = (kind == 1) ? '0 : {$urandom, $urandom};
    et_en = et;
    // reference
    for (int r = 0; r < N; r++) begin ref_x[r] = 0; ref_t[r] = 0; end
    planes = 0;
    for (int k = 0; k < B; k++) begin
      planes++;
      all = 1;
      for (int r = 0; r < N; r++) begin
        if (!ref_t[r]) begin
          int s, wgt, mag;
          s = 0;
          for (int c = 0; c < N; c++)
            if (in_mag[c][B-1-k]) s += w[r][c] * (in_sign[c] ? -1 : 1);
          wgt = 1 << (B - 1 - k);
          ref_x[r] += (s > 0) ? wgt : -wgt;
          mag = ref_x[r] < 0 ? -ref_x[r] : ref_x[r];
          if (mag + wgt - 1 <= int'(thr[r])) ref_t[r] = 1;
        end
        all &= ref_t[r];
      end
      if (et && all) break;
    end
    for (int r = 0; r < N; r++) ref_y[r] = ref_t[r] ? 0 : tb_ref_pkg::soft_thr(ref_x[r], int'(thr[r]));
    // run
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    cycles = 1;
    while (!done) begin @(negedge clk); cycles++; end
    checks += 2;
    if (int'(planes_used) != planes) begin failures++; $display("FAIL planes %0d ref %0d", planes_used, planes); end
    if (cycles != 4 * planes + 4) begin failures++; $display("FAIL latency %0d for %0d planes", cycles, planes); end
    if (planes < B) n_early++; else n_full++;
    for (int r = 0; r < N; r++) begin
      checks += 2;
      if (int'(y[r]) != ref_y[r]) begin
        failures++;
        if (failures < 10) $display("FAIL row %0d y=%0d ref=%0d x=%0d", r, y[r], ref_y[r], ref_x[r]);
      end
      if (early_term[r] !== ref_t[r]) failures++;
    end
  endtask

  initial begin
    for (int r = 0; r < N; r++)
      for (int c = 0; c < N; c++) w[r][c] = tb_ref_pkg::walsh_ref(K, r, c);
    repeat (2) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 10; t++) one_run(0, 0, 255, 0);
    for (int t = 0; t < 10; t++) one_run(1, 0, 60, 0);
    for (int t = 0; t < 6; t++)  one_run(1, 200, 255, 0);
    for (int t = 0; t < 4; t++)  one_run(1, 255, 255, 0);
    for (int t = 0; t < 4; t++)  one_run(1, 127, 254, 1);
    for (int t = 0; t < 4; t++)  one_run(0, 127, 254, 1);
    checks++;
    if (n_early == 0 || n_full == 0) begin failures++; $display("early termination not exercised"); end
    $display("runs with early termination: %0d, full runs: %0d", n_early, n_full);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
