// tb_bwht_layer -- checks the two-pass layer F0(S_T(F0(x))) against a
// reference built from the exact Walsh product-sums: per bitplane the sign
// of the signed product-sum gives the row bit, bits join MSB first with
// weights +-2^(B-1-k), rows stop early by the exact bound when enabled, and
// S_T applies with the row's threshold; pass 2 feeds sign(y1), |y1| through
// the same transform with threshold 0 and no early termination. Random
// vectors with and without early termination and with one pass only are
// run; outputs, pass-1 plane count, termination flags and the latency
// 4*P1 + 4 cycles for pass 1, counted from the cycle after start, plus
// 4*B + 4 for pass 2 are checked. Pass-2 outputs are also checked
// to form a valid B-bit sign-magnitude input (odd, |y| <= 2^B - 1).
module tb_bwht_layer;
  import cim_pkg::*;
  localparam int N = WHT_N, B = WHT_BITS, K = $clog2(WHT_N);
  logic clk = 0, rst_n = 0;
  logic start = 0, two_pass = 0, et_en = 0;
  logic [N-1:0] in_sign, early_term;
  logic [B-1:0] in_mag [N];
  logic [B-1:0] thr [N];
  logic busy, done;
  logic signed [B:0] y [N];
  logic [$clog2(B+1)-1:0] planes_used;
  int w [N][N];
  int checks = 0, failures = 0;
  int n_two = 0, n_et = 0;

  bwht_layer dut (.*);
  always #5 clk = ~clk;
  initial begin
    #5000000; failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // one approximate transform F0 followed by S_T
  task automatic f0(input bit sgn [N], input int mag [N], input int t [N], input bit et,
                    output int yo [N], output int planes, output bit term [N]);
    int x [N];
    bit all;
    for (int r = 0; r < N; r++) begin x[r] = 0; term[r] = 0; end
    planes = 0;
    for (int k = 0; k < B; k++) begin
      planes++;
      all = 1;
      for (int r = 0; r < N; r++) begin
        if (!term[r]) begin
          int s, wgt, m;
          s = 0;
          for (int c = 0; c < N; c++)
            if ((mag[c] >> (B - 1 - k)) & 1) s += w[r][c] * (sgn[c] ? -1 : 1);
          wgt = 1 << (B - 1 - k);
          x[r] += (s > 0) ? wgt : -wgt;
          m = x[r] < 0 ? -x[r] : x[r];
          if (m + wgt - 1 <= t[r]) term[r] = 1;
        end
        all &= term[r];
      end
      if (et && all) break;
    end
    for (int r = 0; r < N; r++) yo[r] = term[r] ? 0 : tb_ref_pkg::soft_thr(x[r], t[r]);
  endtask

  task automatic run(input bit two, input bit et, input int tmin, input int tmax);
    bit sgn [N], sgn2 [N], term1 [N], term2 [N];
    int mag [N], t [N], mag2 [N], t0 [N], y1 [N], y2 [N];
    int p1, p2, cycles, expc;
    for (int i = 0; i < N; i++) begin
      mag[i] = $urandom_range(0, (1 << B) - 1);
      sgn[i] = 1'($urandom);
      t[i]   = $urandom_range(tmin, tmax);
      in_mag[i] = B'(mag[i]); in_sign[i] = sgn[i]; thr[i] = B'(t[i]);
      t0[i]  = 0;
    end
    f0(sgn, mag, t, et, y1, p1, term1);
    for (int i = 0; i < N; i++) begin
      sgn2[i] = y1[i] < 0;
      mag2[i] = y1[i] < 0 ? -y1[i] : y1[i];
    end
    f0(sgn2, mag2, t0, 0, y2, p2, term2);
    two_pass = two; et_en = et;
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    // scramble the inputs: the layer must have latched them
    for (int i = 0; i < N; i++) begin in_mag[i] = B'($urandom); thr[i] = B'($urandom); end
    in_sign = {$urandom};
    cycles = 1;
    while (!done) begin @(negedge clk); cycles++; end
    expc = two ? 4 * p1 + 4 + 4 * B + 4 : 4 * p1 + 4;
    checks += 2;
    if (cycles != expc) begin failures++; $display("FAIL latency %0d exp %0d", cycles, expc); end
    if (int'(planes_used) != p1) begin failures++; $display("FAIL planes %0d exp %0d", planes_used, p1); end
    if (p1 < B) n_et++;
    if (two) n_two++;
    for (int r = 0; r < N; r++) begin
      int e;
      e = two ? y2[r] : y1[r];
      checks += 2;
      if (int'(y[r]) != e) begin
        failures++;
        if (failures < 10) $display("FAIL two=%0d row %0d y=%0d exp=%0d", two, r, y[r], e);
      end
      if (early_term[r] != term1[r]) failures++;
      if (two) begin
        checks++;
        if (y[r] % 2 == 0 || y[r] > (1 << B) - 1 || y[r] < -((1 << B) - 1)) failures++;
      end
    end
  endtask

  initial begin
    for (int r = 0; r < N; r++)
      for (int c = 0; c < N; c++) w[r][c] = tb_ref_pkg::walsh_ref(K, r, c);
    in_sign = '0;
    for (int i = 0; i < N; i++) begin in_mag[i] = '0; thr[i] = '0; end
    repeat (2) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 24; t++) begin
      case (t % 4)
        0: run(1, 0, 0, 100);
        1: run(1, 1, 0, 255);
        2: run(0, 1, 0, 255);
        default: run(1, 1, 255, 255);   // every row stops after one plane
      endcase
    end
    checks += 2;
    if (n_two == 0) failures++;
    if (n_et == 0) begin failures++; $display("FAIL no early termination"); end
    $display("layers: %0d two-pass, %0d with early termination", n_two, n_et);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
