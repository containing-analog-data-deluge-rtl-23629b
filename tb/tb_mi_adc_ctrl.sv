// tb_mi_adc_ctrl -- closes the loop around the digitization controller with
// an ideal DAC + comparator model (a lane's comparator answers
// code >= ref_code, latched on the CMP cycle) and checks, for every code and
// every mode, the final code, the number of comparison cycles, the number of
// comparisons and the latency of three clk cycles per comparison cycle.
// Expected counts: SAR 5 cycles / 5 comparisons; flash 3 cycles / 8;
// hybrid with references 8/16/24 4 cycles / 6; asymmetric with Q1/Q2/Q3 =
// 23/24/25 from the MAV-statistics study: 2 comparisons for codes 23 and 24,
// otherwise 2 plus a plain binary search of the remaining interval.
// It also measures the average number of comparisons of SAR and asymmetric
// search over codes drawn like a multiply-average of 32 random products
// (each 1 with probability 1/4) and requires the asymmetric one to be lower.
// Finally it holds the controller in its first precharge phase for a few
// cycles and checks that the result is unchanged and the time longer by that.
module tb_mi_adc_ctrl;
  import cim_pkg::*;
  localparam int BITS = 5, LANES = 3;
  logic clk = 0, rst_n = 0, start = 0, hold = 0;
  adc_mode_e mode;
  logic [BITS-1:0] qref [LANES];
  logic [LANES-1:0] cmp, lane_en, lane_cmp_en;
  logic [BITS:0] ref_code [LANES];
  logic busy, done, flash_cycle, sar_cycle;
  logic [BITS-1:0] code;
  logic [3:0] n_cycles;
  logic [5:0] n_cmp;
  int v;  // true code of the input
  int checks = 0, failures = 0;

  mi_adc_ctrl #(.BITS(BITS), .LANES(LANES)) dut (.*);
  always #5 clk = ~clk;
  initial begin
    #5000000; failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  always_ff @(posedge clk)
    for (int j = 0; j < LANES; j++)
      if (lane_cmp_en[j]) cmp[j] <= (v >= int'(ref_code[j]));

  function automatic int bisect_count(input int lo, input int hi, input int val);
    int n;
    n = 0;
    while (hi - lo > 1) begin
      int m;
      m = lo + (hi - lo) / 2;
      if (val >= m) lo = m; else hi = m;
      n++;
    end
    return n;
  endfunction

  task automatic convert(input adc_mode_e m, input int val, output int ncyc, output int ncmp);
    int cycles;
    v = val; mode = m;
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    cycles = 1;
    while (!done) begin @(negedge clk); cycles++; end
    ncyc = n_cycles; ncmp = n_cmp;
    checks += 2;
    if (int'(code) != val) begin
      failures++;
      if (failures < 20) $display("FAIL mode=%s v=%0d code=%0d", m.name(), val, code);
    end
    if (cycles != 3 * int'(n_cycles) + 1) begin failures++; $display("FAIL latency %0d", cycles); end
  endtask

  // hold raised with start and kept for k more cycles: the controller waits
  // in its first precharge phase, so the conversion takes k cycles longer.
  task automatic convert_held(input adc_mode_e m, input int val, input int k);
    int cycles;
    v = val; mode = m;
    @(negedge clk); start = 1; hold = 1;
    @(negedge clk); start = 0;
    cycles = 1;
    repeat (k) begin @(negedge clk); cycles++; end
    hold = 0;
    while (!done) begin @(negedge clk); cycles++; end
    checks += 2;
    if (int'(code) != val) begin failures++; $display("FAIL held v=%0d code=%0d", val, code); end
    if (cycles != 3 * int'(n_cycles) + 1 + k) begin failures++; $display("FAIL held latency %0d k=%0d", cycles, k); end
  endtask

  initial begin
    int ncyc, ncmp, e_cyc, e_cmp;
    int sum_sar, sum_asym, nsamp;
    cmp = '0; v = 0; mode = ADC_SAR;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int val = 0; val < 32; val++) begin
      qref[0] = 5'd8; qref[1] = 5'd16; qref[2] = 5'd24;
      convert(ADC_SAR, val, ncyc, ncmp);
      checks++; if (ncyc != 5 || ncmp != 5) begin failures++; $display("FAIL sar counts %0d %0d", ncyc, ncmp); end
      convert(ADC_FLASH, val, ncyc, ncmp);
      checks++; if (ncyc != 3 || ncmp != 8) begin failures++; $display("FAIL flash counts %0d %0d", ncyc, ncmp); end
      convert(ADC_HYBRID, val, ncyc, ncmp);
      checks++; if (ncyc != 4 || ncmp != 6) begin failures++; $display("FAIL hybrid counts %0d %0d", ncyc, ncmp); end
      qref[0] = 5'd23; qref[1] = 5'd24; qref[2] = 5'd25;   // Q1, Q2, Q3
      convert(ADC_ASYM, val, ncyc, ncmp);
      if (val == 23 || val == 24) e_cmp = 2;
      else if (val > 24) e_cmp = 2 + bisect_count(25, 32, val);
      else e_cmp = 2 + bisect_count(0, 23, val);
      checks++; if (ncmp != e_cmp || ncyc != e_cmp) begin failures++; $display("FAIL asym v=%0d counts %0d exp %0d", val, ncmp, e_cmp); end
      // hybrid accelerating the asymmetric search: flash at Q1/Q2/Q3
      convert(ADC_HYBRID, val, ncyc, ncmp);
      if (val == 23 || val == 24) e_cyc = 1;
      else if (val > 24) e_cyc = 1 + bisect_count(25, 32, val);
      else e_cyc = 1 + bisect_count(0, 23, val);
      checks++; if (ncyc != e_cyc) begin failures++; $display("FAIL hybrid-asym v=%0d cycles %0d exp %0d", val, ncyc, e_cyc); end
    end
    for (int t = 0; t < 20; t++) begin
      qref[0] = 5'd8; qref[1] = 5'd16; qref[2] = 5'd24;
      convert_held(adc_mode_e'(t % 3), $urandom_range(0, 31), 1 + t % 4);
    end
    // average comparisons under a skewed MAV distribution
    sum_sar = 0; sum_asym = 0; nsamp = 300;
    for (int s = 0; s < nsamp; s++) begin
      int d, val;
      d = 0;
      for (int c = 0; c < 32; c++) if ($urandom_range(0, 3) == 0) d++;
      val = tb_ref_pkg::mav_code(d, 32);
      qref[0] = 5'd23; qref[1] = 5'd24; qref[2] = 5'd25;
      convert(ADC_ASYM, val, ncyc, ncmp); sum_asym += ncmp;
      convert(ADC_SAR, val, ncyc, ncmp);  sum_sar += ncmp;
    end
    $display("average comparisons: SAR %0.2f, asymmetric %0.2f", real'(sum_sar) / nsamp, real'(sum_asym) / nsamp);
    checks++;
    if (sum_asym >= sum_sar) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
