// tb_fdcim_top -- end-to-end test of the whole design at its default sizes
// (32x32 Walsh crossbar with 8-bit inputs; four 16x32 arrays with a 5-bit
// memory-immersed ADC; six 16x32 arrays in the hybrid network). The three
// subsystems are driven concurrently.
//
// Frequency-domain layer: random and directed input vectors with and
// without early termination; every output is compared with a reference
// (exact Walsh product-sum per bitplane, sign bit, MSB-first concatenation,
// exact termination rule, soft threshold), and the latency 4*P + 4.
// ADC network: weights loaded through the scan chain, then conversions in
// all four modes with every array taking the product role in turn; codes
// are compared with min(31, 32 - popcount(w & il)).
// Hybrid network: weights loaded through its own scan chain, then rounds in
// which three product arrays are converted together (flash one after
// another, SAR concurrently); codes checked the same way.
// Each mechanism (two-pass layer, full bitplane run, early termination at plane 1 and at a
// later plane, soft threshold zeroing and passing values, SAR, flash,
// hybrid and asymmetric conversions, flash and SAR comparison cycles, role
// swap between neighbours, code saturation, paired SAR on the freed arrays, hybrid rounds with three
// concurrent SAR conversions) is counted, and one that never
// happened counts as a failure.
module tb_fdcim_top;
  import cim_pkg::*;
  localparam int N = WHT_N, B = WHT_BITS, K = $clog2(WHT_N);
  localparam int NA = NUM_ARRAYS, ROWS = ARR_ROWS, COLS = ARR_COLS, LANES = NUM_LANES;

  logic clk = 0, rst_n = 0;
  logic wht_start = 0, wht_et_en = 0, wht_two_pass = 0;
  logic [N-1:0] wht_in_sign, wht_early_term;
  logic [B-1:0] wht_in_mag [N];
  logic [B-1:0] wht_thr [N];
  logic wht_busy, wht_done;
  logic signed [B:0] wht_y [N];
  logic [$clog2(B+1)-1:0] wht_planes_used;
  logic adc_scan_en = 0, adc_scan_in = 0, adc_scan_update = 0, adc_scan_out;
  logic adc_start = 0;
  logic [1:0] adc_src;
  logic [3:0] adc_row_sel;
  logic [COLS-1:0] adc_il;
  adc_mode_e adc_mode;
  logic [ADC_BITS-1:0] adc_qref [LANES];
  logic adc_busy, adc_done, adc_flash_cycle, adc_sar_cycle;
  logic [ADC_BITS-1:0] adc_code;
  logic [3:0] adc_n_cycles;
  logic [5:0] adc_n_cmp;
  logic adc_pair_en = 0, adc_done2;
  logic [3:0] adc_row_sel2;
  logic [COLS-1:0] adc_il2;
  logic [ADC_BITS-1:0] adc_code2;
  logic hyb_scan_en = 0, hyb_scan_in = 0, hyb_scan_update = 0, hyb_scan_out;
  logic hyb_start = 0;
  logic [3:0] hyb_row_sel [LANES];
  logic [COLS-1:0] hyb_il [LANES];
  logic [ADC_BITS-1:0] hyb_qref [LANES];
  logic hyb_busy, hyb_done, hyb_flash_cycle, hyb_sar_cycle;
  logic [ADC_BITS-1:0] hyb_code [LANES];
  logic [1:0] hyb_sar_parallel;

  fdcim_top dut (.*);

  int checks = 0, failures = 0;
  int w [N][N];
  logic [COLS-1:0] wm [NA][ROWS];
  // mechanism counters
  int m_two = 0, m_full = 0, m_et1 = 0, m_et_late = 0, m_zeroed = 0, m_passed = 0;
  int m_mode [4];
  int m_flash_cyc = 0, m_sar_cyc = 0, m_swap = 0, m_sat = 0;
  int m_hyb_round = 0, m_hyb_par = 0, m_pair = 0;
  logic [COLS-1:0] hm [2 * LANES][ROWS];

  always #5 clk = ~clk;
  initial begin
    #50000000; failures++; $display("watchdog");
    $display("Hybrid network: %0d rounds of %0d conversions, %0d SAR cycles with all %0d arrays converting",
             m_hyb_round, LANES, m_hyb_par, LANES);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  always @(posedge clk) begin
    if (adc_flash_cycle) m_flash_cyc++;
    if (adc_sar_cycle)   m_sar_cyc++;
    if (hyb_sar_cycle && hyb_sar_parallel == 2'(LANES)) m_hyb_par++;
  end

  // ---------------- frequency-domain layer ----------------
  task automatic wht_run(input bit et, input int tmin, input int tmax, input int kind, input bit two = 0);
    int ref_x [N], ref_y [N];
    bit ref_t [N];
    int planes, cycles;
    bit all;
    for (int i = 0; i < N; i++) begin
      wht_in_mag[i] = (kind == 1) ? ((i == 0) ? B'(1 << (B - 1)) : '0) : B'($urandom);
      wht_thr[i]    = B'($urandom_range(tmin, tmax));
    end
    wht_in_sign = (kind == 1) ? '0 : {$urandom, $urandom};
    wht_et_en = et;
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
            if (wht_in_mag[c][B-1-k]) s += w[r][c] * (wht_in_sign[c] ? -1 : 1);
          wgt = 1 << (B - 1 - k);
          ref_x[r] += (s > 0) ? wgt : -wgt;
          mag = ref_x[r] < 0 ? -ref_x[r] : ref_x[r];
          if (mag + wgt - 1 <= int'(wht_thr[r])) ref_t[r] = 1;
        end
        all &= ref_t[r];
      end
      if (et && all) break;
    end
    for (int r = 0; r < N; r++) ref_y[r] = ref_t[r] ? 0 : tb_ref_pkg::soft_thr(ref_x[r], int'(wht_thr[r]));
    if (two) begin
      // second pass: sign(y), |y| through the same transform, threshold 0
      int x2 [N];
      for (int r = 0; r < N; r++) x2[r] = 0;
      for (int k = 0; k < B; k++)
        for (int r = 0; r < N; r++) begin
          int s2;
          s2 = 0;
          for (int c = 0; c < N; c++) begin
            int m;
            m = ref_y[c] < 0 ? -ref_y[c] : ref_y[c];
            if ((m >> (B - 1 - k)) & 1) s2 += w[r][c] * (ref_y[c] < 0 ? -1 : 1);
          end
          x2[r] += (s2 > 0) ? (1 << (B - 1 - k)) : -(1 << (B - 1 - k));
        end
      for (int r = 0; r < N; r++) ref_y[r] = x2[r];
    end
    wht_two_pass = two;
    @(negedge clk); wht_start = 1;
    @(negedge clk); wht_start = 0;
    cycles = 1;
    while (!wht_done) begin @(negedge clk); cycles++; end
    checks += 2;
    if (int'(wht_planes_used) != planes) begin failures++; $display("FAIL planes %0d ref %0d", wht_planes_used, planes); end
    if (cycles != 4 * planes + 4 + (two ? 4 * B + 4 : 0)) begin failures++; $display("FAIL wht latency %0d", cycles); end
    if (two) m_two++;
    if (planes == B) m_full++; else if (planes == 1) m_et1++; else m_et_late++;
    for (int r = 0; r < N; r++) begin
      checks++;
      if (int'(wht_y[r]) != ref_y[r]) begin
        failures++;
        if (failures < 10) $display("FAIL wht row %0d y=%0d ref=%0d", r, wht_y[r], ref_y[r]);
      end
      if (ref_y[r] == 0) m_zeroed++; else m_passed++;
    end
  endtask

  // ---------------- ADC network ----------------
  task automatic load_row(input int a, input int r, input logic [COLS-1:0] d);
    logic [37:0] f;
    f = {2'(a), 4'(r), d};
    for (int i = 37; i >= 0; i--) begin
      @(negedge clk); adc_scan_en = 1; adc_scan_in = f[i];
    end
    @(negedge clk); adc_scan_en = 0; adc_scan_update = 1;
    @(negedge clk); adc_scan_update = 0;
  endtask

  task automatic adc_conv(input int t);
    int exp_code, exp_code2, last_src;
    last_src = int'(adc_src);
    adc_src = 2'(t % NA);
    if (t > 0 && int'(adc_src) == (last_src + 1) % NA) m_swap++;
    adc_row_sel = 4'($urandom);
    adc_il = (t % 9 == 4) ? '0 : COLS'($urandom);
    adc_mode = adc_mode_e'((t / NA) % 4);
    if (adc_mode == ADC_ASYM) begin
      adc_qref[0] = 5'd23; adc_qref[1] = 5'd24; adc_qref[2] = 5'd25;
    end else begin
      adc_qref[0] = 5'd8; adc_qref[1] = 5'd16; adc_qref[2] = 5'd24;
    end
    exp_code = tb_ref_pkg::mav_code($countones(wm[adc_src][adc_row_sel] & adc_il), COLS);
    adc_pair_en = (adc_mode == ADC_HYBRID) && (t % 2 == 1);
    adc_row_sel2 = 4'($urandom);
    adc_il2 = $urandom;
    exp_code2 = tb_ref_pkg::mav_code($countones(wm[(int'(adc_src) + 2) % NA][adc_row_sel2] & adc_il2), COLS);
    @(negedge clk); adc_start = 1;
    @(negedge clk); adc_start = 0;
    while (!adc_done) @(negedge clk);
    if (adc_pair_en) begin
      while (!adc_done2) @(negedge clk);
      m_pair++;
      checks++;
      if (int'(adc_code2) != exp_code2) begin
        failures++;
        if (failures < 10) $display("FAIL adc t=%0d paired code=%0d exp=%0d", t, adc_code2, exp_code2);
      end
    end
    while (adc_busy) @(negedge clk);
    m_mode[adc_mode]++;
    if (exp_code == COLS - 1 && adc_il == '0) m_sat++;
    checks++;
    if (int'(adc_code) != exp_code) begin
      failures++;
      if (failures < 10) $display("FAIL adc t=%0d code=%0d exp=%0d", t, adc_code, exp_code);
    end
  endtask

  // ---------------- hybrid network ----------------
  task automatic hyb_load_row(input int a, input int r, input logic [COLS-1:0] d);
    logic [38:0] f;
    f = {3'(a), 4'(r), d};
    for (int i = 38; i >= 0; i--) begin
      @(negedge clk); hyb_scan_en = 1; hyb_scan_in = f[i];
    end
    @(negedge clk); hyb_scan_en = 0; hyb_scan_update = 1;
    @(negedge clk); hyb_scan_update = 0;
  endtask

  task automatic hyb_round();
    int exp_code [LANES];
    for (int k = 0; k < LANES; k++) begin
      hyb_row_sel[k] = 4'($urandom);
      hyb_il[k] = $urandom;
      exp_code[k] = tb_ref_pkg::mav_code($countones(hm[k][hyb_row_sel[k]] & hyb_il[k]), COLS);
    end
    @(negedge clk); hyb_start = 1;
    @(negedge clk); hyb_start = 0;
    while (!hyb_done) @(negedge clk);
    m_hyb_round++;
    for (int k = 0; k < LANES; k++) begin
      checks++;
      if (int'(hyb_code[k]) != exp_code[k]) begin
        failures++;
        if (failures < 10) $display("FAIL hybrid array %0d code=%0d exp=%0d", k, hyb_code[k], exp_code[k]);
      end
    end
  endtask

  initial begin
    for (int r = 0; r < N; r++)
      for (int c = 0; c < N; c++) w[r][c] = tb_ref_pkg::walsh_ref(K, r, c);
    adc_src = '0; adc_row_sel = '0; adc_il = '0; adc_mode = ADC_SAR;
    for (int j = 0; j < LANES; j++) adc_qref[j] = '0;
    wht_in_sign = '0;
    for (int i = 0; i < N; i++) begin wht_in_mag[i] = '0; wht_thr[i] = '0; end
    for (int k = 0; k < LANES; k++) begin hyb_row_sel[k] = '0; hyb_il[k] = '0; end
    hyb_qref[0] = 5'd8; hyb_qref[1] = 5'd16; hyb_qref[2] = 5'd24;
    repeat (3) @(negedge clk); rst_n = 1;
    fork
      begin
        wht_run(0, 0, 255, 0);
        wht_run(0, 0, 100, 0);
        wht_run(1, 0, 100, 0);
        wht_run(1, 255, 255, 0);
        wht_run(1, 127, 254, 1);
        wht_run(0, 127, 254, 1);
        wht_run(1, 0, 255, 0);
        wht_run(1, 0, 100, 0, 1);
        wht_run(0, 0, 255, 0, 1);
      end
      begin
        for (int a = 0; a < NA; a++)
          for (int r = 0; r < ROWS; r++) begin
            wm[a][r] = $urandom;
            load_row(a, r, wm[a][r]);
          end
        for (int t = 0; t < 48; t++) adc_conv(t);
      end
      begin
        for (int a = 0; a < 2 * LANES; a++)
          for (int r = 0; r < ROWS; r++) begin
            hm[a][r] = $urandom;
            hyb_load_row(a, r, hm[a][r]);
          end
        for (int t = 0; t < 12; t++) hyb_round();
      end
    join
    begin
      int missing;
      missing = 0;
      if (m_full == 0)      begin missing++; $display("MISSING full bitplane run"); end
      if (m_et1 == 0)       begin missing++; $display("MISSING early termination after one plane"); end
      if (m_et_late == 0)   begin missing++; $display("MISSING early termination after several planes"); end
      if (m_zeroed == 0)    begin missing++; $display("MISSING soft-threshold zero"); end
      if (m_passed == 0)    begin missing++; $display("MISSING soft-threshold pass"); end
      for (int m = 0; m < 4; m++)
        if (m_mode[m] == 0) begin missing++; $display("MISSING ADC mode %0d", m); end
      if (m_flash_cyc == 0) begin missing++; $display("MISSING flash comparison cycle"); end
      if (m_sar_cyc == 0)   begin missing++; $display("MISSING SAR comparison cycle"); end
      if (m_swap == 0)      begin missing++; $display("MISSING role swap"); end
      if (m_sat == 0)       begin missing++; $display("MISSING code saturation"); end
      if (m_two == 0)       begin missing++; $display("MISSING two-pass layer"); end
      if (m_pair == 0)      begin missing++; $display("MISSING paired SAR conversion"); end
      if (m_hyb_round == 0) begin missing++; $display("MISSING hybrid network round"); end
      if (m_hyb_par == 0)   begin missing++; $display("MISSING concurrent SAR cycle"); end
      checks += 18;
      failures += missing;
    end
    $display("WHT: two-pass layers %0d", m_two);
    $display("WHT: full runs %0d, stopped after 1 plane %0d, stopped later %0d, outputs zeroed %0d, passed %0d",
             m_full, m_et1, m_et_late, m_zeroed, m_passed);
    $display("ADC: SAR %0d FLASH %0d HYBRID %0d ASYM %0d conversions, %0d flash cycles, %0d SAR cycles, %0d role swaps, %0d saturated, %0d paired SAR",
             m_mode[0], m_mode[1], m_mode[2], m_mode[3], m_flash_cyc, m_sar_cyc, m_swap, m_sat, m_pair);
    $display("Hybrid network: %0d rounds of %0d conversions, %0d SAR cycles with all %0d arrays converting",
             m_hyb_round, LANES, m_hyb_par, LANES);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
