// tb_cim_adc_network -- loads random weights into all four arrays through
// the scan chain, then converts multiply-averages of random weight rows and
// input bitplanes in every mode and with every array as the product array
// (so neighbours swap roles), and checks the code against the ideal
// min(31, 32 - popcount(w & il)). Also checks the conversion time:
// start to done = 2 + 3 * n_cycles cycles.
// Half of the hybrid conversions also run the paired SAR conversion on the
// two arrays freed after the flash cycle: its code is checked against the
// same ideal, done2 must come after done, 2 + 3 + 1 + 15 = 21 cycles after
// start, so that both SAR conversions overlap.
module tb_cim_adc_network;
  import cim_pkg::*;
  localparam int NA = 4, ROWS = 16, COLS = 32, BITS = 5, LANES = 3;
  logic clk = 0, rst_n = 0;
  logic scan_en = 0, scan_in = 0, scan_update = 0, scan_out;
  logic start = 0;
  logic [1:0] src;
  logic [3:0] row_sel;
  logic [COLS-1:0] il;
  adc_mode_e mode;
  logic [BITS-1:0] qref [LANES];
  logic busy, done, flash_cycle, sar_cycle;
  logic [BITS-1:0] code;
  logic [3:0] n_cycles;
  logic [5:0] n_cmp;
  logic pair_en = 0, done2;
  logic [3:0] row_sel2;
  logic [COLS-1:0] il2;
  logic [BITS-1:0] code2;
  int n_pair = 0;
  logic [COLS-1:0] wm [NA][ROWS];
  int checks = 0, failures = 0;
  int n_mode [4];

  cim_adc_network dut (.*);
  always #5 clk = ~clk;
  initial begin
    #20000000; failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic load_row(input int a, input int r, input logic [COLS-1:0] d);
    logic [37:0] f;
    f = {2'(a), 4'(r), d};
    for (int i = 37; i >= 0; i--) begin
      @(negedge clk); scan_en = 1; scan_in = f[i];
    end
    @(negedge clk); scan_en = 0; scan_update = 1;
    @(negedge clk); scan_update = 0;
  endtask

  initial begin
    src = '0; row_sel = '0; il = '0; mode = ADC_SAR;
    qref[0] = 5'd8; qref[1] = 5'd16; qref[2] = 5'd24;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int a = 0; a < NA; a++)
      for (int r = 0; r < ROWS; r++) begin
        wm[a][r] = $urandom;
        load_row(a, r, wm[a][r]);
      end
    for (int t = 0; t < 160; t++) begin
      int exp_code, exp_code2, cycles;
      src = 2'(t % NA);
      row_sel = 4'($urandom);
      il = $urandom;
      if (t % 10 == 3) il = '0;            // MAV = VDD, code saturates at 31
      if (t % 10 == 4) il = '1;
      mode = adc_mode_e'((t / NA) % 4);
      if (mode == ADC_ASYM || (mode == ADC_HYBRID && t % 8 == 1)) begin
        qref[0] = 5'd23; qref[1] = 5'd24; qref[2] = 5'd25;
      end else begin
        qref[0] = 5'd8; qref[1] = 5'd16; qref[2] = 5'd24;
      end
      exp_code = tb_ref_pkg::mav_code($countones(wm[src][row_sel] & il), COLS);
      pair_en = (mode == ADC_HYBRID) && (t % 2 == 0);
      row_sel2 = 4'($urandom);
      il2 = $urandom;
      exp_code2 = tb_ref_pkg::mav_code($countones(wm[(int'(src) + 2) % NA][row_sel2] & il2), COLS);
      @(negedge clk); start = 1;
      @(negedge clk); start = 0;
      cycles = 1;
      while (!done) begin @(negedge clk); cycles++; end
      if (pair_en) begin
        int cycles2;
        cycles2 = cycles;
        while (!done2) begin @(negedge clk); cycles2++; end
        n_pair++;
        checks += 2;
        if (int'(code2) != exp_code2) begin failures++; $display("FAIL t=%0d paired code=%0d exp=%0d", t, code2, exp_code2); end
        if (cycles2 != 21 || cycles2 <= cycles) begin failures++; $display("FAIL t=%0d paired latency %0d (first %0d)", t, cycles2, cycles); end
      end
      while (busy) @(negedge clk);
      n_mode[mode]++;
      checks += 2;
      if (int'(code) != exp_code) begin
        failures++;
        if (failures < 20) $display("FAIL t=%0d src=%0d mode=%s code=%0d exp=%0d", t, src, mode.name(), code, exp_code);
      end
      if (cycles != 2 + 3 * int'(n_cycles)) begin failures++; $display("FAIL latency %0d cycles %0d", cycles, n_cycles); end
    end
    checks++;
    if (n_pair == 0) begin failures++; $display("FAIL no paired conversion"); end
    $display("paired SAR conversions: %0d", n_pair);
    $display("conversions per mode: SAR %0d FLASH %0d HYBRID %0d ASYM %0d", n_mode[0], n_mode[1], n_mode[2], n_mode[3]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
