// tb_cim_hybrid_network -- loads random weights into the three product
// arrays (and the three DAC arrays) through the scan chain, then runs
// conversion rounds in which all three product arrays compute the MAV of a
// random weight row and input bitplane, and checks each code against the
// ideal min(31, 32 - popcount(w & il)). Checked per round as well: three
// flash cycles one after another, then three SAR cycles in which all three
// conversions advance together, and start-to-done = 2 + 3 * 6 = 20 cycles
// with the 8/16/24 flash references. A few rounds use the asymmetric
// references 23/24/25, which resolve codes 23 and 24 in the flash cycle.
module tb_cim_hybrid_network;
  localparam int ROWS = 16, COLS = 32, BITS = 5, LANES = 3;
  logic clk = 0, rst_n = 0;
  logic scan_en = 0, scan_in = 0, scan_update = 0, scan_out;
  logic start = 0;
  logic [3:0] row_sel [LANES];
  logic [COLS-1:0] il [LANES];
  logic [BITS-1:0] qref [LANES];
  logic busy, done, flash_cycle, sar_cycle;
  logic [1:0] sar_parallel;
  logic [BITS-1:0] code [LANES];
  logic [COLS-1:0] wm [2 * LANES][ROWS];
  int checks = 0, failures = 0;
  int n_flash, n_sar, n_par;

  cim_hybrid_network dut (.*);
  always #5 clk = ~clk;
  initial begin
    #5000000; failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  always @(posedge clk) begin
    if (flash_cycle) n_flash++;
    if (sar_cycle) begin
      n_sar++;
      if (sar_parallel == 2'(LANES)) n_par++;
    end
  end

  task automatic load_row(input int a, input int r, input logic [COLS-1:0] d);
    logic [38:0] f;
    f = {3'(a), 4'(r), d};
    for (int i = 38; i >= 0; i--) begin
      @(negedge clk); scan_en = 1; scan_in = f[i];
    end
    @(negedge clk); scan_en = 0; scan_update = 1;
    @(negedge clk); scan_update = 0;
  endtask

  initial begin
    for (int k = 0; k < LANES; k++) begin row_sel[k] = '0; il[k] = '0; end
    repeat (2) @(negedge clk); rst_n = 1;
    for (int a = 0; a < 2 * LANES; a++)
      for (int r = 0; r < ROWS; r++) begin
        wm[a][r] = $urandom;
        load_row(a, r, wm[a][r]);
      end
    for (int t = 0; t < 60; t++) begin
      int cycles;
      int exp_code [LANES];
      bit asym;
      asym = (t % 10 == 7);
      if (asym) begin qref[0] = 5'd23; qref[1] = 5'd24; qref[2] = 5'd25; end
      else      begin qref[0] = 5'd8;  qref[1] = 5'd16; qref[2] = 5'd24; end
      for (int k = 0; k < LANES; k++) begin
        row_sel[k] = 4'($urandom);
        il[k] = $urandom;
        if (t % 10 == 3 && k == 1) il[k] = '0;   // MAV = VDD: code saturates
        exp_code[k] = tb_ref_pkg::mav_code($countones(wm[k][row_sel[k]] & il[k]), COLS);
      end
      n_flash = 0; n_sar = 0; n_par = 0;
      @(negedge clk); start = 1;
      @(negedge clk); start = 0;
      cycles = 1;
      while (!done) begin @(negedge clk); cycles++; end
      for (int k = 0; k < LANES; k++) begin
        checks++;
        if (int'(code[k]) != exp_code[k]) begin
          failures++;
          if (failures < 20) $display("FAIL t=%0d array %0d code=%0d exp=%0d", t, k, code[k], exp_code[k]);
        end
      end
      checks++;
      if (n_flash != LANES) begin failures++; $display("FAIL t=%0d flash cycles %0d", t, n_flash); end
      if (!asym) begin
        checks += 3;
        if (n_sar != 3) begin failures++; $display("FAIL t=%0d SAR cycles %0d", t, n_sar); end
        if (n_par != 3) begin failures++; $display("FAIL t=%0d parallel SAR cycles %0d", t, n_par); end
        if (cycles != 20) begin failures++; $display("FAIL t=%0d latency %0d", t, cycles); end
      end else begin
        checks++;
        if (cycles != 2 + 3 * (LANES + n_sar)) begin failures++; $display("FAIL t=%0d latency %0d", t, cycles); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
