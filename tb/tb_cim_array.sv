// tb_cim_array -- writes random weights, then checks the product-mode
// multiply-average VDD*(1 - popcount(w & il)/COLS) and the ADC-mode
// reference VDD*code/COLS, both one cycle after the inputs are applied.
module tb_cim_array;
  localparam int ROWS = 16, COLS = 32;
  logic clk = 0, we = 0, adc_mode = 0;
  logic [3:0] waddr, row_sel;
  logic [COLS-1:0] wdata, il;
  logic [5:0] ref_code;
  real v_out;
  logic [COLS-1:0] wm [ROWS];
  int checks = 0, failures = 0;
  cim_array #(.ROWS(ROWS), .COLS(COLS)) dut (.*);
  always #5 clk = ~clk;
  initial begin
    #200000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    il = '0; row_sel = '0; ref_code = '0; waddr = '0; wdata = '0;
    for (int r = 0; r < ROWS; r++) begin
      wm[r] = $urandom;
      @(negedge clk); we = 1; waddr = 4'(r); wdata = wm[r];
    end
    @(negedge clk); we = 0;
    for (int t = 0; t < 200; t++) begin
      real expv;
      int d;
      row_sel = 4'($urandom); il = $urandom; adc_mode = 0;
      d = $countones(wm[row_sel] & il);
      expv = 1.0 - real'(d) / 32.0;
      @(negedge clk);
      checks++;
      if (v_out != expv) begin failures++; $display("FAIL mav %f exp %f", v_out, expv); end
      adc_mode = 1; ref_code = 6'($urandom_range(0, 32));
      expv = real'(ref_code) / 32.0;
      @(negedge clk);
      checks++;
      if (v_out != expv) begin failures++; $display("FAIL ref %f exp %f", v_out, expv); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
