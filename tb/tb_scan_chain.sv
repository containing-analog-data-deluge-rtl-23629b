// tb_scan_chain -- shifts random frames in, checks the parallel contents
// (first bit at the top), the serial output and that nothing moves without
// scan_en.
module tb_scan_chain;
  localparam int W = 38;
  logic clk = 0, rst_n = 0, scan_en = 0, scan_in = 0, scan_out;
  logic [W-1:0] q;
  int checks = 0, failures = 0;
  scan_chain #(.W(W)) dut (.*);
  always #5 clk = ~clk;
  initial begin
    #200000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 20; t++) begin
      logic [W-1:0] f, prev;
      f = {$urandom, $urandom};
      prev = q;
      for (int i = W - 1; i >= 0; i--) begin
        scan_in = f[i]; scan_en = 1;
        #1; checks++;
        if (scan_out !== prev[i]) failures++;   // old contents come out first
        @(negedge clk);
      end
      scan_en = 0; scan_in = ~scan_in;
      checks++;
      if (q !== f) begin failures++; $display("FAIL %h vs %h", q, f); end
      repeat (3) @(negedge clk);
      checks++;
      if (q !== f) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
