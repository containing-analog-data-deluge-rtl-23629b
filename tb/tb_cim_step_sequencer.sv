// tb_cim_step_sequencer -- checks the step order 1,2,3,4 (pch+cm, rl, rm,
// cmp), one strobe per cycle, a period of four cycles per bitplane, and the
// return to step 1 when run falls.
module tb_cim_step_sequencer;
  logic clk = 0, rst_n = 0, run = 0;
  logic [1:0] step;
  logic pch, cm, rl, rm, cmp, plane_end;
  int checks = 0, failures = 0;
  cim_step_sequencer dut (.*);
  always #5 clk = ~clk;
  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic chk(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s at %0t", msg, $time); end
  endtask
  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    chk({pch, rl, rm, cmp} == 4'b0000, "idle strobes");
    run = 1;
    for (int p = 0; p < 5; p++) begin
      #1; chk(pch && cm && !rl && !rm && !cmp, "step1");
      @(negedge clk); chk(!pch && !cm && rl && !rm && !cmp, "step2");
      @(negedge clk); chk(!pch && !rl && rm && !cmp, "step3");
      @(negedge clk); chk(!pch && !rl && !rm && cmp && plane_end, "step4");
      @(negedge clk);
    end
    @(negedge clk);  // now in step 2 of a plane
    run = 0;
    @(negedge clk);
    chk({pch, rl, rm, cmp} == 4'b0000, "stopped");
    run = 1; #1;
    chk(pch && step == 2'd0, "restart at step 1");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
