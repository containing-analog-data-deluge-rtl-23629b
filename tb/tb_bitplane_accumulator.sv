// tb_bitplane_accumulator -- feeds random row bits for B bitplanes, MSB
// first, and checks the concatenated value, the early-termination flags and
// all_term_next against a reference that tracks the exact partial sums.
// A row that terminates must keep its value; a row's flag may only rise
// when the remaining planes cannot take it outside [-T, T].
module tb_bitplane_accumulator;
  localparam int N = 16, B = 6;
  logic clk = 0, rst_n = 0, clear = 0, valid = 0;
  logic [2:0] plane_idx;
  logic [N-1:0] bits, term;
  logic [B-1:0] thr [N];
  logic signed [B:0] x [N];
  logic all_term_next;
  int checks = 0, failures = 0, n_term = 0, n_all = 0;
  bitplane_accumulator #(.N(N), .B(B)) dut (.*);
  always #5 clk = ~clk;
  initial begin
    #500000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    int ref_x [N];
    bit ref_t [N];
    repeat (2) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 200; t++) begin
      for (int r = 0; r < N; r++)
        thr[r] = (t % 4 == 0) ? B'(63) : (t % 4 == 1) ? B'($urandom_range(40, 63)) : B'($urandom_range(0, 20));
      @(negedge clk); clear = 1; @(negedge clk); clear = 0;
      for (int r = 0; r < N; r++) begin ref_x[r] = 0; ref_t[r] = 0; end
      for (int k = 0; k < B; k++) begin
        bit all;
        bits = $urandom; plane_idx = 3'(k); valid = 1;
        all = 1;
        for (int r = 0; r < N; r++) begin
          if (!ref_t[r]) begin
            int wgt, rem, mag;
            wgt = 1 << (B - 1 - k);
            rem = wgt - 1;
            ref_x[r] += bits[r] ? wgt : -wgt;
            mag = ref_x[r] < 0 ? -ref_x[r] : ref_x[r];
            if (mag + rem <= int'(thr[r])) ref_t[r] = 1;
          end
          all &= ref_t[r];
        end
        #1; checks++;
        if (all_term_next !== all) failures++;
        if (all) n_all++;
        @(negedge clk); valid = 0;
        for (int r = 0; r < N; r++) begin
          checks += 2;
          if (int'(x[r]) != ref_x[r]) begin
            failures++;
            if (failures < 10) $display("FAIL t=%0d k=%0d r=%0d x=%0d ref=%0d", t, k, r, x[r], ref_x[r]);
          end
          if (term[r] !== ref_t[r]) failures++;
        end
      end
      for (int r = 0; r < N; r++) if (ref_t[r]) n_term++;
    end
    checks++;
    if (n_term == 0 || n_all == 0) begin failures++; $display("no termination exercised"); end
    $display("rows terminated: %0d, all-terminated events: %0d", n_term, n_all);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
