// tb_cim_pkg -- checks cim_pkg::walsh_neg against the Walsh matrix built by
// Hadamard recursion and sign-change ordering (tb_ref_pkg), for sizes 2..64.
// Also checks that the rows are mutually orthogonal.
module tb_cim_pkg;
  int checks = 0, failures = 0;
  initial begin
    for (int k = 1; k <= 6; k++) begin
      int n;
      n = 1 << k;
      for (int r = 0; r < n; r++)
        for (int c = 0; c < n; c++) begin
          int ref_v, dut_v;
          ref_v = tb_ref_pkg::walsh_ref(k, r, c);
          dut_v = cim_pkg::walsh_neg(k, r, c) ? -1 : 1;
          checks++;
          if (ref_v != dut_v) begin
            failures++;
            if (failures < 10) $display("FAIL k=%0d r=%0d c=%0d ref=%0d dut=%0d", k, r, c, ref_v, dut_v);
          end
        end
      for (int r1 = 0; r1 < n; r1++)
        for (int r2 = r1 + 1; r2 < n; r2++) begin
          int dot;
          dot = 0;
          for (int c = 0; c < n; c++)
            dot += (cim_pkg::walsh_neg(k, r1, c) ? -1 : 1) * (cim_pkg::walsh_neg(k, r2, c) ? -1 : 1);
          checks++;
          if (dot != 0) failures++;
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
