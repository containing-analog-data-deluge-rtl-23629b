// cim_pkg -- shared constants, types and functions of the frequency-domain
// compute-in-memory design.
//
// Contents:
//   * walsh_neg(): sign of an entry of the sequency-ordered Walsh matrix. The
//     Hadamard matrix H_k is built by the usual recursion
//     H_k = [[H_{k-1}, H_{k-1}], [H_{k-1}, -H_{k-1}]], so H[i][c] is -1 exactly
//     when popcount(i & c) is odd. The Walsh matrix is H with its rows
//     reordered by increasing number of sign changes; row r of it is Hadamard
//     row bitreverse(gray(r)). The reordering rule is the standard one; the
//     text only says that rows are "rearranged to increase the sign change
//     order".
//   * adc_mode_e: the digitisation modes of the memory-immersed ADC
//     (successive approximation, flash, hybrid flash + SAR, asymmetric search).
//   * Default sizes that several modules share.
package cim_pkg;

  // Walsh-transform crossbar (one BWHT block) and bitplane precision.
  localparam int unsigned WHT_N    = 32;  // 32x32 crossbar, the size used in the circuit study
  localparam int unsigned WHT_BITS = 8;   // input magnitude bits (bitplanes), own choice

  // Memory-immersed ADC network (test chip: four 16x32 arrays, 5-bit ADC).
  localparam int unsigned ARR_ROWS  = 16;
  localparam int unsigned ARR_COLS  = 32;
  localparam int unsigned ADC_BITS  = 5;
  localparam int unsigned NUM_ARRAYS = 4;  // A1..A4
  localparam int unsigned NUM_LANES  = 3;  // reference arrays / comparators per conversion

  typedef enum logic [1:0] {
    ADC_SAR    = 2'd0,  // one reference per cycle, binary search
    ADC_FLASH  = 2'd1,  // three references per cycle, every cycle
    ADC_HYBRID = 2'd2,  // first cycle flash (programmable references), then SAR
    ADC_ASYM   = 2'd3   // asymmetric binary search: Q2 first, then Q1 or Q3, then SAR
  } adc_mode_e;

  // 1 when entry (r, c) of the 2^k x 2^k sequency-ordered Walsh matrix is -1.
  function automatic logic walsh_neg(input int unsigned k, input int unsigned r,
                                     input int unsigned c);
    logic [31:0] g, h, rr, cc;
    rr = 32'(r);
    cc = 32'(c);
    g  = rr ^ (rr >> 1);
    h  = '0;
    for (int unsigned i = 0; i < k; i++) begin
      h[k-1-i] = g[i];
    end
    return ^(h & cc);
  endfunction

endpackage
