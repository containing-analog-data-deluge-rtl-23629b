// fdcim_top -- frequency-domain compute-in-memory accelerator with
// memory-immersed collaborative digitization.
//
// Three subsystems share the clock and reset:
//   * u_wht: the ADC/DAC-free frequency-domain layer (bwht_layer around
//     wht_engine). A multi-bit input vector is applied bitplane by bitplane
//     to an analog Walsh-transform crossbar whose rows answer with one bit
//     each; the bits are concatenated into multi-bit outputs,
//     soft-thresholded, and the bitplane loop stops early once every output
//     is known to be zero. With wht_two_pass the result is transformed back
//     through the same crossbar, completing a layer F0(S_T(F0(x))).
//   * u_adc: the collaborative ADC network (cim_adc_network). Four
//     compute-in-SRAM arrays compute multiply-averages and digitise each
//     other's results, the arrays' column lines serving as capacitive DACs,
//     in SAR, flash, hybrid or asymmetric-search mode; after a hybrid flash
//     cycle the two freed arrays can run a second, paired SAR conversion.
//   * u_hyb: the hybrid flash + SAR network (cim_hybrid_network). Three
//     product arrays flash-convert their two MSBs one after another against
//     three shared DAC arrays, then finish by SAR concurrently, each with
//     its nearest DAC array.
// The paper presents the transform and the digitization as separate
// techniques (the first studied in simulation, the second on a 65 nm test
// chip, the hybrid network as a further networking scheme); this top simply
// places them side by side with independent ports. All ports are those of
// the subsystems, prefixed wht_, adc_ and hyb_.
module fdcim_top #(
  parameter int unsigned N          = cim_pkg::WHT_N,
  parameter int unsigned B          = cim_pkg::WHT_BITS,
  parameter int unsigned NUM_ARRAYS = cim_pkg::NUM_ARRAYS,
  parameter int unsigned ROWS       = cim_pkg::ARR_ROWS,
  parameter int unsigned COLS       = cim_pkg::ARR_COLS,
  parameter int unsigned ADC_BITS   = cim_pkg::ADC_BITS,
  parameter int unsigned LANES      = cim_pkg::NUM_LANES
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // frequency-domain layer
  input  logic                          wht_start,
  input  logic                          wht_two_pass,
  input  logic                          wht_et_en,
  input  logic [N-1:0]                  wht_in_sign,
  input  logic [B-1:0]                  wht_in_mag [N],
  input  logic [B-1:0]                  wht_thr    [N],
  output logic                          wht_busy,
  output logic                          wht_done,
  output logic signed [B:0]             wht_y      [N],
  output logic [$clog2(B+1)-1:0]        wht_planes_used,
  output logic [N-1:0]                  wht_early_term,
  // collaborative ADC network
  input  logic                          adc_scan_en,
  input  logic                          adc_scan_in,
  input  logic                          adc_scan_update,
  output logic                          adc_scan_out,
  input  logic                          adc_start,
  input  logic [$clog2(NUM_ARRAYS)-1:0] adc_src,
  input  logic [$clog2(ROWS)-1:0]       adc_row_sel,
  input  logic [COLS-1:0]               adc_il,
  input  cim_pkg::adc_mode_e            adc_mode,
  input  logic [ADC_BITS-1:0]           adc_qref [LANES],
  output logic                          adc_busy,
  output logic                          adc_done,
  output logic [ADC_BITS-1:0]           adc_code,
  output logic [3:0]                    adc_n_cycles,
  output logic [5:0]                    adc_n_cmp,
  output logic                          adc_flash_cycle,
  output logic                          adc_sar_cycle,
  input  logic                          adc_pair_en,
  input  logic [$clog2(ROWS)-1:0]       adc_row_sel2,
  input  logic [COLS-1:0]               adc_il2,
  output logic                          adc_done2,
  output logic [ADC_BITS-1:0]           adc_code2,
  // hybrid flash + SAR network
  input  logic                          hyb_scan_en,
  input  logic                          hyb_scan_in,
  input  logic                          hyb_scan_update,
  output logic                          hyb_scan_out,
  input  logic                          hyb_start,
  input  logic [$clog2(ROWS)-1:0]       hyb_row_sel [LANES],
  input  logic [COLS-1:0]               hyb_il      [LANES],
  input  logic [ADC_BITS-1:0]           hyb_qref    [LANES],
  output logic                          hyb_busy,
  output logic                          hyb_done,
  output logic [ADC_BITS-1:0]           hyb_code    [LANES],
  output logic                          hyb_flash_cycle,
  output logic                          hyb_sar_cycle,
  output logic [$clog2(LANES+1)-1:0]    hyb_sar_parallel
);
  bwht_layer #(.N(N), .B(B)) u_wht (
    .clk, .rst_n,
    .start       (wht_start),
    .two_pass    (wht_two_pass),
    .et_en       (wht_et_en),
    .in_sign     (wht_in_sign),
    .in_mag      (wht_in_mag),
    .thr         (wht_thr),
    .busy        (wht_busy),
    .done        (wht_done),
    .y           (wht_y),
    .planes_used (wht_planes_used),
    .early_term  (wht_early_term)
  );

  cim_adc_network #(
    .NUM_ARRAYS(NUM_ARRAYS), .ROWS(ROWS), .COLS(COLS), .BITS(ADC_BITS), .LANES(LANES)
  ) u_adc (
    .clk, .rst_n,
    .scan_en     (adc_scan_en),
    .scan_in     (adc_scan_in),
    .scan_update (adc_scan_update),
    .scan_out    (adc_scan_out),
    .start       (adc_start),
    .src         (adc_src),
    .row_sel     (adc_row_sel),
    .il          (adc_il),
    .mode        (adc_mode),
    .qref        (adc_qref),
    .busy        (adc_busy),
    .done        (adc_done),
    .code        (adc_code),
    .n_cycles    (adc_n_cycles),
    .n_cmp       (adc_n_cmp),
    .flash_cycle (adc_flash_cycle),
    .sar_cycle   (adc_sar_cycle),
    .pair_en     (adc_pair_en),
    .row_sel2    (adc_row_sel2),
    .il2         (adc_il2),
    .done2       (adc_done2),
    .code2       (adc_code2)
  );

  cim_hybrid_network #(
    .ROWS(ROWS), .COLS(COLS), .BITS(ADC_BITS), .LANES(LANES)
  ) u_hyb (
    .clk, .rst_n,
    .scan_en      (hyb_scan_en),
    .scan_in      (hyb_scan_in),
    .scan_update  (hyb_scan_update),
    .scan_out     (hyb_scan_out),
    .start        (hyb_start),
    .row_sel      (hyb_row_sel),
    .il           (hyb_il),
    .qref         (hyb_qref),
    .busy         (hyb_busy),
    .done         (hyb_done),
    .code         (hyb_code),
    .flash_cycle  (hyb_flash_cycle),
    .sar_cycle    (hyb_sar_cycle),
    .sar_parallel (hyb_sar_parallel)
  );
endmodule
