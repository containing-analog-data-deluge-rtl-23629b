// cim_array -- behavioural model of one 8T compute-in-SRAM array
// (ROWS x COLS) that can act either as a scalar-product array or as the
// capacitive DAC of a neighbouring array's memory-immersed ADC.
//
// This is a model of an analog/mixed-signal macro: the voltages are `real`
// values and the timing is one clk cycle per phase. Only the weight storage
// is ordinary logic.
//
// Storage: ROWS x COLS weight bits, written one row at a time through the
// write port (6T part of the 8T cell).
//
// Product mode (adc_mode = 0): the weight row selected by row_sel is read
// through the two-transistor product ports. Every column line CL_j starts
// precharged to VDD and discharges when both the weight bit and the input
// line IL_j are 1. The sum-line switches then average all column lines, so
//     v_out = VDD * (1 - popcount(w[row_sel] & il) / COLS),
// the multiply-average (MAV). With random inputs and weights a quarter of
// the products are 1 and the MAV sits near 0.75*VDD.
//
// ADC mode (adc_mode = 1): the column lines are the unit capacitors of a
// capacitive DAC. The precharge array charges ref_code of the COLS column
// lines to VDD and the rest to ground; merging them on the sum line gives
//     v_out = VDD * ref_code / COLS.
//
// v_out is registered: it follows the inputs one clk cycle later (precharge
// in one cycle, charge sharing settled by the next).
//
// From the paper: 8T cells, product on the column lines, averaging on the
// sum line, column lines as capacitive-DAC unit capacitors charged by a
// precharge array. Own choices: the ideal (loss-free) charge sharing, the
// thermometer precharge pattern and the one-cycle settling.
module cim_array #(
  parameter int unsigned ROWS = cim_pkg::ARR_ROWS,
  parameter int unsigned COLS = cim_pkg::ARR_COLS,
  parameter real         VDD  = 1.0
) (
  input  logic                      clk,
  // weight write port
  input  logic                      we,
  input  logic [$clog2(ROWS)-1:0]   waddr,
  input  logic [COLS-1:0]           wdata,
  // operation
  input  logic                      adc_mode,
  input  logic [$clog2(ROWS)-1:0]   row_sel,
  input  logic [COLS-1:0]           il,
  input  logic [$clog2(COLS+1)-1:0] ref_code,
  output real                       v_out
);
  logic [COLS-1:0] w [ROWS];

  always_ff @(posedge clk) begin
    if (we) w[waddr] <= wdata;
  end

  initial v_out = VDD;

  always @(posedge clk) begin
    if (adc_mode)
      v_out <= VDD * real'(ref_code) / real'(COLS);
    else
      v_out <= VDD * (1.0 - real'($countones(w[row_sel] & il)) / real'(COLS));
  end
endmodule
