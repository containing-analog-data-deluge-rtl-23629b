// cim_adc_network -- a network of compute-in-SRAM arrays that digitise each
// other's multiply-average (MAV) without a dedicated ADC.
//
// NUM_ARRAYS arrays (A1..A4 on the test chip) sit on a ring. For one
// conversion the array selected by src computes the MAV of weight row
// row_sel with the input bitplane il; the next LANES arrays along the ring
// (src+1, src+2, ...) are switched to ADC mode and serve as capacitive DACs
// for the LANES comparators, through the analog multiplexers that connect
// the product array's sum line to every comparator's input and each DAC
// array's sum line to the comparator of its lane. Lane 0 is the nearest
// neighbour, the one used for SAR cycles. Changing src between conversions
// swaps the roles of neighbours (A1 computes while A2 digitises, then A2
// computes while A1 digitises). mi_adc_ctrl chooses the references.
//
// Weights are loaded through a scan chain: shift a frame
// {array[1:0], row[3:0], data[COLS-1:0]} (first bit = array MSB) with
// scan_en, then pulse scan_update to write the row. Widths follow the
// default sizes; the frame is AW + RW + COLS bits.
//
// Conversion timing: start (with src, row_sel, il, mode, qref) in idle;
// one cycle for the MAV to settle, then the controller's comparison cycles
// (three clk each); done pulses with code, n_cycles, n_cmp.
//
// Paired SAR: in hybrid mode only lane 0 is needed after the flash cycle, so
// the arrays of the last two lanes are free. With pair_en set at start, the
// first of them (src+2 on the test chip) then computes a second MAV from
// row_sel2 / il2 and the second (src+3) digitises it by SAR through the
// last lane's comparator, with its own controller, while the first
// conversion finishes its SAR cycles. done2 pulses with code2; it comes
// 2 + 3 + 1 + 3*BITS cycles after start (flash cycle, MAV, SAR), after done.
// busy stays high until both have finished.
//
// From the paper: four 16x32 arrays, 5-bit conversion, one product array
// coupled to three reference arrays for flash and to its neighbour for SAR,
// role switching between neighbours, scan chain pins, the freed arrays
// pairing up for SAR after the flash cycle. Own choices: the ring order of
// the lanes, which freed arrays pair up, the scan frame, the control timing.
module cim_adc_network #(
  parameter int unsigned NUM_ARRAYS = cim_pkg::NUM_ARRAYS,
  parameter int unsigned ROWS       = cim_pkg::ARR_ROWS,
  parameter int unsigned COLS       = cim_pkg::ARR_COLS,
  parameter int unsigned BITS       = cim_pkg::ADC_BITS,
  parameter int unsigned LANES      = cim_pkg::NUM_LANES
) (
  input  logic                      clk,
  input  logic                      rst_n,
  // weight loading
  input  logic                      scan_en,
  input  logic                      scan_in,
  input  logic                      scan_update,
  output logic                      scan_out,
  // conversion request
  input  logic                      start,
  input  logic [$clog2(NUM_ARRAYS)-1:0] src,
  input  logic [$clog2(ROWS)-1:0]   row_sel,
  input  logic [COLS-1:0]           il,
  input  cim_pkg::adc_mode_e        mode,
  input  logic [BITS-1:0]           qref [LANES],
  input  logic                      pair_en,    // hybrid: paired SAR on the freed arrays
  input  logic [$clog2(ROWS)-1:0]   row_sel2,
  input  logic [COLS-1:0]           il2,
  // result
  output logic                      busy,
  output logic                      done,
  output logic [BITS-1:0]           code,
  output logic [3:0]                n_cycles,
  output logic [5:0]                n_cmp,
  output logic                      flash_cycle,
  output logic                      sar_cycle,
  output logic                      done2,
  output logic [BITS-1:0]           code2
);
  localparam int unsigned AW = $clog2(NUM_ARRAYS);
  localparam int unsigned RW = $clog2(ROWS);
  localparam int unsigned FW = AW + RW + COLS;

  initial begin
    assert (COLS == (1 << BITS))
      else $error("the DAC needs 2^BITS column lines");
    assert (LANES < NUM_ARRAYS)
      else $error("LANES reference arrays need LANES+1 arrays");
  end

  // ---------------- weight loading ----------------
  logic [FW-1:0] frame;
  scan_chain #(.W(FW)) u_scan (
    .clk, .rst_n, .scan_en, .scan_in, .scan_out, .q(frame)
  );
  logic [AW-1:0]   w_arr;
  logic [RW-1:0]   w_row;
  logic [COLS-1:0] w_data;
  assign {w_arr, w_row, w_data} = frame;

  // ---------------- conversion sequencing ----------------
  typedef enum logic [1:0] {N_IDLE, N_MAV, N_CONV} nstate_e;
  typedef enum logic [1:0] {P_OFF, P_WAIT, P_MAV, P_CONV} pstate_e;
  nstate_e nstate;
  pstate_e pstate;
  logic [RW-1:0]   row2_q;
  logic [COLS-1:0] il2_q;
  logic            ctrl2_done, ctrl_decide;
  logic [AW-1:0]   src_q;
  logic [RW-1:0]   row_q;
  logic [COLS-1:0] il_q;
  cim_pkg::adc_mode_e mode_q;
  logic [BITS-1:0] qref_q [LANES];
  logic            ctrl_start, ctrl_done;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      nstate <= N_IDLE;
      src_q  <= '0;
      row_q  <= '0;
      il_q   <= '0;
      mode_q <= cim_pkg::ADC_SAR;
      for (int unsigned j = 0; j < LANES; j++) qref_q[j] <= '0;
      pstate <= P_OFF;
      row2_q <= '0;
      il2_q  <= '0;
    end else begin
      unique case (pstate)
        P_WAIT:  if (ctrl_decide) pstate <= P_MAV;   // flash cycle over
        P_MAV:   pstate <= P_CONV;
        P_CONV:  if (ctrl2_done) pstate <= P_OFF;
        default: pstate <= P_OFF;
      endcase
      unique case (nstate)
        N_IDLE: if (start && pstate == P_OFF) begin
          if (pair_en && mode == cim_pkg::ADC_HYBRID && LANES >= 3) pstate <= P_WAIT;
          row2_q <= row_sel2;
          il2_q  <= il2;
          src_q  <= src;
          row_q  <= row_sel;
          il_q   <= il;
          mode_q <= mode;
          for (int unsigned j = 0; j < LANES; j++) qref_q[j] <= qref[j];
          nstate <= N_MAV;
        end
        N_MAV:  nstate <= N_CONV;
        N_CONV: if (ctrl_done) nstate <= N_IDLE;
        default: nstate <= N_IDLE;
      endcase
    end
  end
  assign ctrl_start = (nstate == N_MAV);
  assign busy       = (nstate != N_IDLE) || (pstate != P_OFF);
  assign done       = ctrl_done;

  // ---------------- controller ----------------
  logic [BITS:0]    ref_code [LANES];
  logic [LANES-1:0] lane_cmp_en, cmp;

  mi_adc_ctrl #(.BITS(BITS), .LANES(LANES)) u_ctrl (
    .clk, .rst_n,
    .start (ctrl_start),
    .hold  (1'b0),
    .mode  (mode_q),
    .qref  (qref_q),
    .cmp,
    .ref_code, .lane_en (), .lane_cmp_en,
    .busy  (),
    .done  (ctrl_done),
    .code, .n_cycles, .n_cmp, .flash_cycle, .sar_cycle
  );
  assign ctrl_decide = flash_cycle | sar_cycle;

  // controller of the paired SAR conversion (one lane, SAR only)
  logic [BITS:0]   ref2 [1];
  logic [BITS-1:0] qref2 [1];
  logic            cmp2_en;
  logic            pair_on;     // the freed arrays work as a pair
  assign qref2[0] = '0;
  assign pair_on  = (pstate == P_MAV) || (pstate == P_CONV);

  mi_adc_ctrl #(.BITS(BITS), .LANES(1)) u_ctrl2 (
    .clk, .rst_n,
    .start       (pstate == P_MAV),
    .hold        (1'b0),
    .mode        (cim_pkg::ADC_SAR),
    .qref        (qref2),
    .cmp         (cmp[LANES-1]),
    .ref_code    (ref2),
    .lane_en     (),
    .lane_cmp_en (cmp2_en),
    .busy        (),
    .done        (ctrl2_done),
    .code        (code2),
    .n_cycles    (),
    .n_cmp       (),
    .flash_cycle (),
    .sar_cycle   ()
  );
  assign done2 = ctrl2_done;

  // ---------------- arrays ----------------
  real v_sl [NUM_ARRAYS];

  for (genvar a = 0; a < NUM_ARRAYS; a++) begin : g_arr
    // lane served by this array when it is in ADC mode
    logic [AW-1:0] lane_of;
    logic          is_src, is_prod2, is_dac2;
    assign lane_of  = AW'(a) - src_q - 1'b1;
    assign is_src   = (AW'(a) == src_q);
    assign is_prod2 = pair_on && 32'(lane_of) == LANES - 2;
    assign is_dac2  = pair_on && 32'(lane_of) == LANES - 1;

    cim_array #(.ROWS(ROWS), .COLS(COLS)) u_array (
      .clk,
      .we       (scan_update && w_arr == AW'(a)),
      .waddr    (w_row),
      .wdata    (w_data),
      .adc_mode (!is_src && !is_prod2),
      .row_sel  (is_prod2 ? row2_q : row_q),
      .il       (is_src ? il_q : is_prod2 ? il2_q : '0),
      .ref_code (is_dac2 ? ref2[0] :
                 (!is_src && 32'(lane_of) < LANES) ? ref_code[lane_of] : '0),
      .v_out    (v_sl[a])
    );
  end

  // ---------------- analog multiplexers and comparators ----------------
  for (genvar j = 0; j < LANES; j++) begin : g_lane
    real  v_mav, v_ref;
    logic en;
    // the last lane's comparator serves the paired conversion when it runs
    if (j == LANES - 1) begin : g_pair
      assign v_mav = pair_on ? v_sl[AW'(src_q + AW'(j))] : v_sl[src_q];
      assign en    = pair_on ? cmp2_en : lane_cmp_en[j];
    end else begin : g_single
      assign v_mav = v_sl[src_q];
      assign en    = lane_cmp_en[j];
    end
    assign v_ref = v_sl[AW'(src_q + AW'(j) + 1'b1)];

    clocked_comparator u_cmp (
      .clk, .rst_n,
      .en,
      .v_in  (v_mav),
      .v_ref (v_ref),
      .q     (cmp[j])
    );
  end

endmodule
