// cim_hybrid_network -- hybrid flash + SAR collaborative digitization for
// several product arrays at once.
//
// LANES product arrays (Array-1..3) each compute a multiply-average (MAV).
// LANES further arrays are held in ADC mode and act as capacitive DACs, one
// per comparator. Two analog multiplexers sit in front of each comparator:
// the left one picks which product array's sum line it sees, the right one
// which DAC array's.
//
// Schedule of one conversion round:
//   MAV    all product arrays compute their MAV at the same time.
//   flash  product array k, for k = 1..LANES in turn, is coupled to every
//          comparator and so to all LANES DAC arrays, which are precharged
//          to its flash references: one comparison cycle resolves its two
//          MSBs (references 8/16/24 for 5 bits).
//   SAR    then every product array k is coupled to its own comparator and
//          to the nearest DAC array k, and all of them finish the
//          remaining bits by SAR concurrently.
// Each product array has its own mi_adc_ctrl, run in hybrid mode; the
// network's schedule holds a controller in its precharge phase while
// another one owns the DAC arrays.
//
// Weights are loaded through a scan chain as in cim_adc_network, with a
// frame {array[AW-1:0], row[RW-1:0], data[COLS-1:0]}; arrays 0..LANES-1 are
// the product arrays, LANES..2*LANES-1 the DAC arrays.
//
// Timing: start (with row_sel, il, qref) is taken in idle; one cycle for
// the MAVs to settle; LANES flash cycles one after another, then the SAR
// cycles in parallel, three clk per comparison cycle. With qref 8/16/24 and
// 5 bits: 2 + 3 * (3 + 3) = 20 clk for three codes, against 3 * 14 = 42
// clk for three hybrid conversions one after another. done pulses once
// with all codes valid.
//
// From the paper: the three dot-product arrays, three ADC arrays, three
// comparators with analog multiplexers on both sides, and the order MAV,
// flash of Array-1, -2, -3, then SAR of all three at once, each left array
// with its nearest right array. Own choices: the per-array controllers with
// a hold, the scan frame and the clock-level timing.
module cim_hybrid_network #(
  parameter int unsigned ROWS  = cim_pkg::ARR_ROWS,
  parameter int unsigned COLS  = cim_pkg::ARR_COLS,
  parameter int unsigned BITS  = cim_pkg::ADC_BITS,
  parameter int unsigned LANES = cim_pkg::NUM_LANES
) (
  input  logic                        clk,
  input  logic                        rst_n,
  // weight loading
  input  logic                        scan_en,
  input  logic                        scan_in,
  input  logic                        scan_update,
  output logic                        scan_out,
  // conversion request: one weight row and input bitplane per product array
  input  logic                        start,
  input  logic [$clog2(ROWS)-1:0]     row_sel [LANES],
  input  logic [COLS-1:0]             il      [LANES],
  input  logic [BITS-1:0]             qref    [LANES],
  // result
  output logic                        busy,
  output logic                        done,
  output logic [BITS-1:0]             code    [LANES],
  output logic                        flash_cycle,   // a flash comparison cycle ends
  output logic                        sar_cycle,     // a concurrent SAR cycle ends
  output logic [$clog2(LANES+1)-1:0]  sar_parallel   // SAR conversions in that cycle
);
  localparam int unsigned NARR = 2 * LANES;
  localparam int unsigned AW   = $clog2(NARR);
  localparam int unsigned RW   = $clog2(ROWS);
  localparam int unsigned FW   = AW + RW + COLS;
  localparam int unsigned SW   = $clog2(LANES + 1);

  initial begin
    assert (COLS == (1 << BITS))
      else $error("the DAC needs 2^BITS column lines");
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

  // ---------------- schedule ----------------
  typedef enum logic [1:0] {H_IDLE, H_MAV, H_FLASH, H_SAR} hstate_e;
  hstate_e         hstate;
  logic [SW-1:0]   slot;            // product array owning the DAC arrays
  logic [RW-1:0]   row_q  [LANES];
  logic [COLS-1:0] il_q   [LANES];
  logic [BITS-1:0] qref_q [LANES];
  logic [LANES-1:0] c_done, c_decide, done_seen;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      hstate    <= H_IDLE;
      slot      <= '0;
      done_seen <= '0;
      for (int unsigned k = 0; k < LANES; k++) begin
        row_q[k]  <= '0;
        il_q[k]   <= '0;
        qref_q[k] <= '0;
      end
    end else begin
      unique case (hstate)
        H_IDLE: if (start) begin
          for (int unsigned k = 0; k < LANES; k++) begin
            row_q[k]  <= row_sel[k];
            il_q[k]   <= il[k];
            qref_q[k] <= qref[k];
          end
          slot      <= '0;
          done_seen <= '0;
          hstate    <= H_MAV;
        end
        H_MAV: hstate <= H_FLASH;
        H_FLASH: begin
          // a controller whose flash cycle already resolved its code
          done_seen <= done_seen | c_done;
          if (c_decide[slot]) begin
            if (32'(slot) == LANES - 1) hstate <= H_SAR;
            else                        slot   <= slot + 1'b1;
          end
        end
        H_SAR: begin
          done_seen <= done_seen | c_done;
          if ((done_seen | c_done) == '1) hstate <= H_IDLE;
        end
        default: hstate <= H_IDLE;
      endcase
    end
  end
  assign busy = (hstate != H_IDLE);
  assign done = (hstate == H_SAR) && ((done_seen | c_done) == '1);

  // ---------------- controllers, one per product array ----------------
  logic [BITS:0]    ref_code    [LANES][LANES];   // [controller][lane]
  logic [LANES-1:0] lane_cmp_en [LANES];
  logic [LANES-1:0] c_cmp       [LANES];
  logic [LANES-1:0] cmp;                          // comparator outputs
  logic [LANES-1:0] c_flash, c_sar;

  for (genvar k = 0; k < LANES; k++) begin : g_ctrl
    logic hold;
    // wait for this array's flash slot, and after it for the SAR phase
    assign hold = (hstate == H_FLASH) && (32'(slot) != k);
    // flash: every comparator belongs to the slot's array; SAR: comparator k
    assign c_cmp[k] = (hstate == H_FLASH) ? ((32'(slot) == k) ? cmp : '0)
                                          : {{(LANES-1){1'b0}}, cmp[k]};

    mi_adc_ctrl #(.BITS(BITS), .LANES(LANES)) u_ctrl (
      .clk, .rst_n,
      .start       (hstate == H_MAV),
      .hold,
      .mode        (cim_pkg::ADC_HYBRID),
      .qref        (qref_q),
      .cmp         (c_cmp[k]),
      .ref_code    (ref_code[k]),
      .lane_en     (),
      .lane_cmp_en (lane_cmp_en[k]),
      .busy        (),
      .done        (c_done[k]),
      .code        (code[k]),
      .n_cycles    (),
      .n_cmp       (),
      .flash_cycle (c_flash[k]),
      .sar_cycle   (c_sar[k])
    );
    assign c_decide[k] = c_flash[k] | c_sar[k];
  end

  assign flash_cycle  = (hstate == H_FLASH) && c_decide[slot];
  assign sar_cycle    = (hstate == H_SAR) && (c_sar != '0);
  assign sar_parallel = sar_cycle ? SW'($countones(c_sar)) : '0;

  // ---------------- arrays ----------------
  real v_mav [LANES];   // product arrays' sum lines
  real v_dac [LANES];   // DAC arrays' sum lines

  for (genvar k = 0; k < LANES; k++) begin : g_prod
    cim_array #(.ROWS(ROWS), .COLS(COLS)) u_array (
      .clk,
      .we       (scan_update && w_arr == AW'(k)),
      .waddr    (w_row),
      .wdata    (w_data),
      .adc_mode (1'b0),
      .row_sel  (row_q[k]),
      .il       (il_q[k]),
      .ref_code ('0),
      .v_out    (v_mav[k])
    );
  end

  for (genvar j = 0; j < LANES; j++) begin : g_dac
    logic [BITS:0] ref_j;
    // precharge pattern: the flash slot's controller drives every DAC
    // array; in SAR each controller drives its nearest DAC array
    assign ref_j = (hstate == H_FLASH) ? ref_code[slot][j] : ref_code[j][0];

    cim_array #(.ROWS(ROWS), .COLS(COLS)) u_array (
      .clk,
      .we       (scan_update && w_arr == AW'(LANES + j)),
      .waddr    (w_row),
      .wdata    (w_data),
      .adc_mode (1'b1),
      .row_sel  ('0),
      .il       ('0),
      .ref_code (ref_j),
      .v_out    (v_dac[j])
    );
  end

  // ---------------- analog multiplexers and comparators ----------------
  for (genvar j = 0; j < LANES; j++) begin : g_cmp
    real   v_left;
    logic  en;
    assign v_left = (hstate == H_FLASH) ? v_mav[slot] : v_mav[j];
    assign en     = (hstate == H_FLASH) ? lane_cmp_en[slot][j] : lane_cmp_en[j][0];

    clocked_comparator u_cmp (
      .clk, .rst_n,
      .en,
      .v_in  (v_left),
      .v_ref (v_dac[j]),
      .q     (cmp[j])
    );
  end

endmodule
