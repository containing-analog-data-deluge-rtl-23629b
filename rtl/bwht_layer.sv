// bwht_layer -- one frequency-domain layer x_out = F0(S_T(F0(x_in))) on a
// single Walsh crossbar.
//
// The layer transforms the input to the frequency domain, soft-thresholds
// it there with the trained per-row thresholds T, and transforms the result
// back. The sequency-ordered Walsh matrix is symmetric and, up to a factor
// N, its own inverse, so the inverse transform is a second pass through the
// same crossbar. Both passes are the approximate, one-bit-per-bitplane
// transform F0 of wht_engine.
//
//   pass 1  input (in_sign, in_mag), thresholds thr, early termination as
//           et_en says: y1 = S_T(F0(x_in)), 0 for rows that stopped early.
//   pass 2  input sign(y1), |y1| (|y1| <= 2^B - 1 fits the B-bit
//           magnitude), threshold 0, no early termination: y = F0(y1).
// With two_pass = 0 only pass 1 runs and y = y1 (the bare transform step).
// y is odd in [-(2^B-1), 2^B-1] after pass 2, so sign(y), |y| is again a
// B-bit sign-magnitude vector: the next layer can take it as its input.
//
// Interface: start (one cycle, while idle) with the inputs; the engine
// latches them, so they need not be held. done pulses for one cycle with y
// valid; y holds until the next start. planes_used and early_term report
// pass 1, where early termination acts. Pass 2 starts in the cycle pass 1
// reports done, so a two-pass layer takes 4*B + 4 cycles more than pass 1
// alone: 4*P1 + 3 + 4*B + 4 cycles from start to done for P1 planes in
// pass 1 (wht_engine: 4*P + 3).
//
// From the paper: the layer sequence F0(S_T(F0(x))) and the thresholding
// between the two transforms. Own choices: reusing one crossbar for both
// passes, the sign-magnitude hand-over, threshold 0 and no early
// termination in pass 2.
module bwht_layer #(
  parameter int unsigned N = cim_pkg::WHT_N,
  parameter int unsigned B = cim_pkg::WHT_BITS
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    start,
  input  logic                    two_pass,
  input  logic                    et_en,
  input  logic [N-1:0]            in_sign,
  input  logic [B-1:0]            in_mag [N],
  input  logic [B-1:0]            thr    [N],
  output logic                    busy,
  output logic                    done,
  output logic signed [B:0]       y      [N],
  output logic [$clog2(B+1)-1:0]  planes_used,
  output logic [N-1:0]            early_term
);
  localparam int unsigned PW = $clog2(B+1);

  typedef enum logic [1:0] {L_IDLE, L_PASS1, L_PASS2} lstate_e;
  lstate_e       lstate;
  logic          two_pass_q;
  logic [PW-1:0] planes_q;     // pass-1 figures, kept over pass 2
  logic [N-1:0]  term_q;

  logic                  e_start, e_et, e_busy, e_done;
  logic [N-1:0]          e_sign, e_term;
  logic [B-1:0]          e_mag [N];
  logic [B-1:0]          e_thr [N];
  logic [PW-1:0]         e_planes;
  logic                  second;   // pass 2 starts this cycle

  assign second  = (lstate == L_PASS1) && e_done && two_pass_q;
  assign e_start = ((lstate == L_IDLE) && start) || second;

  // Engine inputs: the layer input for pass 1, the engine's own pass-1
  // output (held in y) for pass 2. The engine latches them at e_start.
  always_comb begin
    for (int unsigned r = 0; r < N; r++) begin
      if (second) begin
        e_sign[r] = y[r][B];
        e_mag[r]  = y[r][B] ? B'(-y[r]) : B'(y[r]);
        e_thr[r]  = '0;
      end else begin
        e_sign[r] = in_sign[r];
        e_mag[r]  = in_mag[r];
        e_thr[r]  = thr[r];
      end
    end
    e_et = second ? 1'b0 : et_en;
  end

  wht_engine #(.N(N), .B(B)) u_eng (
    .clk, .rst_n,
    .start       (e_start),
    .et_en       (e_et),
    .in_sign     (e_sign),
    .in_mag      (e_mag),
    .thr         (e_thr),
    .busy        (e_busy),
    .done        (e_done),
    .y,
    .planes_used (e_planes),
    .early_term  (e_term)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      lstate      <= L_IDLE;
      two_pass_q  <= 1'b0;
      planes_q    <= '0;
      term_q      <= '0;
    end else begin
      unique case (lstate)
        L_IDLE: if (start) begin
          two_pass_q <= two_pass;
          lstate     <= L_PASS1;
        end
        L_PASS1: if (e_done) begin
          planes_q    <= e_planes;
          term_q      <= e_term;
          lstate      <= two_pass_q ? L_PASS2 : L_IDLE;
        end
        L_PASS2: if (e_done) lstate <= L_IDLE;
        default: lstate <= L_IDLE;
      endcase
    end
  end

  assign done = e_done && ((lstate == L_PASS2) || (lstate == L_PASS1 && !two_pass_q));
  assign busy        = (lstate != L_IDLE) || e_busy;
  assign planes_used = two_pass_q ? planes_q : e_planes;
  assign early_term  = two_pass_q ? term_q   : e_term;

endmodule
