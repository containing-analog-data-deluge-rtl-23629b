// wht_engine -- one frequency-domain layer step: ADC/DAC-free bitplane-wise
// Walsh transform of a multi-bit input vector, followed by soft thresholding,
// with early termination.
//
// Flow. start loads the N-element sign-magnitude input vector and the
// per-row thresholds T. The input registers then feed one bitplane after
// another, MSB first, to the Walsh crossbar; each bitplane takes the four
// crossbar steps (four clk cycles here, two cycles of the paper's 4 GHz
// clock, see cim_step_sequencer). The crossbar returns one bit per row,
// which the accumulator adds with the bitplane's weight. The bitplanes are
// issued back to back: the result of plane k is accumulated in the first
// step of plane k+1. When et_en is set and every row is already known to end
// inside [-T, T], the remaining bitplanes are skipped. Finally
// y[r] = S_T(x[r]), and 0 for rows that terminated early.
//
// Interface: start (one cycle, while idle), done (one cycle with y valid;
// y stays valid until the next start), busy. planes_used is the number of
// bitplanes actually processed (B without early termination), the
// "workload" of the early-termination study.
//
// Latency: from start, 1 load cycle, 4 cycles per processed bitplane, then
// one cycle to accumulate the last plane and one to register y: 4*P + 3
// cycles to done for P planes.
module wht_engine #(
  parameter int unsigned N = cim_pkg::WHT_N,
  parameter int unsigned B = cim_pkg::WHT_BITS
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    start,
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

  typedef enum logic [2:0] {S_IDLE, S_LOAD, S_RUN, S_LAST, S_OUT} state_e;
  state_e state;

  logic [B-1:0] thr_q [N];
  logic         run;
  logic         pch, cm, rl, rm, cmp, plane_end;
  logic [N-1:0] plane_bit, plane_sign, xbar_out;
  logic [PW-1:0] plane_idx;
  logic         acc_valid, acc_clear, all_term_next;
  logic [PW-1:0] acc_idx;
  logic signed [B:0] x   [N];
  logic signed [B:0] y_st [N];
  logic         stop_early;

  assign run = (state == S_RUN) && !stop_early;

  cim_step_sequencer u_seq (
    .clk, .rst_n, .run, .step (), .pch, .cm, .rl, .rm, .cmp, .plane_end
  );

  bitplane_input_regs #(.N(N), .B(B)) u_in (
    .clk, .rst_n,
    .load      (state == S_IDLE && start),
    .shift     (pch),
    .in_sign, .in_mag,
    .plane_bit, .plane_sign, .plane_idx
  );

  walsh_crossbar #(.N(N)) u_xbar (
    .clk, .pch, .cm, .rl, .rm, .cmp,
    .in_bit  (plane_bit),
    .in_sign (plane_sign),
    .out_bit (xbar_out)
  );

  bitplane_accumulator #(.N(N), .B(B)) u_acc (
    .clk, .rst_n,
    .clear     (acc_clear),
    .valid     (acc_valid),
    .plane_idx (acc_idx),
    .bits      (xbar_out),
    .thr       (thr_q),
    .x,
    .term      (early_term),
    .all_term_next
  );

  for (genvar r = 0; r < N; r++) begin : g_st
    soft_threshold #(.W(B+1)) u_st (.x(x[r]), .thr(thr_q[r]), .y(y_st[r]));
  end

  assign acc_clear  = (state == S_IDLE) && start;
  assign stop_early = et_en && acc_valid && all_term_next;

  // acc_valid: the crossbar result of the previous plane is ready this cycle.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state       <= S_IDLE;
      acc_valid   <= 1'b0;
      acc_idx     <= '0;
      planes_used <= '0;
      done        <= 1'b0;
      for (int unsigned r = 0; r < N; r++) begin
        thr_q[r] <= '0;
        y[r]     <= '0;
      end
    end else begin
      done      <= 1'b0;
      acc_valid <= plane_end && !stop_early;
      if (plane_end && !stop_early) acc_idx <= PW'(plane_idx - 1'b1);
      if (acc_valid) planes_used <= planes_used + 1'b1;
      unique case (state)
        S_IDLE: if (start) begin
          for (int unsigned r = 0; r < N; r++) thr_q[r] <= thr[r];
          planes_used <= '0;
          state       <= S_LOAD;
        end
        S_LOAD: state <= S_RUN;
        S_RUN: begin
          if (stop_early)                           state <= S_OUT;
          else if (plane_end && plane_idx == PW'(B)) state <= S_LAST;
        end
        S_LAST: state <= S_OUT;   // last plane accumulates here
        S_OUT: begin
          for (int unsigned r = 0; r < N; r++)
            y[r] <= early_term[r] ? '0 : y_st[r];
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy = (state != S_IDLE);

endmodule
