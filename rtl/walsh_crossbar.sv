// walsh_crossbar -- behavioural model of the analog NMOS Walsh-transform
// crossbar (one BWHT block of N x N cells).
//
// In silicon this is an analog array: every cell is a '+1' or '-1' NMOS cell
// fixed by the Walsh matrix, its two local nodes O/OB are charged from the
// column lines CL/CLB, the row-merge switches share those charges on the
// row's sum lines SL/SLB, and a comparator per row decides SL against SLB.
// This model keeps that four-step structure, one register stage per step,
// with charge replaced by counts; it is synthesizable but stands for the
// analog array, not for digital logic that would be built.
//
// Steps (one strobe each, driven by cim_step_sequencer):
//   pch  step 1: precharge and apply the input bitplane to CL/CLB. A column
//                with magnitude bit 1 drives CL when its sign S is 0 and CLB
//                when S is 1; a column with bit 0 drives neither.
//   rl   step 2: every cell computes O/OB locally. A '+1' cell passes
//                CL->O and CLB->OB, a '-1' cell crosses them.
//   rm   step 3: row merge: SL = number of O nodes high in the row,
//                SLB = number of OB nodes high.
//   cmp  step 4: out_bit[r] = (SL > SLB), i.e. the sign of the row's
//                product-sum with the Walsh row: 1 means +1, 0 means -1.
// out_bit is registered at the cmp strobe and valid from the next cycle.
//
// From the paper: the cell types, CL/CLB/O/OB/SL/SLB, the four steps and the
// single-bit SL-versus-SLB decision. Own choices: the use of S_i as the sign
// that steers a set input bit to CL or CLB, and a tie (SL == SLB) giving 0.
module walsh_crossbar #(
  parameter int unsigned N = cim_pkg::WHT_N   // crossbar size, power of two
) (
  input  logic         clk,
  input  logic         pch,          // step 1 strobe: precharge
  input  logic         cm,           // step 1: column merge, input on CL/CLB
  input  logic         rl,           // step 2 strobe
  input  logic         rm,           // step 3 strobe
  input  logic         cmp,          // step 4 strobe
  input  logic [N-1:0] in_bit,       // current magnitude bitplane, one bit per column
  input  logic [N-1:0] in_sign,      // sign of each input element
  output logic [N-1:0] out_bit       // one output bit per row
);
  localparam int unsigned K  = $clog2(N);
  localparam int unsigned CW = $clog2(N + 1);

  logic [N-1:0] cl, clb;                 // column lines
  logic [N-1:0] o_node  [N];             // O of cell (row, col)
  logic [N-1:0] ob_node [N];             // OB of cell (row, col)
  logic [CW-1:0] sl [N], slb [N];        // merged sum lines, as counts

  // Fixed Walsh pattern: 1 marks a '-1' cell.
  logic [N-1:0] neg_cell [N];
  for (genvar r = 0; r < N; r++) begin : g_row
    for (genvar c = 0; c < N; c++) begin : g_col
      localparam logic NEG = cim_pkg::walsh_neg(K, r, c);
      assign neg_cell[r][c] = NEG;
    end
  end

  always_ff @(posedge clk) begin
    if (pch && cm) begin
      cl  <= in_bit & ~in_sign;
      clb <= in_bit &  in_sign;
    end
    if (rl) begin
      for (int unsigned r = 0; r < N; r++) begin
        o_node[r]  <= (cl & ~neg_cell[r]) | (clb &  neg_cell[r]);
        ob_node[r] <= (clb & ~neg_cell[r]) | (cl &  neg_cell[r]);
      end
    end
    if (rm) begin
      for (int unsigned r = 0; r < N; r++) begin
        sl[r]  <= CW'($countones(o_node[r]));
        slb[r] <= CW'($countones(ob_node[r]));
      end
    end
    if (cmp) begin
      for (int unsigned r = 0; r < N; r++)
        out_bit[r] <= (sl[r] > slb[r]);
    end
  end

endmodule
