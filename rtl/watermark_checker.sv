// watermark_checker: the "Watermark Detected" check on the two watermark
// protection columns.
//
// What it does. The watermark columns hold a fixed, known conductance
// pattern, so for any row voltages the current each of them must carry is
// known: I_w = sum_r V_r * P_r,w, with P the pattern of xbar_pkg::wm_pattern.
// The checker computes that expected current signature from the row voltages
// actually applied to the array (after the keyed permutor) and compares it
// with the two measured watermark column currents. A column matches when the
// two differ by at most TOL; the watermark is detected when both match.
// A column whose cells were reprogrammed, erased or shifted no longer
// carries its signature and the check fails. With all rows at zero every
// column carries zero current and the check is vacuous; valid_in should be
// raised only for vectors with some non-zero row, which the surrounding
// design leaves to its user.
//
// Interface and timing. Combinational: exp_i, col_match and wm_detected
// follow row_v and wm_i in the same cycle. wm_detected is qualified by
// valid_in.
//
// Paper vs. this design. Verifying the watermark through the distinct
// current signature of the fixed pattern, during normal inference, follows
// the paper. Computing the expected signature digitally from the row
// voltages and the tolerance window are this design's choices; the paper
// does not say how the comparison is made.
module watermark_checker
  import xbar_pkg::*;
#(
  parameter int unsigned ROWS      = ROWS_DEF,
  parameter int unsigned IN_BITS   = IN_BITS_DEF,
  parameter int unsigned CELL_BITS = CELL_BITS_DEF,
  parameter logic [31:0] WM_SEED   = WM_SEED_DEF,
  parameter int unsigned I_BITS    = cur_bits(ROWS, IN_BITS, CELL_BITS),
  parameter int unsigned TOL       = 0
) (
  input  logic                              valid_in,
  input  logic [ROWS-1:0][IN_BITS-1:0]      row_v,
  input  logic [WM_COLS-1:0][I_BITS-1:0]    wm_i,
  output logic [WM_COLS-1:0][I_BITS-1:0]    exp_i,
  output logic [WM_COLS-1:0]                col_match,
  output logic                              wm_detected
);

  logic [WM_COLS-1:0][I_BITS-1:0] diff;

  always_comb begin
    for (int unsigned w = 0; w < WM_COLS; w++) begin
      exp_i[w] = '0;
      for (int unsigned r = 0; r < ROWS; r++)
        exp_i[w] = exp_i[w] + I_BITS'(row_v[r])
                 * I_BITS'(CELL_BITS'(wm_pattern(WM_SEED, r, w)));
      diff[w]      = (wm_i[w] >= exp_i[w]) ? wm_i[w] - exp_i[w] : exp_i[w] - wm_i[w];
      col_match[w] = (diff[w] <= I_BITS'(TOL));
    end
    wm_detected = valid_in && (&col_match);
  end

endmodule
