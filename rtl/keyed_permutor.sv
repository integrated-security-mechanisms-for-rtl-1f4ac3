// keyed_permutor: secret-key row remapping in front of the crossbar.
//
// What it does. Each input line V_i is routed to a crossbar row chosen by a
// secret key, so that the physical row holding the weights of input i cannot
// be read off the array without the key. The permutation is made of
// triplet swaps: the rows are grouped into T = floor(ROWS/3) disjoint
// triplets and each triplet is reordered by one of its 6 orderings, chosen by
// a 3-bit key field. The key has KEY_BITS = 3*T bits (K1..Kb of the block
// diagram, K1 = bit 0); field t, key[3t +: 3], orders triplet t. The key
// space is 6^T, about 2^109 for 128 rows and 2^220 for 256 rows.
//
// How it works. A key register holds the active key. A load (key_load with
// key_in) replaces it in the next cycle, which is how the key is updated
// periodically. A key with any field of 6 or 7 is not a permutation: it is
// rejected with a one-cycle key_err pulse and the previous key stays. Until a
// valid key has been loaded after reset, key_valid is low and no row is
// driven (row_v is all zero): without a key the array computes nothing.
// The routing itself is combinational: member p of triplet t, physical row
// triplet_row(t,p), drives row triplet_row(t, perm_dest(code_t, p)). Rows
// 3T..ROWS-1, which belong to no triplet, pass straight through.
//
// Timing. Routing has no latency; a new key acts from the cycle after
// key_load.
//
// Paper vs. this design. The key-controlled remapping, the triplet swaps and
// the key-space size follow the paper. The triplet grouping (rows t, t+T,
// t+2T), the code table, the rejection of invalid codes and the blanking of
// the rows without a key are this design's choices. The paper's permutor
// switches analog voltages; here the voltages are digital codes.
module keyed_permutor
  import xbar_pkg::*;
#(
  parameter int unsigned ROWS     = ROWS_DEF,
  parameter int unsigned IN_BITS  = IN_BITS_DEF,
  parameter int unsigned KEY_BITS = 3 * (ROWS / 3)
) (
  input  logic                              clk,
  input  logic                              rst_n,
  // key storage and update
  input  logic                              key_load,
  input  logic [KEY_BITS-1:0]               key_in,
  output logic                              key_valid,
  output logic                              key_err,
  // routing: input line i -> physical row
  input  logic [ROWS-1:0][IN_BITS-1:0]      in_v,
  output logic [ROWS-1:0][IN_BITS-1:0]      row_v
);

  localparam int unsigned T = ROWS / 3;

  logic [KEY_BITS-1:0] key_q;
  logic                key_ok;

  // A key is accepted only if every field names one of the six orderings.
  always_comb begin
    key_ok = 1'b1;
    for (int unsigned t = 0; t < T; t++)
      if (key_in[3*t +: 3] >= 3'(PERM_CODES)) key_ok = 1'b0;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      key_q     <= '0;
      key_valid <= 1'b0;
      key_err   <= 1'b0;
    end else begin
      key_err <= key_load && !key_ok;
      if (key_load && key_ok) begin
        key_q     <= key_in;
        key_valid <= 1'b1;
      end
    end
  end

  always_comb begin
    row_v = '0;
    if (key_valid) begin
      for (int unsigned t = 0; t < T; t++)
        for (int unsigned p = 0; p < 3; p++)
          row_v[triplet_row(ROWS, t, perm_dest(key_q[3*t +: 3], p))] =
              in_v[triplet_row(ROWS, t, p)];
      for (int unsigned r = 3 * T; r < ROWS; r++)
        row_v[r] = in_v[r];
    end
  end

  initial begin
    assert (KEY_BITS == 3 * T)
      else $error("keyed_permutor: KEY_BITS must be 3*floor(ROWS/3)");
  end

endmodule
