// xbar_pkg: sizes, types and pure functions shared by the secured memristive
// crossbar.
//
// Sizes. The default array is 256 rows (inputs V_1..V_m) by 128 weight
// columns, the largest array evaluated, plus two watermark protection
// columns. Input voltages are carried as unsigned IN_BITS codes (a
// normalised DAC level), cell conductances as CELL_BITS codes (a programmed
// conductance level), and column currents as the exact integer sum of
// code products. These three widths are this design's own choice.
//
// Triplet swaps. The key-controlled permutation is built from disjoint row
// triplets, each of which is permuted by one of the 3! = 6 orderings under a
// 3-bit key field. With m rows there are floor(m/3) triplets and a key space
// of 6^floor(m/3); for 128 rows that is 6^42 ~ 2^108.6, matching the
// "approximately 2^109" of the triplet-swap configuration. Triplet t groups
// the distant rows t, t+T and t+2T (T = floor(m/3)) so that one input can land
// far from its natural row; rows from 3T upwards are never moved. The
// grouping and the code-to-ordering table are this design's choice.
//
// Watermark pattern. The two watermark columns hold a fixed conductance
// pattern. Here it is a small integer hash of (row, column, seed), so that
// the array and the checker derive the same pattern without a stored table.
package xbar_pkg;

  // ---- default sizes ------------------------------------------------------
  parameter int unsigned ROWS_DEF    = 256;  // m, array rows / input lines
  parameter int unsigned COLS_DEF    = 128;  // n, weight columns
  parameter int unsigned WM_COLS     = 2;    // watermark protection columns
  parameter int unsigned IN_BITS_DEF = 8;    // input voltage code width
  parameter int unsigned CELL_BITS_DEF = 4;  // conductance level code width
  parameter logic [31:0] WM_SEED_DEF = 32'h5A17_C3E9;

  // Width of a column current: sum of ROWS products of IN_BITS x CELL_BITS.
  function automatic int unsigned cur_bits(int unsigned rows, int unsigned in_bits,
                                           int unsigned cell_bits);
    return in_bits + cell_bits + $clog2(rows + 1);
  endfunction

  // ---- triplet swap ---------------------------------------------------------
  typedef logic [2:0] perm_code_t;           // one key field per triplet
  localparam int unsigned PERM_CODES = 6;     // codes 6 and 7 are invalid

  // Position (0..2) inside its triplet that member p is sent to under code c.
  //   code : 0 1 2 3 4 5
  //   p=0 -> 0 0 1 1 2 2
  //   p=1 -> 1 2 0 2 0 1
  //   p=2 -> 2 1 2 0 1 0
  function automatic int unsigned perm_dest(perm_code_t c, int unsigned p);
    unique case (c)
      3'd0: return p;
      3'd1: return (p == 0) ? 0 : 3 - p;
      3'd2: return (p == 2) ? 2 : 1 - p;
      3'd3: return (p + 1) % 3;
      3'd4: return (p + 2) % 3;
      3'd5: return 2 - p;
      default: return p;
    endcase
  endfunction

  function automatic int unsigned n_triplets(int unsigned rows);
    return rows / 3;
  endfunction

  // Physical row of member p (0..2) of triplet t.
  function automatic int unsigned triplet_row(int unsigned rows, int unsigned t,
                                              int unsigned p);
    return t + p * n_triplets(rows);
  endfunction

  // ---- watermark pattern -----------------------------------------------------
  // Conductance code stored at physical row r of watermark column w (0 or 1).
  function automatic logic [7:0] wm_pattern(logic [31:0] seed, int unsigned r,
                                            int unsigned w);
    logic [31:0] h;
    h = seed ^ (32'(r) * 32'h9E37_79B1) ^ (32'(w) * 32'h85EB_CA6B);
    h = h ^ (h >> 15);
    h = h * 32'h2C1B_3C6D;
    h = h ^ (h >> 12);
    return h[7:0];
  endfunction

endpackage
