// secure_crossbar_top: memristive crossbar with a keyed permutor on its
// inputs and watermark protection columns on its outputs.
//
// What it does. An input vector of ROWS voltage codes (one sample of the
// data set, down-sampled to the row count) is multiplied by the stored
// weight matrix: out_i[j] = sum_i in_v[i] * W[i][j] over the COLS weight
// columns. Two mechanisms protect the weights. The keyed permutor sends input
// i to a key-selected physical row, so the weights of input i sit in a row
// only the key owner knows; the owner programs W[i][j] into physical row
// pi(i). The two watermark columns carry a fixed pattern whose current
// signature is checked on every vector, proving ownership and exposing
// tampering.
//
// Structure and timing. Two register stages:
//   accept  (in_valid && in_ready): in_v passes the permutor and the row
//           vector is registered (stage 1);
//   +1 cycle: the crossbar forms all column currents from the registered
//           rows and the watermark checker compares the two watermark
//           currents with their expected signature; both are registered
//           (stage 2) and out_valid rises.
// So a vector accepted at edge k is on out_* after edge k+1, one vector per
// cycle. in_ready is key_valid: without a loaded key nothing is accepted.
// wm_alarm marks a valid output whose watermark check failed, and
// wm_col_match tells which of the two columns still carries its signature.
//
// Columns. prog_col addresses physical columns 0..COLS+1, the watermark
// columns included (WM_COL0, WM_COL1; by default the last two). out_i[j]
// is weight column j, i.e. physical column j with the two watermark
// positions skipped. prog_row addresses physical rows.
//
// Paper vs. this design. The chain input -> keyed permutor -> crossbar with
// two watermark columns -> "watermark detected" follows the block diagram.
// The register stages, the handshake, the digital codes standing in for
// voltages and currents, and the programming and provisioning ports are
// this design's own; the paper's array is analog and its periphery is not
// described.
module secure_crossbar_top
  import xbar_pkg::*;
#(
  parameter int unsigned ROWS      = ROWS_DEF,
  parameter int unsigned COLS      = COLS_DEF,
  parameter int unsigned IN_BITS   = IN_BITS_DEF,
  parameter int unsigned CELL_BITS = CELL_BITS_DEF,
  parameter int unsigned WM_COL0   = COLS,
  parameter int unsigned WM_COL1   = COLS + 1,
  parameter logic [31:0] WM_SEED   = WM_SEED_DEF,
  parameter int unsigned TOL       = 0,
  parameter int unsigned KEY_BITS  = 3 * (ROWS / 3),
  parameter int unsigned TOT_COLS  = COLS + WM_COLS,
  parameter int unsigned I_BITS    = cur_bits(ROWS, IN_BITS, CELL_BITS)
) (
  input  logic                              clk,
  input  logic                              rst_n,
  // secret key
  input  logic                              key_load,
  input  logic [KEY_BITS-1:0]               key_in,
  output logic                              key_valid,
  output logic                              key_err,
  // array initialisation and programming (physical addresses)
  input  logic                              provision,
  input  logic                              prog_en,
  input  logic [$clog2(ROWS)-1:0]           prog_row,
  input  logic [$clog2(TOT_COLS)-1:0]       prog_col,
  input  logic [CELL_BITS-1:0]              prog_g,
  // inference
  input  logic                              in_valid,
  output logic                              in_ready,
  input  logic [ROWS-1:0][IN_BITS-1:0]      in_v,
  output logic                              out_valid,
  output logic [COLS-1:0][I_BITS-1:0]       out_i,
  output logic [WM_COLS-1:0][I_BITS-1:0]    out_wm_i,
  output logic                              wm_detected,
  output logic [WM_COLS-1:0]                wm_col_match,
  output logic                              wm_alarm
);

  // Physical column of weight column j: skip the two watermark columns.
  function automatic int unsigned phys_col(int unsigned j);
    int unsigned pc;
    pc = j;
    if (pc >= WM_COL0) pc++;
    if (pc >= WM_COL1) pc++;
    return pc;
  endfunction

  logic [ROWS-1:0][IN_BITS-1:0]     perm_v, row_q;
  logic                             v1_q;
  logic [TOT_COLS-1:0][I_BITS-1:0]  col_i;
  logic [COLS-1:0][I_BITS-1:0]      w_i;
  logic [WM_COLS-1:0][I_BITS-1:0]   wm_i;
  logic [WM_COLS-1:0][I_BITS-1:0]   exp_i;      // expected signature (not exported)
  logic [WM_COLS-1:0]               col_match;
  logic                             det;

  keyed_permutor #(
    .ROWS(ROWS), .IN_BITS(IN_BITS), .KEY_BITS(KEY_BITS)
  ) u_perm (
    .clk, .rst_n, .key_load, .key_in, .key_valid, .key_err,
    .in_v, .row_v(perm_v)
  );

  assign in_ready = key_valid;

  // Stage 1: permuted row voltages.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1_q  <= 1'b0;
      row_q <= '0;
    end else begin
      v1_q <= in_valid && in_ready;
      if (in_valid && in_ready) row_q <= perm_v;
    end
  end

  memristor_crossbar #(
    .ROWS(ROWS), .COLS(COLS), .IN_BITS(IN_BITS), .CELL_BITS(CELL_BITS),
    .WM_COL0(WM_COL0), .WM_COL1(WM_COL1), .WM_SEED(WM_SEED),
    .TOT_COLS(TOT_COLS), .I_BITS(I_BITS)
  ) u_xbar (
    .clk, .provision, .prog_en, .prog_row, .prog_col, .prog_g,
    .row_v(row_q), .col_i
  );

  // Split the physical columns into weight and watermark columns.
  always_comb begin
    for (int unsigned j = 0; j < COLS; j++) w_i[j] = col_i[phys_col(j)];
    wm_i[0] = col_i[WM_COL0];
    wm_i[1] = col_i[WM_COL1];
  end

  watermark_checker #(
    .ROWS(ROWS), .IN_BITS(IN_BITS), .CELL_BITS(CELL_BITS),
    .WM_SEED(WM_SEED), .I_BITS(I_BITS), .TOL(TOL)
  ) u_wm (
    .valid_in(v1_q), .row_v(row_q), .wm_i, .exp_i, .col_match,
    .wm_detected(det)
  );

  // Stage 2: column currents and watermark verdict.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid   <= 1'b0;
      out_i       <= '0;
      out_wm_i    <= '0;
      wm_detected <= 1'b0;
      wm_col_match <= '0;
      wm_alarm    <= 1'b0;
    end else begin
      out_valid   <= v1_q;
      wm_detected <= det;
      wm_col_match <= col_match;
      wm_alarm    <= v1_q && !det;
      if (v1_q) begin
        out_i    <= w_i;
        out_wm_i <= wm_i;
      end
    end
  end

endmodule
