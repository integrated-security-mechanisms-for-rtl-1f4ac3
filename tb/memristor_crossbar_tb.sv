// memristor_crossbar_tb: self-checking test of the crossbar model.
//
// A 12-row array with 5 weight columns and the two watermark columns placed
// at physical columns 1 and 6 (not at the end, to exercise variable
// placement). Checks: after provisioning, one-hot row vectors read back zero
// weights and the fixed watermark pattern, recomputed here by an independent
// copy of the hash; random programming followed by random input vectors gives
// the column currents of a reference matrix-vector product; full-scale codes
// do not overflow the current width; provisioning wins over a simultaneous
// write and restores a tampered watermark cell.
module memristor_crossbar_tb;
  localparam int unsigned ROWS = 12, COLS = 5, IN_BITS = 8, CELL_BITS = 4;
  localparam int unsigned TOT = COLS + 2;
  localparam int unsigned WM0 = 1, WM1 = 6;
  localparam logic [31:0] SEED = 32'h1234_ABCD;
  localparam int unsigned I_BITS = IN_BITS + CELL_BITS + $clog2(ROWS + 1);

  logic clk = 0;
  logic provision = 0, prog_en = 0;
  logic [$clog2(ROWS)-1:0] prog_row = '0;
  logic [$clog2(TOT)-1:0] prog_col = '0;
  logic [CELL_BITS-1:0] prog_g = '0;
  logic [ROWS-1:0][IN_BITS-1:0] row_v = '0;
  logic [TOT-1:0][I_BITS-1:0] col_i;

  int checks = 0, failures = 0;
  int unsigned gref [ROWS][TOT];

  memristor_crossbar #(.ROWS(ROWS), .COLS(COLS), .IN_BITS(IN_BITS),
    .CELL_BITS(CELL_BITS), .WM_COL0(WM0), .WM_COL1(WM1), .WM_SEED(SEED)) dut (.*);

  always #5 clk = ~clk;

  function automatic void check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endfunction

  function automatic int unsigned pattern(int unsigned r, int unsigned w);
    logic [31:0] h;
    h = SEED ^ (r * 32'h9E3779B1) ^ (w * 32'h85EBCA6B);
    h ^= h >> 15;
    h *= 32'h2C1B3C6D;
    h ^= h >> 12;
    return h & ((1 << CELL_BITS) - 1);
  endfunction

  task automatic write(int r, int c, int g);
    @(negedge clk);
    prog_en = 1; prog_row = 4'(r); prog_col = 3'(c); prog_g = 4'(g);
    @(negedge clk); prog_en = 0;
    gref[r][c] = g;
  endtask

  task automatic check_mvm(string what);
    int errs = 0;
    #1;
    for (int c = 0; c < TOT; c++) begin
      longint unsigned s = 0;
      for (int r = 0; r < ROWS; r++) s += row_v[r] * gref[r][c];
      if (col_i[c] != I_BITS'(s)) errs++;
      if (s >= (64'd1 << I_BITS)) errs++;
    end
    check(errs == 0, $sformatf("%s: %0d columns wrong", what, errs));
  endtask

  initial begin
    int nz = 0;
    @(negedge clk); provision = 1;
    @(negedge clk); provision = 0;
    for (int r = 0; r < ROWS; r++)
      for (int c = 0; c < TOT; c++)
        gref[r][c] = (c == WM0) ? pattern(r, 0) : (c == WM1) ? pattern(r, 1) : 0;
    for (int r = 0; r < ROWS; r++) nz += (gref[r][WM0] != 0) + (gref[r][WM1] != 0);
    check(nz > ROWS, "watermark pattern is not mostly zero");
    // read every row back with a one-hot vector
    for (int r = 0; r < ROWS; r++) begin
      row_v = '0; row_v[r] = 8'd1;
      check_mvm($sformatf("provisioned row %0d", r));
    end
    // program all weight cells at random
    for (int r = 0; r < ROWS; r++)
      for (int c = 0; c < TOT; c++)
        if (c != WM0 && c != WM1) write(r, c, $urandom_range(0, 15));
    for (int n = 0; n < 30; n++) begin
      for (int r = 0; r < ROWS; r++) row_v[r] = 8'($urandom);
      check_mvm($sformatf("random vector %0d", n));
    end
    // full scale
    for (int r = 0; r < ROWS; r++)
      for (int c = 0; c < TOT; c++) write(r, c, 15);
    row_v = '1;
    check_mvm("full scale");
    check(col_i[0] == I_BITS'(ROWS * 255 * 15), "full-scale current value");
    // tamper a watermark cell, then provision again with a write in the same cycle
    for (int r = 0; r < ROWS; r++) row_v[r] = 8'(r + 1);
    @(negedge clk); provision = 1; prog_en = 1; prog_row = 4'd3; prog_col = 3'(WM1); prog_g = 4'd0;
    @(negedge clk); provision = 0; prog_en = 0;
    for (int r = 0; r < ROWS; r++)
      for (int c = 0; c < TOT; c++)
        gref[r][c] = (c == WM0) ? pattern(r, 0) : (c == WM1) ? pattern(r, 1) : 0;
    check_mvm("provision beats write");
    write(3, WM1, (pattern(3, 1) + 5) % 16);
    check_mvm("tampered watermark cell");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
