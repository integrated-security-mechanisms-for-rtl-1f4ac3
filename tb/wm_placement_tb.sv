// wm_placement_tb: the secured crossbar with its watermark columns moved
// away from the array's end.
//
// A 9-row array (three triplets, 9-bit key) with 6 weight columns and the two
// watermark columns at physical columns 0 and 4, so that the weight columns
// sit at physical columns 1, 2, 3, 5, 6, 7. The test loads a random key,
// programs a random logical weight matrix through the key's row mapping and
// the column mapping, checks that every weight column result equals W*v for
// random vectors, that the watermark currents come from physical columns 0
// and 4 and are detected, and that tampering with the cell of physical column
// 4 raises the alarm for the second watermark column only.
module wm_placement_tb;
  localparam int unsigned ROWS = 9, COLS = 6, IN_BITS = 8, CELL_BITS = 4;
  localparam int unsigned WM0 = 0, WM1 = 4;
  localparam int unsigned TOT = COLS + 2, T = ROWS / 3, KEY_BITS = 3 * T;
  localparam int unsigned I_BITS = IN_BITS + CELL_BITS + $clog2(ROWS + 1);
  localparam logic [31:0] SEED = 32'h0BAD_F00D;

  logic clk = 0, rst_n = 0;
  logic key_load = 0;
  logic [KEY_BITS-1:0] key_in = '0;
  logic key_valid, key_err;
  logic provision = 0, prog_en = 0;
  logic [$clog2(ROWS)-1:0] prog_row = '0;
  logic [$clog2(TOT)-1:0] prog_col = '0;
  logic [CELL_BITS-1:0] prog_g = '0;
  logic in_valid = 0, in_ready;
  logic [ROWS-1:0][IN_BITS-1:0] in_v = '0;
  logic out_valid;
  logic [COLS-1:0][I_BITS-1:0] out_i;
  logic [1:0][I_BITS-1:0] out_wm_i;
  logic wm_detected, wm_alarm;
  logic [1:0] wm_col_match;

  secure_crossbar_top #(.ROWS(ROWS), .COLS(COLS), .IN_BITS(IN_BITS),
    .CELL_BITS(CELL_BITS), .WM_COL0(WM0), .WM_COL1(WM1), .WM_SEED(SEED)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int unsigned dest_tab [6][3] = '{'{0,1,2}, '{0,2,1}, '{1,0,2},
                                   '{1,2,0}, '{2,0,1}, '{2,1,0}};
  int unsigned phys_of_col [COLS] = '{1, 2, 3, 5, 6, 7};
  int unsigned gphys [ROWS][TOT];
  int unsigned wlog [ROWS][COLS];
  logic [KEY_BITS-1:0] key;

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

  function automatic int unsigned pi(int unsigned i);
    return (i % T) + T * dest_tab[key[3*(i % T) +: 3]][i / T];
  endfunction

  task automatic write(int unsigned r, int unsigned c, int unsigned g);
    @(negedge clk);
    prog_en = 1; prog_row = 4'(r); prog_col = 3'(c); prog_g = 4'(g);
    @(negedge clk); prog_en = 0;
    gphys[r][c] = g;
  endtask

  task automatic run(int n, bit expect_wm);
    logic [ROWS-1:0][IN_BITS-1:0] v;
    for (int k = 0; k < n; k++) begin
      int errs = 0;
      int unsigned s;
      for (int i = 0; i < ROWS; i++) v[i] = 8'($urandom_range(1, 255));
      @(negedge clk); in_v = v; in_valid = 1;
      @(negedge clk); in_valid = 0;
      @(negedge clk);
      check(out_valid, "result valid");
      for (int j = 0; j < COLS; j++) begin
        s = 0;
        for (int i = 0; i < ROWS; i++) s += v[i] * wlog[i][j];
        if (out_i[j] != I_BITS'(s)) errs++;
      end
      check(errs == 0, $sformatf("%0d weight columns wrong", errs));
      for (int w = 0; w < 2; w++) begin
        s = 0;
        for (int i = 0; i < ROWS; i++) s += v[i] * gphys[pi(i)][w == 0 ? WM0 : WM1];
        check(out_wm_i[w] == I_BITS'(s), $sformatf("watermark column %0d current", w + 1));
      end
      check(wm_detected == expect_wm, "watermark verdict");
      if (!expect_wm) check(wm_col_match == 2'b01 && wm_alarm, "alarm on column 2 only");
    end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk); provision = 1;
    @(negedge clk); provision = 0;
    for (int r = 0; r < ROWS; r++)
      for (int c = 0; c < TOT; c++)
        gphys[r][c] = (c == WM0) ? pattern(r, 0) : (c == WM1) ? pattern(r, 1) : 0;
    for (int t = 0; t < T; t++) key[3*t +: 3] = 3'($urandom_range(0, 5));
    @(negedge clk); key_in = key; key_load = 1;
    @(negedge clk); key_load = 0;
    check(key_valid, "key loaded");
    for (int i = 0; i < ROWS; i++)
      for (int j = 0; j < COLS; j++) begin
        wlog[i][j] = $urandom_range(0, 15);
        write(pi(i), phys_of_col[j], wlog[i][j]);
      end
    run(10, 1);
    write(5, WM1, (pattern(5, 1) + 9) % 16);
    run(5, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
