// watermark_checker_tb: self-checking test of the watermark checker.
//
// 16 rows, tolerance 2. For random row vectors the test computes the two
// watermark currents from its own copy of the pattern hash and checks: the
// exact currents are detected and exp_i equals them; an error of up to 2 on
// either column is still detected; an error of 3 or more, or a pattern cell
// altered in one column only, fails that column alone and clears
// wm_detected; nothing is detected while valid_in is low.
module watermark_checker_tb;
  localparam int unsigned ROWS = 16, IN_BITS = 8, CELL_BITS = 4, TOL = 2;
  localparam logic [31:0] SEED = 32'hC0FF_EE01;
  localparam int unsigned I_BITS = IN_BITS + CELL_BITS + $clog2(ROWS + 1);

  logic valid_in;
  logic [ROWS-1:0][IN_BITS-1:0] row_v;
  logic [1:0][I_BITS-1:0] wm_i, exp_i;
  logic [1:0] col_match;
  logic wm_detected;
  logic clk = 0;

  int checks = 0, failures = 0;

  watermark_checker #(.ROWS(ROWS), .IN_BITS(IN_BITS), .CELL_BITS(CELL_BITS),
    .WM_SEED(SEED), .TOL(TOL)) dut (.*);

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

  function automatic int unsigned ref_i(int unsigned w, int unsigned alt_row = ROWS);
    int unsigned s = 0;
    for (int r = 0; r < ROWS; r++)
      s += row_v[r] * ((r == alt_row) ? (pattern(r, w) ^ 4'h5) : pattern(r, w));
    return s;
  endfunction

  initial begin
    int unsigned e0, e1, d;
    for (int n = 0; n < 40; n++) begin
      for (int r = 0; r < ROWS; r++) row_v[r] = 8'($urandom_range(1, 255));
      e0 = ref_i(0); e1 = ref_i(1);
      valid_in = 1; wm_i[0] = I_BITS'(e0); wm_i[1] = I_BITS'(e1);
      #1;
      check(exp_i[0] == I_BITS'(e0) && exp_i[1] == I_BITS'(e1), "expected signature");
      check(wm_detected && col_match == 2'b11, "exact currents detected");
      d = $urandom_range(0, TOL);
      wm_i[0] = I_BITS'(e0 + d); wm_i[1] = I_BITS'(e1 - d);
      #1 check(wm_detected, "within tolerance detected");
      d = $urandom_range(TOL + 1, 40);
      wm_i[0] = I_BITS'(e0 - d); wm_i[1] = I_BITS'(e1);
      #1 check(!wm_detected && col_match == 2'b10, "column 1 off by more than TOL");
      wm_i[0] = I_BITS'(e0); wm_i[1] = I_BITS'(e1 + d);
      #1 check(!wm_detected && col_match == 2'b01, "column 2 off by more than TOL");
      // a tampered cell in column 2: its current no longer carries the signature
      wm_i[1] = I_BITS'(ref_i(1, n % ROWS));
      #1 check(!wm_detected && col_match[0], "tampered cell in column 2");
      wm_i[1] = I_BITS'(e1); valid_in = 0;
      #1 check(!wm_detected, "nothing detected without valid_in");
    end
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
