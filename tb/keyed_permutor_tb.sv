// keyed_permutor_tb: self-checking test of the keyed permutor.
//
// Runs the permutor at 128 rows (42 triplets, 126 key bits, two rows outside
// any triplet) and checks: no row is driven before a key is loaded; a key with
// an invalid field (6 or 7) is rejected with key_err and leaves the previous
// key in place; for random valid keys every input lands on the row given by an
// independent reference model of the triplet swaps, and the mapping is a
// permutation; a key update acts from the next cycle; the all-zero key is the
// identity. The reference keeps its own copy of the ordering table. It also
// checks the key width against the key-space figure: 42 triplets of 6
// orderings give 42*log2(6) ~ 108.6 bits.
module keyed_permutor_tb;
  localparam int unsigned ROWS = 128;
  localparam int unsigned IN_BITS = 8;
  localparam int unsigned T = ROWS / 3;
  localparam int unsigned KEY_BITS = 3 * T;

  logic clk = 0, rst_n = 0;
  logic key_load = 0;
  logic [KEY_BITS-1:0] key_in = '0;
  logic key_valid, key_err;
  logic [ROWS-1:0][IN_BITS-1:0] in_v, row_v;

  int checks = 0, failures = 0;

  keyed_permutor #(.ROWS(ROWS), .IN_BITS(IN_BITS)) dut (.*);

  always #5 clk = ~clk;

  // Ordering table, written out independently of the package.
  int unsigned dest_tab [6][3] = '{'{0,1,2}, '{0,2,1}, '{1,0,2},
                                   '{1,2,0}, '{2,0,1}, '{2,1,0}};

  function automatic void check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endfunction

  function automatic logic [KEY_BITS-1:0] rand_key();
    logic [KEY_BITS-1:0] k;
    for (int t = 0; t < T; t++) k[3*t +: 3] = 3'($urandom_range(0, 5));
    return k;
  endfunction

  // Compare row_v with the reference mapping of key k for the current in_v.
  task automatic check_map(logic [KEY_BITS-1:0] k, string what);
    logic [ROWS-1:0][IN_BITS-1:0] expv;
    int errs = 0;
    bit seen [ROWS];
    for (int t = 0; t < T; t++)
      for (int p = 0; p < 3; p++)
        expv[t + T * dest_tab[k[3*t +: 3]][p]] = in_v[t + T * p];
    for (int r = 3 * T; r < ROWS; r++) expv[r] = in_v[r];
    for (int r = 0; r < ROWS; r++) if (row_v[r] !== expv[r]) errs++;
    check(errs == 0, $sformatf("%s: %0d rows differ from reference", what, errs));
    // with distinct inputs, every input value must appear exactly once
    for (int r = 0; r < ROWS; r++) seen[r] = 0;
    for (int r = 0; r < ROWS; r++) seen[row_v[r]] = 1;
    errs = 0;
    for (int r = 0; r < ROWS; r++) if (!seen[r]) errs++;
    check(errs == 0, $sformatf("%s: not a permutation (%0d inputs lost)", what, errs));
  endtask

  task automatic load(logic [KEY_BITS-1:0] k);
    @(negedge clk); key_in = k; key_load = 1;
    @(negedge clk); key_load = 0;
  endtask

  initial begin
    logic [KEY_BITS-1:0] k1, k2, bad;
    for (int i = 0; i < ROWS; i++) in_v[i] = IN_BITS'(i);
    check(KEY_BITS == 126, "128 rows must give a 126-bit key");
    check($rtoi(T * $ln(6.0) / $ln(2.0) + 0.5) == 109, "key space ~ 2^109 for 128 rows");
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    check(!key_valid && row_v == '0, "no key: rows must stay undriven");

    // invalid key before any valid one
    bad = rand_key(); bad[3*5 +: 3] = 3'd7;
    load(bad);
    check(key_err && !key_valid, "invalid key must be rejected");

    // random valid keys
    for (int n = 0; n < 20; n++) begin
      k1 = rand_key();
      load(k1);
      check(key_valid && !key_err, "valid key accepted");
      check_map(k1, $sformatf("key %0d", n));
      for (int i = 0; i < ROWS; i++) in_v[i] = IN_BITS'((i * 37 + n) % ROWS);
      #1 check_map(k1, $sformatf("key %0d, new inputs", n));
      for (int i = 0; i < ROWS; i++) in_v[i] = IN_BITS'(i);
      #1;
    end

    // an invalid update keeps the old key
    k1 = rand_key();
    load(k1);
    bad = rand_key(); bad[3*(T-1) +: 3] = 3'd6;
    load(bad);
    check(key_err, "invalid update flagged");
    check_map(k1, "old key kept after invalid update");

    // key update acts from the next cycle
    k2 = rand_key(); k2[2:0] = (k1[2:0] == 3'd3) ? 3'd4 : 3'd3;
    @(negedge clk); key_in = k2; key_load = 1;
    #1 check_map(k1, "old key until the clock edge");
    @(negedge clk); key_load = 0;
    check_map(k2, "new key after the clock edge");
    // code 3 sends member 0 of triplet 0 (row 0) to member 1 (row T)
    check(row_v[T] == in_v[0], "input 0 drives distant row T");

    // identity key
    load('0);
    check(row_v == in_v, "all-zero key is the identity");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
