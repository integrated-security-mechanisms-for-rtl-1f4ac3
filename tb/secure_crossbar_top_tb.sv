// secure_crossbar_top_tb: end-to-end test of the secured crossbar at its
// default size (256 rows, 128 weight columns, two watermark columns, 255-bit
// key).
//
// Sequence: reset and provision the array; offer a vector with no key loaded
// (must not be accepted); load a key with an invalid field (rejected); load a
// valid key K1 and program a random logical weight matrix W into the physical
// rows pi1(i) the key sends each input to; stream random vectors back to back
// and compare every output with sum_i v_i * W[i][j], the watermark currents
// with the pattern's signature, the latency (result one clock edge after
// acceptance) and the throughput (one vector per cycle). Then update the key to K2 without reprogramming:
// the outputs must now differ from W*v, matching instead the reference of the
// physical array read through pi2, while the watermark is still detected.
// Then tamper with one watermark cell (alarm raised, the tampered column
// named) and provision again (watermark restored). The reference model
// computes the permutation from its own copy of the triplet table and the
// pattern from its own copy of the hash. Each mechanism (blocked without key,
// key rejected, key update, correct inference, scrambled inference with the
// wrong key, watermark detected, watermark alarm, provisioning) is counted
// and must occur at least once.
module secure_crossbar_top_tb;
  localparam int unsigned ROWS = 256, COLS = 128, IN_BITS = 8, CELL_BITS = 4;
  localparam int unsigned TOT = COLS + 2, T = ROWS / 3, KEY_BITS = 3 * T;
  localparam int unsigned I_BITS = IN_BITS + CELL_BITS + $clog2(ROWS + 1);
  localparam logic [31:0] SEED = 32'h5A17_C3E9;   // the design's default seed
  localparam int unsigned NVEC = 24;

  typedef logic [COLS-1:0][I_BITS-1:0] out_t;
  typedef logic [1:0][I_BITS-1:0] wm_t;

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
  out_t out_i;
  wm_t out_wm_i;
  logic wm_detected, wm_alarm;
  logic [1:0] wm_col_match;

  secure_crossbar_top dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int n_blocked = 0, n_rejected = 0, n_rekey = 0, n_correct = 0, n_scrambled = 0;
  int n_wm_ok = 0, n_wm_alarm = 0, n_provision = 0;
  longint cycle = 0;
  always @(posedge clk) cycle++;

  int unsigned dest_tab [6][3] = '{'{0,1,2}, '{0,2,1}, '{1,0,2},
                                   '{1,2,0}, '{2,0,1}, '{2,1,0}};
  int unsigned gphys [ROWS][TOT];   // physical cell contents
  int unsigned wlog  [ROWS][COLS];  // logical weights W[i][j]

  function automatic void check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL @%0d: %s", cycle, what); end
  endfunction

  function automatic int unsigned pattern(int unsigned r, int unsigned w);
    logic [31:0] h;
    h = SEED ^ (r * 32'h9E3779B1) ^ (w * 32'h85EBCA6B);
    h ^= h >> 15;
    h *= 32'h2C1B3C6D;
    h ^= h >> 12;
    return h & ((1 << CELL_BITS) - 1);
  endfunction

  // Physical row that input i drives under key k.
  function automatic int unsigned pi(logic [KEY_BITS-1:0] k, int unsigned i);
    if (i >= 3 * T) return i;
    return (i % T) + T * dest_tab[k[3*(i % T) +: 3]][i / T];
  endfunction

  function automatic logic [KEY_BITS-1:0] rand_key();
    logic [KEY_BITS-1:0] k;
    for (int t = 0; t < T; t++) k[3*t +: 3] = 3'($urandom_range(0, 5));
    return k;
  endfunction

  task automatic do_provision();
    @(negedge clk); provision = 1;
    @(negedge clk); provision = 0;
    for (int r = 0; r < ROWS; r++)
      for (int c = 0; c < TOT; c++)
        gphys[r][c] = (c == COLS) ? pattern(r, 0) : (c == COLS + 1) ? pattern(r, 1) : 0;
    n_provision++;
  endtask

  task automatic write(int unsigned r, int unsigned c, int unsigned g);
    @(negedge clk);
    prog_en = 1; prog_row = 8'(r); prog_col = 8'(c); prog_g = 4'(g);
    @(negedge clk); prog_en = 0;
    gphys[r][c] = g;
  endtask

  task automatic load_key(logic [KEY_BITS-1:0] k);
    @(negedge clk); key_in = k; key_load = 1;
    @(negedge clk); key_load = 0;
  endtask

  // Reference outputs for vector v: through the physical array under key k
  // (what the hardware must give) and through the logical weights (what the
  // key owner expects).
  function automatic out_t ref_phys(logic [ROWS-1:0][IN_BITS-1:0] v, logic [KEY_BITS-1:0] k);
    out_t o;
    int unsigned s;
    for (int j = 0; j < COLS; j++) begin
      s = 0;
      for (int i = 0; i < ROWS; i++) s += v[i] * gphys[pi(k, i)][j];
      o[j] = I_BITS'(s);
    end
    return o;
  endfunction

  function automatic out_t ref_logical(logic [ROWS-1:0][IN_BITS-1:0] v);
    out_t o;
    int unsigned s;
    for (int j = 0; j < COLS; j++) begin
      s = 0;
      for (int i = 0; i < ROWS; i++) s += v[i] * wlog[i][j];
      o[j] = I_BITS'(s);
    end
    return o;
  endfunction

  function automatic wm_t ref_wm(logic [ROWS-1:0][IN_BITS-1:0] v, logic [KEY_BITS-1:0] k);
    wm_t o;
    int unsigned s;
    for (int w = 0; w < 2; w++) begin
      s = 0;
      for (int i = 0; i < ROWS; i++) s += v[i] * gphys[pi(k, i)][COLS + w];
      o[w] = I_BITS'(s);
    end
    return o;
  endfunction

  // Stream n vectors back to back and check each result as it leaves.
  // expect_logical: outputs must equal W*v (1) or must differ from it (0).
  task automatic stream(int n, logic [KEY_BITS-1:0] k, bit expect_logical, bit expect_wm);
    out_t exp_o [$], exp_l [$];
    wm_t exp_w [$];
    longint acc_cyc [$];
    int sent = 0, got = 0;
    logic [ROWS-1:0][IN_BITS-1:0] v;
    longint c0;
    bit acc;
    @(negedge clk);
    c0 = cycle;
    while (got < n) begin
      if (sent < n) begin
        for (int i = 0; i < ROWS; i++) v[i] = 8'($urandom_range(1, 255));
        in_v = v; in_valid = 1;
      end else in_valid = 0;
      @(posedge clk);
      acc = in_valid && in_ready;
      #1;
      if (acc) begin
        exp_o.push_back(ref_phys(v, k));
        exp_l.push_back(ref_logical(v));
        exp_w.push_back(ref_wm(v, k));
        acc_cyc.push_back(cycle);
        sent++;
      end
      if (out_valid) begin
        out_t eo, el;
        wm_t ew;
        longint ac;
        eo = exp_o.pop_front(); el = exp_l.pop_front(); ew = exp_w.pop_front();
        ac = acc_cyc.pop_front();
        check(cycle - ac == 1, $sformatf("latency %0d, expected 1", cycle - ac));
        check(out_i == eo, "column currents match the physical array");
        check(out_wm_i == ew, "watermark column currents");
        if (expect_logical) begin
          check(out_i == el, "key owner gets W*v");
          if (out_i == el) n_correct++;
        end else begin
          check(out_i != el, "wrong key must not give W*v");
          if (out_i != el) n_scrambled++;
        end
        check(wm_detected == expect_wm && wm_alarm == !expect_wm, "watermark verdict");
        if (wm_detected) n_wm_ok++;
        if (wm_alarm) begin
          n_wm_alarm++;
          check(wm_col_match == 2'b01, "alarm names watermark column 2");
        end
        got++;
      end
      @(negedge clk);
    end
    in_valid = 0;
    check(cycle - c0 == longint'(n + 1), $sformatf("%0d vectors took %0d cycles", n, cycle - c0));
  endtask

  initial begin
    logic [KEY_BITS-1:0] k1, k2, bad;
    repeat (3) @(negedge clk);
    rst_n = 1;
    do_provision();

    // no key: nothing is accepted
    @(negedge clk); in_valid = 1;
    repeat (4) begin
      @(posedge clk); #1;
      check(!in_ready && !out_valid, "blocked without key");
      if (!in_ready) n_blocked++;
    end
    @(negedge clk); in_valid = 0;

    // invalid key
    bad = rand_key(); bad[3*40 +: 3] = 3'd6;
    load_key(bad);
    check(key_err && !key_valid, "invalid key rejected");
    if (key_err) n_rejected++;

    // key K1 and the weights placed through it
    k1 = rand_key();
    load_key(k1);
    check(key_valid, "key K1 accepted");
    for (int i = 0; i < ROWS; i++)
      for (int j = 0; j < COLS; j++) begin
        wlog[i][j] = $urandom_range(0, 15);
        write(pi(k1, i), j, wlog[i][j]);
      end
    stream(NVEC, k1, 1, 1);

    // key update without reprogramming: scrambled results
    k2 = rand_key();
    load_key(k2);
    check(key_valid && !key_err, "key K2 accepted");
    n_rekey++;
    stream(NVEC / 2, k2, 0, 1);

    // back to K1, then tamper with watermark column 2
    load_key(k1);
    n_rekey++;
    write(77, COLS + 1, (pattern(77, 1) + 7) % 16);
    stream(NVEC / 2, k1, 1, 0);

    // re-provision: watermark restored, weights erased
    do_provision();
    for (int i = 0; i < ROWS; i++)
      for (int j = 0; j < COLS; j++) wlog[i][j] = 0;
    stream(4, k1, 1, 1);

    check(n_blocked > 0, "mechanism: blocked without key");
    check(n_rejected > 0, "mechanism: invalid key rejected");
    check(n_rekey > 0, "mechanism: key update");
    check(n_correct > 0, "mechanism: correct inference with the key");
    check(n_scrambled > 0, "mechanism: scrambled inference with the wrong key");
    check(n_wm_ok > 0, "mechanism: watermark detected");
    check(n_wm_alarm > 0, "mechanism: watermark alarm");
    check(n_provision > 0, "mechanism: provisioning");
    $display("mechanisms: blocked=%0d rejected=%0d rekey=%0d correct=%0d scrambled=%0d wm_ok=%0d wm_alarm=%0d provision=%0d",
             n_blocked, n_rejected, n_rekey, n_correct, n_scrambled, n_wm_ok, n_wm_alarm, n_provision);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
