// crossbar_workloads_tb: the three array sizes 10x10, 128x10 and 256x128
// run as workloads on the default-size secured crossbar (256 x 128).
//
// A smaller array is mapped onto the corner of the large one: its R logical
// inputs drive inputs 0..R-1 (the others are held at zero), its C weight
// columns are weight columns 0..C-1, and the owner programs W[i][j] into
// physical row pi(i) of the loaded key. For each size the test provisions
// the array, programs a random R x C weight matrix (conductance codes 0..15),
// streams random input vectors (codes 1..255) and checks every column: the
// first C carry sum_i v_i * W[i][j], the rest carry zero, and the watermark
// is detected. The permutation and the expected currents come from the
// test's own reference model.
module crossbar_workloads_tb;
  localparam int unsigned ROWS = 256, COLS = 128, IN_BITS = 8, CELL_BITS = 4;
  localparam int unsigned TOT = COLS + 2, T = ROWS / 3, KEY_BITS = 3 * T;
  localparam int unsigned I_BITS = IN_BITS + CELL_BITS + $clog2(ROWS + 1);
  localparam int unsigned NVEC = 8;

  typedef logic [COLS-1:0][I_BITS-1:0] out_t;

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
  logic [1:0][I_BITS-1:0] out_wm_i;
  logic wm_detected, wm_alarm;
  logic [1:0] wm_col_match;

  secure_crossbar_top dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int unsigned dest_tab [6][3] = '{'{0,1,2}, '{0,2,1}, '{1,0,2},
                                   '{1,2,0}, '{2,0,1}, '{2,1,0}};
  int unsigned wlog [ROWS][COLS];
  logic [KEY_BITS-1:0] key;

  function automatic void check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endfunction

  function automatic int unsigned pi(int unsigned i);
    if (i >= 3 * T) return i;
    return (i % T) + T * dest_tab[key[3*(i % T) +: 3]][i / T];
  endfunction

  task automatic run_workload(int unsigned R, int unsigned C);
    int errs = 0, ok_wm = 0;
    logic [ROWS-1:0][IN_BITS-1:0] v;
    out_t e;
    @(negedge clk); provision = 1;
    @(negedge clk); provision = 0;
    for (int i = 0; i < ROWS; i++)
      for (int j = 0; j < COLS; j++) wlog[i][j] = 0;
    for (int i = 0; i < R; i++)
      for (int j = 0; j < C; j++) begin
        wlog[i][j] = $urandom_range(0, 15);
        @(negedge clk);
        prog_en = 1; prog_row = 8'(pi(i)); prog_col = 8'(j); prog_g = 4'(wlog[i][j]);
      end
    @(negedge clk); prog_en = 0;
    for (int n = 0; n < NVEC; n++) begin
      v = '0;
      for (int i = 0; i < R; i++) v[i] = 8'($urandom_range(1, 255));
      for (int j = 0; j < COLS; j++) begin
        int unsigned s = 0;
        for (int i = 0; i < ROWS; i++) s += v[i] * wlog[i][j];
        e[j] = I_BITS'(s);
      end
      in_v = v; in_valid = 1;
      @(negedge clk); in_valid = 0;
      @(negedge clk);
      check(out_valid, $sformatf("%0dx%0d: result valid", R, C));
      for (int j = 0; j < COLS; j++) if (out_i[j] != e[j]) errs++;
      if (wm_detected) ok_wm++;
    end
    check(errs == 0, $sformatf("%0dx%0d: %0d column results wrong", R, C, errs));
    check(ok_wm == NVEC, $sformatf("%0dx%0d: watermark detected", R, C));
    $display("workload %0dx%0d: %0d vectors, %0d column errors, watermark %0d/%0d",
             R, C, NVEC, errs, ok_wm, NVEC);
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < T; t++) key[3*t +: 3] = 3'($urandom_range(0, 5));
    @(negedge clk); key_in = key; key_load = 1;
    @(negedge clk); key_load = 0;
    check(key_valid, "key loaded");
    run_workload(10, 10);
    run_workload(128, 10);
    run_workload(256, 128);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
