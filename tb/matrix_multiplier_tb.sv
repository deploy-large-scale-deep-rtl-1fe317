// matrix_multiplier_tb: end-to-end, self-checking testbench of the matrix
// multiplier at its default sizes (4x4 CUs, 8-bit weights, 2-bit input
// codes, 4608-step tile buffers).
//
// Every job loads tiles through the two load ports, pulses start and waits
// for done; the testbench then compares all 16 results with the integer
// product A*B it computes itself, and checks that done came exactly
// K + LATENCY + 1 cycles after the start cycle and that busy was high in
// between. The job list covers each mechanism of the design and counts how
// often each one happened; a mechanism that never happened counts as a
// failure:
//   - a job of a single step (K = 1) and a job of the full buffer (K = 4608,
//     the largest VGG-16 kernel, 3x3x512);
//   - a 4-patch x 4-kernel tile of AlexNet's first convolution layer, whose
//     local quantization region is one 11x11x3 kernel (K = 363);
//   - input tile reuse: a new parameter tile against the kept input tile;
//   - parameter tile reuse: a new input tile against the kept parameters;
//   - a job started in the cycle after the previous done (back to back);
//   - a start while busy and starts with k_len = 0 or > K_MAX, all ignored;
//   - extreme operands (all codes 3, weights -128) over the full buffer,
//     the largest magnitude the accumulator has to hold.
module matrix_multiplier_tb;
  import mm_pkg::*;

  localparam int unsigned ROWS    = ROWS_DEF;
  localparam int unsigned COLS    = COLS_DEF;
  localparam int unsigned WP      = WP_DEF;
  localparam int unsigned WI      = WI_DEF;
  localparam int unsigned K_MAX   = K_MAX_DEF;
  localparam int unsigned ACC_W   = acc_width(WP, WI, K_MAX);
  localparam int unsigned LATENCY = cu_latency(WI);
  localparam int unsigned AW      = $clog2(K_MAX);
  localparam int unsigned KW      = $clog2(K_MAX + 1);

  logic clk = 1'b0;
  logic rst;
  always #5 clk = ~clk;

  logic                                 in_wr_en, par_wr_en;
  logic [AW-1:0]                        in_wr_addr, par_wr_addr;
  logic [ROWS-1:0][WI-1:0]              in_wr_data;
  logic [COLS-1:0][WP-1:0]              par_wr_data;
  logic                                 start;
  logic [KW-1:0]                        k_len;
  logic                                 busy, done;
  logic [ROWS-1:0][COLS-1:0][ACC_W-1:0] result;

  matrix_multiplier dut (.*);

  // testbench copies of the tiles
  logic [WI-1:0]        a_m [ROWS][K_MAX];
  logic signed [WP-1:0] b_m [K_MAX][COLS];

  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  typedef enum int {
    M_SINGLE, M_FULL, M_ALEXNET, M_IN_REUSE, M_PAR_REUSE, M_B2B, M_BUSY_START,
    M_BAD_LEN, M_EXTREME, M_COUNT
  } mech_e;
  int    seen [M_COUNT];
  string mech_name [M_COUNT] = '{"single-step job", "full-length job", "AlexNet conv1 tile",
                                 "input tile reuse", "parameter tile reuse", "back-to-back job",
                                 "start while busy", "out-of-range length", "extreme operands"};

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("matrix_multiplier_tb: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("matrix_multiplier_tb @cyc %0d: %s", cyc, what);
    end
  endtask

  // kind: 0 random, 1 extreme (codes all ones, weights -128)
  task automatic load_inputs(input int n, input int kind);
    for (int k = 0; k < n; k++) begin
      for (int r = 0; r < ROWS; r++) begin
        a_m[r][k] = (kind == 1) ? '1 : WI'($urandom);
        in_wr_data[r] = a_m[r][k];
      end
      in_wr_en = 1; in_wr_addr = AW'(k);
      @(negedge clk);
    end
    in_wr_en = 0;
  endtask

  task automatic load_params(input int n, input int kind);
    for (int k = 0; k < n; k++) begin
      for (int c = 0; c < COLS; c++) begin
        b_m[k][c] = (kind == 1) ? -(2 ** (WP - 1)) : WP'($urandom);
        par_wr_data[c] = b_m[k][c];
      end
      par_wr_en = 1; par_wr_addr = AW'(k);
      @(negedge clk);
    end
    par_wr_en = 0;
  endtask

  // Run one job of n steps; optionally poke a start while busy. Returns
  // with the clock at the negedge of the done cycle.
  task automatic run_job(input int n, input bit poke_busy, input string name);
    longint exp_c [ROWS][COLS];
    int     t0, t_done;
    foreach (exp_c[r, c]) begin
      exp_c[r][c] = 0;
      for (int k = 0; k < n; k++) exp_c[r][c] += longint'(a_m[r][k]) * longint'(b_m[k][c]);
    end
    check(!busy, {name, ": busy before start"});
    start = 1; k_len = KW'(n); t0 = cyc;
    @(negedge clk);
    start = 0;
    while (!done) begin
      check(busy, {name, ": busy low while job runs"});
      if (poke_busy && cyc == t0 + 2) begin
        start = 1; k_len = KW'(1); seen[M_BUSY_START]++;
      end
      @(negedge clk);
      start = 0;
    end
    t_done = cyc;
    check(t_done - t0 == n + int'(LATENCY) + 1,
          $sformatf("%s: done after %0d cycles, expected %0d", name, t_done - t0, n + LATENCY + 1));
    foreach (exp_c[r, c])
      check($signed(result[r][c]) == ACC_W'(exp_c[r][c]),
            $sformatf("%s: C[%0d][%0d] = %0d expected %0d", name, r, c,
                      $signed(result[r][c]), exp_c[r][c]));
  endtask

  initial begin
    rst = 1'b1; start = 0; k_len = '0;
    in_wr_en = 0; in_wr_addr = '0; in_wr_data = '0;
    par_wr_en = 0; par_wr_addr = '0; par_wr_data = '0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst = 1'b0;

    // single step
    load_inputs(4, 0); load_params(4, 0);
    run_job(1, 1'b0, "K=1"); seen[M_SINGLE]++;
    @(negedge clk);

    // AlexNet conv1 tile: 4 patches x 4 kernels over one 11x11x3 region
    load_inputs(363, 0); load_params(363, 0);
    run_job(363, 1'b1, "AlexNet conv1 tile"); seen[M_ALEXNET]++;
    @(negedge clk);

    // keep the inputs, new kernels (next group of 4 output channels)
    load_params(363, 0);
    run_job(363, 1'b0, "input reuse"); seen[M_IN_REUSE]++;
    // back to back: start in the cycle after done, same tiles
    @(negedge clk);
    run_job(200, 1'b0, "back to back"); seen[M_B2B]++;
    @(negedge clk);

    // keep the kernels, new patches
    load_inputs(363, 0);
    run_job(363, 1'b0, "parameter reuse"); seen[M_PAR_REUSE]++;
    @(negedge clk);

    // out-of-range lengths are ignored
    start = 1; k_len = '0;
    @(negedge clk);
    start = 1; k_len = KW'(K_MAX + 1);
    @(negedge clk);
    start = 0;
    repeat (K_MAX + 8) begin
      check(!busy && !done, "out-of-range start accepted");
      @(negedge clk);
    end
    seen[M_BAD_LEN]++;

    // full-length job: the largest VGG-16 kernel, 3x3x512
    load_inputs(K_MAX, 0); load_params(K_MAX, 0);
    run_job(K_MAX, 1'b1, "full length"); seen[M_FULL]++;
    @(negedge clk);

    // extreme operands over the full length
    load_inputs(K_MAX, 1); load_params(K_MAX, 1);
    run_job(K_MAX, 1'b0, "extreme"); seen[M_EXTREME]++;
    @(negedge clk);

    // a few more random jobs of random length
    for (int j = 0; j < 5; j++) begin
      automatic int n = $urandom_range(1, 600);
      load_inputs(n, 0); load_params(n, 0);
      run_job(n, (j % 2) == 0, "random");
      @(negedge clk);
    end

    for (int m = 0; m < M_COUNT; m++) begin
      $display("matrix_multiplier_tb: %-22s happened %0d times", mech_name[m], seen[m]);
      check(seen[m] > 0, {mech_name[m], " never happened"});
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
