// isc_tb: self-checking testbench of the input stream controller (isc), at
// its default sizes (4 lanes of 2-bit codes, 4608-entry tile buffer).
//
// The testbench writes a random input tile through the load port, keeping its
// own copy, then starts jobs of random length and checks, cycle by cycle,
// that column k appears on row_a with valid high exactly k+2 cycles after the
// start, that first and last mark the first and final column, that busy
// covers the job, and that nothing is streamed afterwards. It also checks
// that a start while busy and a start with k_len = 0 or k_len > K_MAX are
// ignored, that a tile can be replayed without reloading, that a partial
// rewrite of the tile is seen by the next job, and runs one full-length job.
module isc_tb;
  import mm_pkg::*;

  localparam int unsigned LANES = ROWS_DEF;
  localparam int unsigned W     = WI_DEF;
  localparam int unsigned K_MAX = K_MAX_DEF;
  localparam int unsigned AW    = $clog2(K_MAX);
  localparam int unsigned KW    = $clog2(K_MAX + 1);

  logic clk = 1'b0;
  logic rst;
  always #5 clk = ~clk;

  logic                     wr_en;
  logic [AW-1:0]            wr_addr;
  logic [LANES-1:0][W-1:0]  wr_data;
  logic                     start;
  logic [KW-1:0]            k_len;
  logic                     busy;
  logic [LANES-1:0][W-1:0]  lanes;
  logic                     valid, first, last;

  isc dut (
    .clk, .rst, .wr_en, .wr_addr, .wr_data, .start, .k_len, .busy,
    .row_a(lanes), .valid, .first, .last);

  logic [LANES-1:0][W-1:0] model [K_MAX];

  int checks = 0, failures = 0;
  int n_ignored = 0, n_replays = 0;

  initial begin : watchdog
    repeat (60000) @(posedge clk);
    failures++;
    $display("isc_tb: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("isc_tb @%0t: %s", $time, what);
    end
  endtask

  task automatic write_tile(input int from, input int upto);
    for (int k = from; k < upto; k++) begin
      for (int l = 0; l < LANES; l++) model[k][l] = W'($urandom);
      wr_en = 1; wr_addr = AW'(k); wr_data = model[k];
      @(negedge clk);
    end
    wr_en = 0;
  endtask

  // Start a job of length n, poke an extra start in the middle when
  // poke_busy is set, and check the whole stream plus two idle cycles.
  task automatic run_job(input int n, input bit poke_busy);
    start = 1; k_len = KW'(n);
    @(negedge clk);
    start = 0;
    for (int k = 0; k < n; k++) begin
      check(busy, "busy low during job");
      if (poke_busy && k == n / 2) begin start = 1; k_len = KW'(1); n_ignored++; end
      @(negedge clk);
      start = 0;
      check(valid, $sformatf("valid low at step %0d", k));
      check(lanes == model[k], $sformatf("step %0d data %h expected %h", k, lanes, model[k]));
      check(first == (k == 0), $sformatf("first wrong at step %0d", k));
      check(last == (k == n - 1), $sformatf("last wrong at step %0d", k));
    end
    check(!busy, "busy still high after last step");
    repeat (2) begin
      @(negedge clk);
      check(!valid && !first && !last, "stream continues after job");
    end
  endtask

  initial begin
    rst = 1'b1; wr_en = 0; wr_addr = '0; wr_data = '0; start = 0; k_len = '0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst = 1'b0;
    check(!busy && !valid, "not idle after reset");
    write_tile(0, 300);
    run_job(1, 1'b0);
    run_job(300, 1'b1);
    n_replays++;
    run_job(137, 1'b0);
    // out-of-range lengths are ignored
    start = 1; k_len = '0;
    @(negedge clk);
    start = 1; k_len = KW'(K_MAX + 1);
    @(negedge clk);
    start = 0; n_ignored += 2;
    repeat (2) begin
      check(!busy && !valid, "out-of-range start accepted");
      @(negedge clk);
    end
    // partial rewrite seen by the next job
    write_tile(10, 20);
    run_job(25, 1'b0);
    for (int j = 0; j < 6; j++) run_job($urandom_range(1, 300), (j % 2) == 1);
    // full-length tile
    write_tile(300, K_MAX);
    run_job(K_MAX, 1'b0);
    $display("isc_tb: %0d ignored starts, %0d replays", n_ignored, n_replays);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
