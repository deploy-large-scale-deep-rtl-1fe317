// cu_array_tb: self-checking testbench of the 4x4 CU array (cu_array), in the
// default 8x2 configuration.
//
// For each job the testbench draws a random 4xK matrix A of 2-bit codes and a
// random Kx4 matrix B of 8-bit signed weights, presents step k (column k of A
// on the row buses, row k of B on the column buses) in consecutive cycles,
// and checks that done rises exactly LATENCY cycles after the last step and
// that all 16 results then equal the integer product A*B worked out by the
// testbench. Jobs run back to back (the next job's first step straight
// after the previous last step) as well as with idle gaps, and include the
// single-step case K = 1.
module cu_array_tb;
  import mm_pkg::*;

  localparam int unsigned ROWS    = ROWS_DEF;
  localparam int unsigned COLS    = COLS_DEF;
  localparam int unsigned WP      = WP_DEF;
  localparam int unsigned WI      = WI_DEF;
  localparam int unsigned ACC_W   = acc_width(WP, WI, K_MAX_DEF);
  localparam int unsigned LATENCY = cu_latency(WI);
  localparam int unsigned NJOBS   = 40;
  localparam int unsigned KLIM    = 64;

  logic clk = 1'b0;
  logic rst;
  always #5 clk = ~clk;

  logic                                 in_valid, clear, last;
  logic [ROWS-1:0][WI-1:0]              row_a;
  logic [COLS-1:0][WP-1:0]              col_b;
  logic [ROWS-1:0][COLS-1:0][ACC_W-1:0] result;
  logic                                 done;

  cu_array dut (.*);

  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin : watchdog
    repeat (NJOBS * (KLIM + 20) + 100) @(posedge clk);
    failures++;
    $display("cu_array_tb: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Reference results of each job, queued until the done pulse.
  longint exp_c [$][ROWS][COLS];
  int     exp_cyc [$];
  int     jobs_done = 0;

  // Results are checked in the cycle done is high.
  always @(negedge clk) begin
    if (!rst && done) begin
      checks++;
      if (exp_cyc.size() == 0 || exp_cyc[0] != cyc) begin
        failures++;
        $display("cyc %0d: unexpected done (expected at %0d)", cyc,
                 (exp_cyc.size() != 0) ? exp_cyc[0] : -1);
      end
      if (exp_c.size() != 0) begin
        for (int r = 0; r < ROWS; r++)
          for (int c = 0; c < COLS; c++) begin
            checks++;
            if ($signed(result[r][c]) != ACC_W'(exp_c[0][r][c])) begin
              failures++;
              if (failures < 10) $display("job %0d C[%0d][%0d] = %0d expected %0d", jobs_done,
                                          r, c, $signed(result[r][c]), exp_c[0][r][c]);
            end
          end
        void'(exp_c.pop_front());
        void'(exp_cyc.pop_front());
      end
      jobs_done++;
    end
  end

  initial begin
    longint acc [ROWS][COLS];
    int     k_len;
    rst = 1'b1; in_valid = 0; clear = 0; last = 0; row_a = '0; col_b = '0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst = 1'b0;
    for (int j = 0; j < NJOBS; j++) begin
      k_len = (j == 3) ? 1 : (j == 5) ? KLIM : $urandom_range(1, KLIM);
      foreach (acc[r, c]) acc[r][c] = 0;
      for (int k = 0; k < k_len; k++) begin
        for (int r = 0; r < ROWS; r++) row_a[r] = WI'($urandom);
        for (int c = 0; c < COLS; c++) col_b[c] = WP'($urandom);
        if (j == 7) begin                      // extreme operands
          row_a = '1;
          for (int c = 0; c < COLS; c++) col_b[c] = ((c % 2) != 0) ? 8'h80 : 8'h7f;
        end
        for (int r = 0; r < ROWS; r++)
          for (int c = 0; c < COLS; c++)
            acc[r][c] += longint'(row_a[r]) * longint'($signed(col_b[c]));
        in_valid = 1; clear = (k == 0); last = (k == k_len - 1);
        if (last) begin
          exp_c.push_back(acc);
          exp_cyc.push_back(cyc + LATENCY);
        end
        @(negedge clk);
      end
      in_valid = 0; clear = 0; last = 0;
      if (j % 3 == 0) repeat ($urandom_range(1, 4)) @(negedge clk);
    end
    repeat (LATENCY + 4) @(negedge clk);
    checks++;
    if (jobs_done != NJOBS || exp_c.size() != 0) begin
      failures++;
      $display("cu_array_tb: %0d of %0d jobs completed", jobs_done, NJOBS);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
