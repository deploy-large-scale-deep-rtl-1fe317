// mm_configs_tb: self-checking testbench of the matrix multiplier in its two
// wider-input configurations, Fixed 8x4 (4-bit input codes) and Fixed 8x8
// (8-bit input codes), both with 8-bit weights and a CU latency of 3 cycles.
//
// Both multipliers are built with a 512-step tile buffer to keep the run
// short (the default 4608-step buffer
// is exercised by the end-to-end testbench of the top) and are driven with
// the same random tiles: the 8x8 unit gets full 8-bit codes, the 8x4 unit
// their low nibble. For every job the testbench checks all 16 results of
// each unit against its own integer product, and that done comes exactly
// K + 3 + 1 cycles after the start cycle.
module mm_configs_tb;
  import mm_pkg::*;

  localparam int unsigned ROWS  = ROWS_DEF;
  localparam int unsigned COLS  = COLS_DEF;
  localparam int unsigned WP    = WP_DEF;
  localparam int unsigned K_MAX = 512;
  localparam int unsigned AW    = $clog2(K_MAX);
  localparam int unsigned KW    = $clog2(K_MAX + 1);
  localparam int unsigned ACC4  = acc_width(WP, 4, K_MAX);
  localparam int unsigned ACC8  = acc_width(WP, 8, K_MAX);
  localparam int unsigned NJOBS = 12;

  logic clk = 1'b0;
  logic rst;
  always #5 clk = ~clk;

  logic                                in_wr_en, par_wr_en;
  logic [AW-1:0]                       in_wr_addr, par_wr_addr;
  logic [ROWS-1:0][7:0]                in8;
  logic [ROWS-1:0][3:0]                in4;
  logic [COLS-1:0][WP-1:0]             par_wr_data;
  logic                                start;
  logic [KW-1:0]                       k_len;
  logic                                busy4, busy8, done4, done8;
  logic [ROWS-1:0][COLS-1:0][ACC4-1:0] res4;
  logic [ROWS-1:0][COLS-1:0][ACC8-1:0] res8;

  for (genvar r = 0; r < ROWS; r++) begin : g_lo
    assign in4[r] = in8[r][3:0];
  end

  matrix_multiplier #(.WI(4), .K_MAX(K_MAX)) dut4 (
    .clk, .rst, .in_wr_en, .in_wr_addr, .in_wr_data(in4),
    .par_wr_en, .par_wr_addr, .par_wr_data, .start, .k_len,
    .busy(busy4), .done(done4), .result(res4));

  matrix_multiplier #(.WI(8), .K_MAX(K_MAX)) dut8 (
    .clk, .rst, .in_wr_en, .in_wr_addr, .in_wr_data(in8),
    .par_wr_en, .par_wr_addr, .par_wr_data, .start, .k_len,
    .busy(busy8), .done(done8), .result(res8));

  logic [7:0]           a_m [ROWS][K_MAX];
  logic signed [WP-1:0] b_m [K_MAX][COLS];

  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin : watchdog
    repeat (NJOBS * 3 * (K_MAX + 10) + 100) @(posedge clk);
    failures++;
    $display("mm_configs_tb: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("mm_configs_tb @cyc %0d: %s", cyc, what);
    end
  endtask

  initial begin
    longint e4 [ROWS][COLS];
    longint e8 [ROWS][COLS];
    int n, t0;
    rst = 1'b1; start = 0; k_len = '0;
    in_wr_en = 0; in_wr_addr = '0; in8 = '0;
    par_wr_en = 0; par_wr_addr = '0; par_wr_data = '0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst = 1'b0;
    for (int j = 0; j < NJOBS; j++) begin
      n = (j == 0) ? K_MAX : (j == 1) ? 1 : $urandom_range(1, K_MAX);
      for (int k = 0; k < n; k++) begin
        for (int r = 0; r < ROWS; r++) begin
          a_m[r][k] = (j == 0) ? 8'hff : 8'($urandom);
          in8[r] = a_m[r][k];
        end
        for (int c = 0; c < COLS; c++) begin
          b_m[k][c] = (j == 0) ? -8'sd128 : WP'($urandom);
          par_wr_data[c] = b_m[k][c];
        end
        in_wr_en = 1; in_wr_addr = AW'(k);
        par_wr_en = 1; par_wr_addr = AW'(k);
        @(negedge clk);
      end
      in_wr_en = 0; par_wr_en = 0;
      foreach (e4[r, c]) begin
        e4[r][c] = 0; e8[r][c] = 0;
        for (int k = 0; k < n; k++) begin
          e4[r][c] += longint'(a_m[r][k][3:0]) * longint'(b_m[k][c]);
          e8[r][c] += longint'(a_m[r][k]) * longint'(b_m[k][c]);
        end
      end
      start = 1; k_len = KW'(n); t0 = cyc;
      @(negedge clk);
      start = 0;
      while (!done8) begin
        check(busy4 && busy8 && !done4, "busy low or early done during job");
        @(negedge clk);
      end
      check(done4, "8x4 and 8x8 done not together");
      check(cyc - t0 == n + 4, $sformatf("done after %0d cycles, expected %0d", cyc - t0, n + 4));
      foreach (e4[r, c]) begin
        check($signed(res4[r][c]) == ACC4'(e4[r][c]),
              $sformatf("8x4 C[%0d][%0d] = %0d expected %0d", r, c, $signed(res4[r][c]), e4[r][c]));
        check($signed(res8[r][c]) == ACC8'(e8[r][c]),
              $sformatf("8x8 C[%0d][%0d] = %0d expected %0d", r, c, $signed(res8[r][c]), e8[r][c]));
      end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
