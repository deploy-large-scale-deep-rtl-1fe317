// lq_conv_tb: workload testbench of the matrix multiplier (default 8x2
// configuration) running convolution tiles with local quantization regions:
// one tile of AlexNet's first layer and one tile of a VGG-16 3x3 layer.
//
// Synthetic real-valued data stands in for the trained networks: 4 input
// patches and 4 kernels of K = 11x11x3 = 363 values (AlexNet conv1), then of
// K = 3x3x64 = 576 values (a VGG-16 layer with 64 input channels). Patch r
// has a range of 2^r, the range also changes 4x from one slice of the
// receptive field to the next (33 values for AlexNet, one channel's 3x3
// window for VGG-16), and kernel c has a range of 2^c, so that a single
// scale fits the data badly and local scales fit it better. The testbench quantizes the data the way the host would:
//   s = (x_max - x_min) / (2^n - 1),  q = round((x - x_min) / s)
// with 8-bit weight codes (stored in the multiplier as q - 128, a signed
// byte) and 2-bit input codes. It does so under three region choices:
//   DQ  one scale for the whole layer tile (all kernels, all patches);
//   LQ  one region per kernel (weights) and per patch (inputs), K values;
//   LQs regions of 33 values (11 regions per AlexNet kernel);
//   LQ3 3x3 regions, one channel's window (64 regions per VGG-16 kernel).
// Each region is one multiplier job of its length. For every job the 16
// hardware sums are checked exactly against the testbench's integer sums;
// the host-side dequantization
//   sum w*a ~= N*wmin*amin + wmin*sa*sum(qa) + amin*sw*sum(qw)
//              + sw*sa*sum(qw*qa),  sum(qw*qa) = C + 128*sum(qa)
// then rebuilds each output, which must equal the product of the
// dequantized values to within rounding, and the mean error against the
// exact real-valued output, each output's error divided by the scale of its
// patch and kernel, must shrink from DQ to LQ to the smaller regions.
module lq_conv_tb;
  import mm_pkg::*;

  localparam int unsigned ROWS  = ROWS_DEF;
  localparam int unsigned COLS  = COLS_DEF;
  localparam int unsigned WP    = WP_DEF;
  localparam int unsigned WI    = WI_DEF;
  localparam int unsigned K_MAX = K_MAX_DEF;
  localparam int unsigned ACC_W = acc_width(WP, WI, K_MAX);
  localparam int unsigned AW    = $clog2(K_MAX);
  localparam int unsigned KW    = $clog2(K_MAX + 1);
  localparam int          K_ALEX = 363;      // AlexNet conv1 kernel, 11 x 11 x 3
  localparam int          SMALL  = 33;       // small AlexNet region, 11 per kernel
  localparam int          K_VGG  = 576;      // VGG-16 3 x 3 kernel over 64 channels
  localparam int          WIN    = 9;        // 3 x 3 region, one channel's window
  localparam int          K      = K_VGG;    // size of the data arrays

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

  int  kt;                 // length of the current layer's receptive field
  real act [ROWS][K];      // activations of the 4 patches
  real wgt [K][COLS];      // the 4 kernels
  real exact [ROWS][COLS];

  int checks = 0, failures = 0;
  int n_jobs = 0;

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("lq_conv_tb: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("lq_conv_tb: %s", what);
    end
  endtask

  // Fixed-seed xorshift32 generator, so that the layer data (and with it
  // the error comparison) is the same in every run.
  int unsigned prng = 32'h2545_f491;
  function automatic real urand();
    prng ^= prng << 13;
    prng ^= prng >> 17;
    prng ^= prng << 5;
    return real'(prng % 1000001) / 1000000.0;
  endfunction

  function automatic int quant(input real x, input real xmin, input real s, input int maxq);
    int q;
    if (s == 0.0) return 0;
    q = $rtoi((x - xmin) / s + 0.5);
    return (q > maxq) ? maxq : q;
  endfunction

  // Quantize with region length rlen (DQ: rlen = kt and one scale over the
  // whole tile), run every region through the multiplier, dequantize, and
  // return the mean absolute error against the exact outputs.
  task automatic run_scheme(input string name, input int rlen, input bit layer_wide,
                            output real mean_err);
    real wmin [COLS], wmax [COLS], amin [ROWS], amax [ROWS];
    real sw [COLS], sa [ROWS];
    real out [ROWS][COLS];
    real deq [ROWS][COLS];
    int  qw [K][COLS];
    int  qa [ROWS][K];
    longint isum [ROWS][COLS];
    longint sqa [ROWS], sqw [COLS];
    int  nreg, t0, t;
    real err;
    foreach (out[r, c]) begin out[r][c] = 0.0; deq[r][c] = 0.0; end
    nreg = kt / rlen;
    for (int g = 0; g < nreg; g++) begin
      int base = g * rlen;
      // region bounds
      for (int c = 0; c < COLS; c++) begin
        wmin[c] = wgt[base][c]; wmax[c] = wgt[base][c];
        for (int j = base; j < base + rlen; j++) begin
          if (wgt[j][c] < wmin[c]) wmin[c] = wgt[j][c];
          if (wgt[j][c] > wmax[c]) wmax[c] = wgt[j][c];
        end
      end
      for (int r = 0; r < ROWS; r++) begin
        amin[r] = act[r][base]; amax[r] = act[r][base];
        for (int j = base; j < base + rlen; j++) begin
          if (act[r][j] < amin[r]) amin[r] = act[r][j];
          if (act[r][j] > amax[r]) amax[r] = act[r][j];
        end
      end
      if (layer_wide) begin
        real lo = wmin[0], hi = wmax[0], alo = amin[0], ahi = amax[0];
        for (int c = 1; c < COLS; c++) begin
          if (wmin[c] < lo) lo = wmin[c];
          if (wmax[c] > hi) hi = wmax[c];
        end
        for (int r = 1; r < ROWS; r++) begin
          if (amin[r] < alo) alo = amin[r];
          if (amax[r] > ahi) ahi = amax[r];
        end
        for (int c = 0; c < COLS; c++) begin wmin[c] = lo; wmax[c] = hi; end
        for (int r = 0; r < ROWS; r++) begin amin[r] = alo; amax[r] = ahi; end
      end
      for (int c = 0; c < COLS; c++) sw[c] = (wmax[c] - wmin[c]) / real'((1 << WP) - 1);
      for (int r = 0; r < ROWS; r++) sa[r] = (amax[r] - amin[r]) / real'((1 << WI) - 1);
      // quantize and load the region, step j - base at address j - base
      for (int j = base; j < base + rlen; j++) begin
        for (int c = 0; c < COLS; c++) begin
          qw[j][c] = quant(wgt[j][c], wmin[c], sw[c], (1 << WP) - 1);
          par_wr_data[c] = WP'(qw[j][c] - (1 << (WP - 1)));
        end
        for (int r = 0; r < ROWS; r++) begin
          qa[r][j] = quant(act[r][j], amin[r], sa[r], (1 << WI) - 1);
          in_wr_data[r] = WI'(qa[r][j]);
        end
        in_wr_en = 1; in_wr_addr = AW'(j - base);
        par_wr_en = 1; par_wr_addr = AW'(j - base);
        @(negedge clk);
      end
      in_wr_en = 0; par_wr_en = 0;
      // run the job
      start = 1; k_len = KW'(rlen); t0 = 0;
      @(negedge clk);
      start = 0;
      t = 1;
      while (!done) begin @(negedge clk); t++; end
      n_jobs++;
      check(t == rlen + int'(cu_latency(WI)) + 1,
            $sformatf("%s region %0d: done after %0d cycles", name, g, t));
      // exact integer check and dequantization
      foreach (sqa[r]) begin
        sqa[r] = 0;
        for (int j = base; j < base + rlen; j++) sqa[r] += longint'(qa[r][j]);
      end
      foreach (sqw[c]) begin
        sqw[c] = 0;
        for (int j = base; j < base + rlen; j++) sqw[c] += longint'(qw[j][c]);
      end
      foreach (isum[r, c]) begin
        real rs;
        isum[r][c] = 0;
        for (int j = base; j < base + rlen; j++)
          isum[r][c] += (longint'(qw[j][c]) - (longint'(1) << (WP - 1))) * longint'(qa[r][j]);
        check($signed(result[r][c]) == ACC_W'(isum[r][c]),
              $sformatf("%s region %0d C[%0d][%0d] = %0d expected %0d", name, g, r, c,
                        $signed(result[r][c]), isum[r][c]));
        rs = real'(rlen) * wmin[c] * amin[r] + wmin[c] * sa[r] * real'(sqa[r])
           + amin[r] * sw[c] * real'(sqw[c])
           + sw[c] * sa[r] * real'(longint'($signed(result[r][c])) + (longint'(1) << (WP - 1)) * sqa[r]);
        out[r][c] += rs;
        for (int j = base; j < base + rlen; j++)
          deq[r][c] += (wmin[c] + sw[c] * qw[j][c]) * (amin[r] + sa[r] * qa[r][j]);
      end
      @(negedge clk);
    end
    err = 0.0;
    foreach (out[r, c]) begin
      real d = out[r][c] - deq[r][c];
      if (d < 0) d = -d;
      check(d < 1e-6 * (1.0 + (deq[r][c] < 0 ? -deq[r][c] : deq[r][c])),
            $sformatf("%s: dequantized C[%0d][%0d] %f vs %f", name, r, c, out[r][c], deq[r][c]));
      // error relative to the data's own scale, so that every output counts
      d = (out[r][c] - exact[r][c]) / real'((1 << r) * (1 << c));
      err += (d < 0) ? -d : d;
    end
    mean_err = err / real'(ROWS * COLS);
    $display("lq_conv_tb: %-4s region %3d values, mean scaled |error| %f", name, rlen, mean_err);
  endtask

  // Synthetic layer data. Activations are ReLU-like (non-negative); patch r
  // has a range of 2^r and the range also grows 4x from one slice of
  // slice_len values to the next, wrapping after four slices. Kernel c has
  // a range of 2^c.
  task automatic gen_layer(input int len, input int slice_len);
    real mag = 0.0;
    kt = len;
    for (int r = 0; r < ROWS; r++)
      for (int j = 0; j < kt; j++)
        act[r][j] = real'(1 << r) * real'(1 << (2 * ((j / slice_len) % 4))) * 0.05 * urand();
    for (int j = 0; j < kt; j++)
      for (int c = 0; c < COLS; c++)
        wgt[j][c] = real'(1 << c) * 0.05 * (urand() - 0.5)
                  * (1.0 + real'(j % slice_len) / real'(slice_len));
    foreach (exact[r, c]) begin
      exact[r][c] = 0.0;
      for (int j = 0; j < kt; j++) exact[r][c] += wgt[j][c] * act[r][j];
      mag += (exact[r][c] < 0) ? -exact[r][c] : exact[r][c];
    end
    $display("lq_conv_tb: layer tile K = %0d, mean |output| %f", kt, mag / real'(ROWS * COLS));
  endtask

  initial begin
    real e_dq, e_lq, e_lqs;
    rst = 1'b1; start = 0; k_len = '0;
    in_wr_en = 0; in_wr_addr = '0; in_wr_data = '0;
    par_wr_en = 0; par_wr_addr = '0; par_wr_data = '0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst = 1'b0;

    // AlexNet conv1 tile: slices of 33 values (11x1x3)
    gen_layer(K_ALEX, SMALL);
    run_scheme("DQ",  K_ALEX, 1'b1, e_dq);
    run_scheme("LQ",  K_ALEX, 1'b0, e_lq);
    run_scheme("LQs", SMALL,  1'b0, e_lqs);
    check(e_lq < e_dq,  "AlexNet: local regions did not reduce the error of a layer-wide scale");
    check(e_lqs < e_lq, "AlexNet: smaller regions did not reduce the error further");

    // VGG-16 3x3 tile over 64 channels, channel-major: slices are channels
    gen_layer(K_VGG, WIN);
    run_scheme("DQ",  K_VGG, 1'b1, e_dq);
    run_scheme("LQ",  K_VGG, 1'b0, e_lq);
    run_scheme("LQ3", WIN,   1'b0, e_lqs);
    check(e_lq < e_dq,  "VGG-16: local regions did not reduce the error of a layer-wide scale");
    check(e_lqs < e_lq, "VGG-16: 3x3 regions did not reduce the error further");

    check(n_jobs == 2 + K_ALEX / SMALL + 2 + K_VGG / WIN, $sformatf("%0d jobs run", n_jobs));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
