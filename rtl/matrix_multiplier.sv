// matrix_multiplier: low-precision fixed-point matrix multiplier built from an
// input stream controller (ISC), a parameter stream controller (PSC) and a
// 4x4 array of multiply-accumulate computing units (CUs).
//
// One job multiplies a ROWS x K matrix A of WI-bit quantized input codes by a
// K x COLS matrix B of WP-bit weights and returns the ROWS x COLS integer
// product C = A * B. For a convolution layer, a row of A is one input patch
// of a local quantization region (e.g. the 11x11x3 = 363 values of an AlexNet
// conv1 receptive field), a column of B is one quantized kernel, and each C
// entry is the integer partial sum that the host rescales with the region's
// quantization steps.
//
// Use:
//   1. Load A column by column through the in_wr_* port (address k holds
//      A[0..ROWS-1][k]) and B row by row through the par_wr_* port (address k
//      holds B[k][0..COLS-1]). Either tile may be kept for the next job.
//   2. Pulse start with k_len = K while busy is low.
//   3. The ISC and PSC stream step k to the array in cycle k+2; the CUs add
//      16 products per cycle. done pulses in cycle K + LATENCY + 1 after the
//      start cycle (K+3 for the 8x2 configuration, K+4 for 8x4 and 8x8),
//      when result holds C; result stays until the next job begins to
//      arrive at the CUs. busy is high from the cycle after start up to and
//      including the done cycle; start is ignored while it is high.
//
// The block split (ISC, PSC, 4x4 CUs), the row/column bus wiring, the
// widths Wp = 8 and Wi = n and the CU latencies follow the paper's matrix
// multiplier. The tile buffers, the load ports, the start/busy/done job
// protocol and the flat result port are this design's own choices.
module matrix_multiplier
  import mm_pkg::*;
#(
  parameter int unsigned ROWS    = ROWS_DEF,
  parameter int unsigned COLS    = COLS_DEF,
  parameter int unsigned WP      = WP_DEF,
  parameter int unsigned WI      = WI_DEF,
  parameter int unsigned K_MAX   = K_MAX_DEF,
  parameter int unsigned ACC_W   = acc_width(WP, WI, K_MAX),
  parameter int unsigned LATENCY = cu_latency(WI),
  localparam int unsigned AW     = (K_MAX > 1) ? $clog2(K_MAX) : 1,
  localparam int unsigned KW     = $clog2(K_MAX + 1)
) (
  input  logic                                 clk,
  input  logic                                 rst,
  // input tile load port (to the ISC)
  input  logic                                 in_wr_en,
  input  logic [AW-1:0]                        in_wr_addr,
  input  logic [ROWS-1:0][WI-1:0]              in_wr_data,
  // parameter tile load port (to the PSC)
  input  logic                                 par_wr_en,
  input  logic [AW-1:0]                        par_wr_addr,
  input  logic [COLS-1:0][WP-1:0]              par_wr_data,
  // job control
  input  logic                                 start,
  input  logic [KW-1:0]                        k_len,
  output logic                                 busy,
  output logic                                 done,
  // result tile, C[r][c] as signed ACC_W-bit integers
  output logic [ROWS-1:0][COLS-1:0][ACC_W-1:0] result
);

  logic                    go;
  logic                    isc_busy, psc_busy;
  logic [ROWS-1:0][WI-1:0] row_a;
  logic [COLS-1:0][WP-1:0] col_b;
  logic                    isc_valid, isc_first, isc_last;
  logic                    psc_valid, psc_first, psc_last;
  logic                    job_q;

  // A job starts only while idle and with a length the buffers can hold;
  // both controllers see the same start and therefore run in lockstep.
  assign go   = start && !job_q && (k_len != '0) && (k_len <= KW'(K_MAX));
  assign busy = job_q;

  always_ff @(posedge clk) begin
    if (rst)       job_q <= 1'b0;
    else if (go)   job_q <= 1'b1;
    else if (done) job_q <= 1'b0;
  end

  isc #(
    .ROWS (ROWS),
    .WI   (WI),
    .K_MAX(K_MAX)
  ) u_isc (
    .clk    (clk),
    .rst    (rst),
    .wr_en  (in_wr_en),
    .wr_addr(in_wr_addr),
    .wr_data(in_wr_data),
    .start  (go),
    .k_len  (k_len),
    .busy   (isc_busy),
    .row_a  (row_a),
    .valid  (isc_valid),
    .first  (isc_first),
    .last   (isc_last)
  );

  psc #(
    .COLS (COLS),
    .WP   (WP),
    .K_MAX(K_MAX)
  ) u_psc (
    .clk    (clk),
    .rst    (rst),
    .wr_en  (par_wr_en),
    .wr_addr(par_wr_addr),
    .wr_data(par_wr_data),
    .start  (go),
    .k_len  (k_len),
    .busy   (psc_busy),
    .col_b  (col_b),
    .valid  (psc_valid),
    .first  (psc_first),
    .last   (psc_last)
  );

  cu_array #(
    .ROWS   (ROWS),
    .COLS   (COLS),
    .WP     (WP),
    .WI     (WI),
    .ACC_W  (ACC_W),
    .LATENCY(LATENCY)
  ) u_array (
    .clk     (clk),
    .rst     (rst),
    .in_valid(isc_valid && psc_valid),
    .clear   (isc_first),
    .last    (isc_last),
    .row_a   (row_a),
    .col_b   (col_b),
    .result  (result),
    .done    (done)
  );

  // The two stream controllers must stay in lockstep.
  a_lockstep : assert property (@(posedge clk) disable iff (rst)
      (isc_valid == psc_valid) && (isc_first == psc_first) && (isc_last == psc_last)
      && (isc_busy == psc_busy))
    else $error("matrix_multiplier: ISC and PSC out of step");

  // A job never sees a second first-step flag before its done.
  a_single_job : assert property (@(posedge clk) disable iff (rst)
      isc_first |-> (job_q && !done))
    else $error("matrix_multiplier: stream step outside a job");

endmodule
