// psc: Parameter Stream Controller of the matrix multiplier.
//
// Holds one parameter tile, the K x COLS matrix B of signed WP-bit weights
// (one column per convolution kernel / output channel, already quantized
// offline), and schedules it onto the COLS column buses of the CU array, one
// row of B per cycle.
//
// Loading: while wr_en is high, wr_data (row wr_addr of B, element c in lane
// c) is written into the tile buffer. The tile stays until overwritten, so
// one set of kernels can be applied to many input tiles without reloading.
// Streaming: a start pulse while idle, with 1 <= k_len <= K_MAX, reads rows
// 0..k_len-1 in order. The buffer read is registered: row k is on col_b with
// valid high in cycle k+2 after the start cycle (one cycle to register start,
// one for the buffer read), first marks k = 0 and last marks k = k_len-1. A
// start while busy, or with an out of range k_len, is ignored. Because its
// timing is the same as that of the input stream controller, the two run in
// lockstep when started together.
//
// The paper names this block and its role (it schedules the parameter matrix
// elements to the CUs); the tile buffer, the load port, the one-row-per-cycle
// schedule and the flags are this design's own.
module psc
  import mm_pkg::*;
#(
  parameter int unsigned COLS  = COLS_DEF,
  parameter int unsigned WP    = WP_DEF,
  parameter int unsigned K_MAX = K_MAX_DEF,
  localparam int unsigned AW   = (K_MAX > 1) ? $clog2(K_MAX) : 1,
  localparam int unsigned KW   = $clog2(K_MAX + 1)
) (
  input  logic                    clk,
  input  logic                    rst,
  // tile load port
  input  logic                    wr_en,
  input  logic [AW-1:0]           wr_addr,
  input  logic [COLS-1:0][WP-1:0] wr_data,
  // job control
  input  logic                    start,
  input  logic [KW-1:0]           k_len,
  output logic                    busy,
  // column buses to the CU array
  output logic [COLS-1:0][WP-1:0] col_b,
  output logic                    valid,
  output logic                    first,
  output logic                    last
);

  logic [COLS*WP-1:0] mem [K_MAX];

  logic          run;
  logic [AW-1:0] rd_k;
  logic [KW-1:0] len_q;
  logic          accept;
  logic          rd_last;

  assign accept  = start && !run && (k_len != '0) && (k_len <= KW'(K_MAX));
  assign rd_last = (KW'(rd_k) == len_q - KW'(1));
  assign busy    = run;

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      run   <= 1'b0;
      rd_k  <= '0;
      len_q <= '0;
    end else if (accept) begin
      run   <= 1'b1;
      rd_k  <= '0;
      len_q <= k_len;
    end else if (run) begin
      rd_k <= rd_k + AW'(1);
      if (rd_last) run <= 1'b0;
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      valid <= 1'b0;
      first <= 1'b0;
      last  <= 1'b0;
      col_b <= '0;
    end else begin
      valid <= run;
      first <= run && (rd_k == '0);
      last  <= run && rd_last;
      if (run) col_b <= mem[rd_k];
    end
  end

endmodule
