// cu_array: the ROWS x COLS grid of computing units (4 x 4 by default).
//
// The grid is a broadcast array: row r shares one WI-bit input bus driven by
// the input stream controller, column c shares one WP-bit parameter bus
// driven by the parameter stream controller, and CU(r,c) receives the pair
// (row_a[r], col_b[c]). Streaming column k of the input matrix A together
// with row k of the parameter matrix B, for k = 0..K-1, makes CU(r,c)
// accumulate C[r][c] = sum_k A[r][k] * B[k][c]; the whole 4x4 output tile is
// produced in K cycles plus the CU latency, 16 products per cycle.
//
// The bus topology (one input bus per row, one parameter bus per column, 4x4
// CUs) follows the paper's top-level drawing of the matrix multiplier. The
// valid/clear/last step flags are common to all CUs, so all 16 units run in
// lockstep; done is the AND of their done outputs (this design's choice).
module cu_array
  import mm_pkg::*;
#(
  parameter int unsigned ROWS    = ROWS_DEF,
  parameter int unsigned COLS    = COLS_DEF,
  parameter int unsigned WP      = WP_DEF,
  parameter int unsigned WI      = WI_DEF,
  parameter int unsigned ACC_W   = acc_width(WP, WI, K_MAX_DEF),
  parameter int unsigned LATENCY = cu_latency(WI)
) (
  input  logic                                  clk,
  input  logic                                  rst,
  input  logic                                  in_valid,
  input  logic                                  clear,
  input  logic                                  last,
  input  logic [ROWS-1:0][WI-1:0]               row_a,   // ISC buses
  input  logic [COLS-1:0][WP-1:0]               col_b,   // PSC buses
  output logic [ROWS-1:0][COLS-1:0][ACC_W-1:0]  result,  // C[r][c], signed
  output logic                                  done
);

  logic [ROWS-1:0][COLS-1:0] cu_done;

  for (genvar r = 0; r < ROWS; r++) begin : g_row
    for (genvar c = 0; c < COLS; c++) begin : g_col
      cu #(
        .WP     (WP),
        .WI     (WI),
        .ACC_W  (ACC_W),
        .LATENCY(LATENCY)
      ) u_cu (
        .clk     (clk),
        .rst     (rst),
        .in_valid(in_valid),
        .clear   (clear),
        .last    (last),
        .input_a (row_a[r]),
        .input_b (col_b[c]),
        .result  (result[r][c]),
        .done    (cu_done[r][c])
      );
    end
  end

  assign done = &cu_done;

endmodule
