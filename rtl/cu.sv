// cu: Computing Unit of the matrix multiplier, a pipelined multiply-accumulator.
//
// Each cycle in which in_valid is high, the unit multiplies input_a (an
// unsigned WI-bit quantized input code) by input_b (a signed WP-bit weight)
// and adds the product to its accumulator. An operand pair that arrives with
// clear high starts a new dot product: the accumulator is loaded with that
// product instead of adding to it. An operand pair that arrives with last
// high ends the dot product; done pulses for one cycle when result holds the
// finished sum and result keeps it until the next valid product arrives.
//
// Structure (multiplier, adder with feedback, Clear into the adder, clock
// and reset into both) follows the CU drawing of the paper; the 2-cycle
// latency for WI <= 2 and 3 cycles above it follows its resource table
// (Fixed 8x2: 2, Fixed 8x4 and 8x8: 3). Latency counts from the cycle the
// operands are presented to the first cycle result shows them:
//   LATENCY 2: product register, accumulator register
//   LATENCY 3: operand register, product register, accumulator register
// This design's own choices: unsigned input codes and two's complement
// weights, Clear carried down the pipeline together with its operands,
// the last/done flags, synchronous active-high reset. clear and last may
// only be high together with in_valid (checked by an assertion).
module cu
  import mm_pkg::*;
#(
  parameter int unsigned WP      = WP_DEF,
  parameter int unsigned WI      = WI_DEF,
  parameter int unsigned ACC_W   = acc_width(WP, WI, K_MAX_DEF),
  parameter int unsigned LATENCY = cu_latency(WI)
) (
  input  logic                    clk,
  input  logic                    rst,
  input  logic                    in_valid,
  input  logic                    clear,
  input  logic                    last,
  input  logic [WI-1:0]           input_a,
  input  logic signed [WP-1:0]    input_b,
  output logic signed [ACC_W-1:0] result,
  output logic                    done
);

  localparam int unsigned PW = WP + WI + 1;  // signed product width

  if (LATENCY != 2 && LATENCY != 3) begin : g_bad_latency
    $error("cu: LATENCY must be 2 or 3");
  end

  // ---- optional operand stage ---------------------------------------------
  logic                 s0_valid, s0_clear, s0_last;
  logic [WI-1:0]        s0_a;
  logic signed [WP-1:0] s0_b;

  if (LATENCY == 3) begin : g_opreg
    always_ff @(posedge clk) begin
      if (rst) begin
        s0_valid <= 1'b0;
        s0_clear <= 1'b0;
        s0_last  <= 1'b0;
        s0_a     <= '0;
        s0_b     <= '0;
      end else begin
        s0_valid <= in_valid;
        s0_clear <= clear;
        s0_last  <= last;
        s0_a     <= input_a;
        s0_b     <= input_b;
      end
    end
  end else begin : g_noopreg
    always_comb begin
      s0_valid = in_valid;
      s0_clear = clear;
      s0_last  = last;
      s0_a     = input_a;
      s0_b     = input_b;
    end
  end

  // ---- MUL stage ---------------------------------------------------------
  logic                 p_valid, p_clear, p_last;
  logic signed [PW-1:0] p_q;

  always_ff @(posedge clk) begin
    if (rst) begin
      p_valid <= 1'b0;
      p_clear <= 1'b0;
      p_last  <= 1'b0;
      p_q     <= '0;
    end else begin
      p_valid <= s0_valid;
      p_clear <= s0_clear;
      p_last  <= s0_last;
      p_q     <= $signed({1'b0, s0_a}) * PW'(s0_b);
    end
  end

  // ---- ADD stage with feedback -------------------------------------------
  logic signed [ACC_W-1:0] p_ext;
  assign p_ext = ACC_W'(p_q);

  always_ff @(posedge clk) begin
    if (rst) begin
      result <= '0;
      done   <= 1'b0;
    end else begin
      done <= p_valid && p_last;
      if (p_valid) result <= p_clear ? p_ext : result + p_ext;
    end
  end

  // clear and last only mean something on a valid operand pair.
  a_flags_with_valid : assert property (@(posedge clk) disable iff (rst)
      (clear || last) |-> in_valid)
    else $error("cu: clear or last without in_valid");

endmodule
