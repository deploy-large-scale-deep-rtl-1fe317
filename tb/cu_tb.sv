// cu_tb: self-checking testbench of the computing unit (cu).
//
// Two units are driven from one random stimulus stream: one in the default
// 8x2 configuration (2-bit codes, latency 2) and one in the 8x4
// configuration (4-bit codes, latency 3). The testbench keeps its own
// integer model of each accumulator, indexed by the cycle in which the
// operands were presented, and checks every cycle that result equals the
// model's value from exactly LATENCY cycles earlier, and that done pulses
// exactly LATENCY cycles after an operand pair flagged last. The stream mixes
// dot products of random length, idle gaps, back-to-back dot products (clear
// straight after last) and extreme operands (-128 and +127 weights, all-ones
// codes).
module cu_tb;
  import mm_pkg::*;

  localparam int unsigned WP    = 8;
  localparam int unsigned ACC_W = 24;
  localparam int unsigned NCYC  = 4000;

  logic clk = 1'b0;
  logic rst;
  always #5 clk = ~clk;

  logic                    in_valid, clear, last;
  logic [3:0]              a4;
  logic signed [WP-1:0]    b;
  logic signed [ACC_W-1:0] res2, res4;
  logic                    done2, done4;

  cu #(.WP(WP), .WI(2), .ACC_W(ACC_W)) dut2 (
    .clk, .rst, .in_valid, .clear, .last,
    .input_a(a4[1:0]), .input_b(b), .result(res2), .done(done2));

  cu #(.WP(WP), .WI(4), .ACC_W(ACC_W)) dut4 (
    .clk, .rst, .in_valid, .clear, .last,
    .input_a(a4), .input_b(b), .result(res4), .done(done4));

  int checks = 0, failures = 0;
  int cyc = 0;
  longint hist2 [NCYC+8];
  longint hist4 [NCYC+8];
  bit     hdone [NCYC+8];
  longint acc2 = 0, acc4 = 0;
  int     remaining = 0;     // products left in the current dot product
  int     n_dots = 0, n_b2b = 0, n_gaps = 0;

  initial begin : watchdog
    repeat (NCYC + 200) @(posedge clk);
    failures++;
    $display("cu_tb: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst = 1'b1; in_valid = 0; clear = 0; last = 0; a4 = 0; b = 0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst = 1'b0;
    // cycle index: stimulus applied at negedge of cycle c is sampled at
    // posedge c+1; the model value of cycle c is stored in hist[c].
    for (cyc = 0; cyc < NCYC; cyc++) begin
      // --- checks on what the DUTs show in this cycle ---
      if (cyc >= 3) begin
        checks++;
        if (res2 !== ACC_W'(hist2[cyc-2])) begin
          failures++;
          if (failures < 10) $display("cyc %0d: L2 result %0d expected %0d", cyc, res2, hist2[cyc-2]);
        end
        checks++;
        if (res4 !== ACC_W'(hist4[cyc-3])) begin
          failures++;
          if (failures < 10) $display("cyc %0d: L3 result %0d expected %0d", cyc, res4, hist4[cyc-3]);
        end
        checks++;
        if (done2 !== hdone[cyc-2] || done4 !== hdone[cyc-3]) begin
          failures++;
          if (failures < 10) $display("cyc %0d: done2=%0b done4=%0b expected %0b/%0b",
                                      cyc, done2, done4, hdone[cyc-2], hdone[cyc-3]);
        end
      end
      // --- new stimulus ---
      in_valid = 0; clear = 0; last = 0;
      a4 = 4'($urandom); b = WP'($urandom);
      if ($urandom_range(0, 5) == 0) begin
        n_gaps++;                             // idle cycle
      end else begin
        if (remaining == 0) begin
          remaining = $urandom_range(1, 40);
          clear = 1;
          n_dots++;
          if (cyc > 0 && hdone[cyc-1]) n_b2b++;
        end
        case ($urandom_range(0, 9))
          0: begin a4 = 4'hf; b = -128; end
          1: begin a4 = 4'hf; b = 127; end
          default: ;
        endcase
        in_valid = 1;
        remaining--;
        last = (remaining == 0);
      end
      if (in_valid) begin
        acc2 = (clear ? 0 : acc2) + longint'(a4[1:0]) * longint'(b);
        acc4 = (clear ? 0 : acc4) + longint'(a4) * longint'(b);
      end
      hist2[cyc] = acc2;
      hist4[cyc] = acc4;
      hdone[cyc] = in_valid && last;
      @(negedge clk);
    end
    $display("cu_tb: %0d dot products, %0d back-to-back, %0d idle gaps", n_dots, n_b2b, n_gaps);
    checks++;
    if (n_b2b == 0 || n_gaps == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
