// tb_paper_example: runs the worked 3x3 quantisation example through one
// bitshift-accumulate unit.
//
// The example filter W = [0.0034, -0.12, 0.045, 0.2, 1, -1.05, 2.34, -0.44,
// 0.5] quantises, after division by its largest magnitude 2.34, to the
// power-of-two exponents [-, -4, -5, -3, -1, -1, 0, -2, -2] with signs
// [+, -, +, +, +, -, +, -, +].  The first weight lies below the smallest
// level and is stored as the zero code; the others become {sign, shift}
// codes.  For a set of activation windows the unit's sum must equal
// sum_i sign_i * floor(a_i / 2^shift_i), computed here from that table, on
// the N*N+1 = 10th cycle after the first tap.
module tb_paper_example;

  localparam logic [3:0] ZERO_W = 4'b0111;

  // Quantised example: sign (1 = negative) and right-shift per tap; the first
  // tap is the zero weight.
  localparam bit       NEG   [9] = '{0, 1, 0, 0, 0, 1, 0, 1, 0};
  localparam int       SHIFT [9] = '{0, 4, 5, 3, 1, 1, 0, 2, 2};
  localparam bit       ZERO  [9] = '{1, 0, 0, 0, 0, 0, 0, 0, 0};

  logic               clk = 1'b0;
  logic               rst, en;
  logic        [3:0]  w_in;
  logic        [7:0]  a_in;
  logic signed [31:0] out;

  int checks = 0, failures = 0;

  bac_unit dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (3000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [3:0] code(int i);
    return ZERO[i] ? ZERO_W : {NEG[i], 3'(SHIFT[i])};
  endfunction

  initial begin
    logic [7:0] a [9];
    int expected;
    rst = 1'b1; en = 1'b0; w_in = '0; a_in = '0;
    repeat (2) @(posedge clk);
    for (int v = 0; v < 100; v++) begin
      expected = 0;
      for (int i = 0; i < 9; i++) begin
        a[i] = (v == 0) ? 8'd255 : 8'($urandom_range(0, 255));
        if (!ZERO[i]) expected += (NEG[i] ? -1 : 1) * (int'(a[i]) / (1 << SHIFT[i]));
      end
      #1 rst = 1'b1; @(posedge clk); #1 rst = 1'b0;
      for (int i = 0; i < 9; i++) begin
        en = 1'b1; w_in = code(i); a_in = a[i];
        @(posedge clk); #1;
      end
      en = 1'b0;
      @(posedge clk); #1;
      checks++;
      if (out != expected) begin
        failures++;
        $display("FAIL window %0d: got %0d expected %0d", v, out, expected);
      end
      // All-255 window: 0 - 15 + 7 + 31 + 127 - 127 + 255 - 63 + 63 = 278.
      if (v == 0) begin
        checks++;
        if (out != 278) begin
          failures++;
          $display("FAIL all-255 window: got %0d expected 278", out);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
