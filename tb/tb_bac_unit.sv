// tb_bac_unit: self-checking testbench of the bitshift-accumulate unit.
//
// Streams random 9-tap windows (3x3 filters) of unsigned 8-bit activations
// and 4-bit PoT weights into one unit, with a biased share of zero-weight
// codes, negative weights and every shift amount.  The expected sum is
// computed in the testbench from the weight's definition,
// (-1)^sign * floor(a / 2^shift), or 0 for the zero code.  It also checks
// the latency: the window's sum must appear exactly N*N+1 = 10 cycles after
// the first tap is clocked in, and not one cycle earlier; and that en=0
// cycles between taps are ignored and rst clears the accumulator.
module tb_bac_unit;

  localparam int unsigned A_WIDTH   = 8;
  localparam int unsigned W_WIDTH   = 4;
  localparam int unsigned ACC_WIDTH = 32;
  localparam logic [3:0]  ZERO_W    = 4'b0111;
  localparam int          TAPS      = 9;

  logic                        clk = 1'b0;
  logic                        rst, en;
  logic        [W_WIDTH-1:0]   w_in;
  logic        [A_WIDTH-1:0]   a_in;
  logic signed [ACC_WIDTH-1:0] out;

  int checks = 0, failures = 0;

  bac_unit #(
    .A_WIDTH(A_WIDTH), .W_WIDTH(W_WIDTH), .ACC_WIDTH(ACC_WIDTH), .ZERO_WEIGHT(ZERO_W)
  ) dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int ref_product(logic [3:0] w, logic [7:0] a);
    int mag;
    if (w == ZERO_W) return 0;
    mag = int'(a) / (1 << w[2:0]);
    return w[3] ? -mag : mag;
  endfunction

  function automatic logic [3:0] rand_weight();
    int r = $urandom_range(0, 9);
    if (r == 0) return ZERO_W;                 // pruned weight
    return 4'($urandom_range(0, 15));
  endfunction

  task automatic check(string what, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  int zero_seen = 0, neg_seen = 0;

  initial begin
    logic [3:0] ws [TAPS];
    logic [7:0] as [TAPS];
    int expected;
    rst = 1'b1; en = 1'b0; w_in = '0; a_in = '0;
    repeat (3) @(posedge clk);
    #1 rst = 1'b0;
    @(posedge clk);
    check("out after reset", int'(out), 0);

    // Directed: the example of every shift with a = 200, both signs.
    for (int s = 0; s < 8; s++) begin
      for (int sg = 0; sg < 2; sg++) begin
        automatic logic [3:0] w = {sg[0], s[2:0]};
        #1 rst = 1'b1; @(posedge clk); #1 rst = 1'b0;
        en = 1'b1; w_in = w; a_in = 8'd200;
        @(posedge clk); #1 en = 1'b0;
        @(posedge clk); @(posedge clk); #1;
        check($sformatf("single product w=%b", w), int'(out), ref_product(w, 8'd200));
      end
    end

    // Random 3x3 windows: latency N*N+1 and value.
    for (int win = 0; win < 300; win++) begin
      expected = 0;
      for (int t = 0; t < TAPS; t++) begin
        ws[t] = rand_weight();
        as[t] = 8'($urandom_range(0, 255));
        expected += ref_product(ws[t], as[t]);
        if (ws[t] == ZERO_W) zero_seen++;
        else if (ws[t][3]) neg_seen++;
      end
      #1 rst = 1'b1; @(posedge clk); #1 rst = 1'b0;
      for (int t = 0; t < TAPS; t++) begin
        en = 1'b1; w_in = ws[t]; a_in = as[t];
        @(posedge clk); #1;                  // edge t+1
      end
      en = 1'b0; w_in = 4'($urandom); a_in = 8'($urandom);
      // After edge 9 the last product is still in the pipeline.
      check("partial sum after N*N cycles", int'(out),
            expected - ref_product(ws[TAPS-1], as[TAPS-1]));
      @(posedge clk); #1;                    // edge 10 = N*N+1
      check($sformatf("window %0d sum", win), int'(out), expected);
      @(posedge clk); #1;
      check("sum holds with en=0", int'(out), expected);
    end

    // Enable gaps: taps spread out with idle cycles accumulate the same.
    #1 rst = 1'b1; @(posedge clk); #1 rst = 1'b0;
    expected = 0;
    for (int t = 0; t < TAPS; t++) begin
      en = 1'b1; w_in = 4'($urandom_range(0, 15)); a_in = 8'($urandom);
      expected += ref_product(w_in, a_in);
      @(posedge clk); #1;
      en = 1'b0; w_in = 4'($urandom); a_in = 8'($urandom);
      repeat ($urandom_range(0, 3)) @(posedge clk);
      #1;
    end
    @(posedge clk); @(posedge clk); #1;
    check("sum with enable gaps", int'(out), expected);

    // rst with en high clears and drops that operand.
    en = 1'b1; rst = 1'b1; w_in = 4'b0000; a_in = 8'd100;
    @(posedge clk); #1 rst = 1'b0; en = 1'b0;
    @(posedge clk); @(posedge clk); #1;
    check("rst dominates en", int'(out), 0);

    checks++;
    if (zero_seen == 0 || neg_seen == 0) failures++;

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
