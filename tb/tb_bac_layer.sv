// tb_bac_layer: self-checking testbench of the 512-filter BAC layer.
//
// Feeds random 3x3 windows: one shared activation per cycle and, for every
// filter, its own random PoT weight (about one in eight is the zero code).
// For each filter the expected window sum is computed in the testbench from
// the weight definition (-1)^sign * floor(a / 2^shift), and compared with the
// layer output N*N+1 = 10 cycles after the first tap.  Also checks that
// filters with different weights really get different results (no filter
// sees another's weight).
module tb_bac_layer;

  localparam int unsigned NF        = 512;
  localparam int unsigned ACC_WIDTH = 32;
  localparam logic [3:0]  ZERO_W    = 4'b0111;
  localparam int          TAPS      = 9;

  logic                            clk = 1'b0;
  logic                            rst, en;
  logic [NF-1:0][3:0]              w_in;
  logic [7:0]                      a_in;
  logic [NF-1:0][ACC_WIDTH-1:0]    out;

  int checks = 0, failures = 0;

  bac_layer dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int ref_product(logic [3:0] w, logic [7:0] a);
    int mag;
    if (w == ZERO_W) return 0;
    mag = int'(a) >> w[2:0];
    return w[3] ? -mag : mag;
  endfunction

  int expected [NF];
  int last_p   [NF];

  initial begin
    rst = 1'b1; en = 1'b0; w_in = '0; a_in = '0;
    repeat (2) @(posedge clk);
    for (int win = 0; win < 40; win++) begin
      foreach (expected[f]) expected[f] = 0;
      #1 rst = 1'b1; @(posedge clk); #1 rst = 1'b0;
      for (int t = 0; t < TAPS; t++) begin
        en   = 1'b1;
        a_in = 8'($urandom_range(1, 255));
        for (int f = 0; f < int'(NF); f++) begin
          w_in[f] = ($urandom_range(0, 7) == 0) ? ZERO_W : 4'($urandom_range(0, 15));
          last_p[f] = ref_product(w_in[f], a_in);
          expected[f] += last_p[f];
        end
        @(posedge clk); #1;
      end
      en = 1'b0;
      // One cycle short of N*N+1: the last tap is not yet in.
      checks++;
      begin
        automatic int bad = 0;
        for (int f = 0; f < int'(NF); f++)
          if ($signed(out[f]) != expected[f] - last_p[f]) bad++;
        if (bad != 0) begin
          failures++;
          $display("FAIL window %0d: %0d filters wrong after N*N cycles", win, bad);
        end
      end
      @(posedge clk); #1;
      for (int f = 0; f < int'(NF); f++) begin
        checks++;
        if ($signed(out[f]) != expected[f]) begin
          failures++;
          if (failures < 10)
            $display("FAIL window %0d filter %0d: got %0d expected %0d",
                     win, f, $signed(out[f]), expected[f]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
