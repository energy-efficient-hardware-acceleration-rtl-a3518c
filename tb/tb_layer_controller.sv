// tb_layer_controller: self-checking testbench of the layer sequencer.
//
// Runs the default geometry (3x3 filters, 7x7 map, padding 1: 49 output
// positions) and, at every cycle, compares all outputs with a schedule worked
// out here: window w issues taps t = 0..8 in cycles w*11 + t after the start
// edge; a tap (ky, kx) of output (oy, ox) reads pixel (oy+ky-1, ox+kx-1) at
// address y*7 + x if it is inside the map and otherwise sets pad; layer_rst
// comes with tap 0; layer_en and pad follow the issue by one cycle;
// out_valid with the window's coordinates comes 11 cycles after the window's
// first tap, done with the last one.  Two passes are run back to back.
module tb_layer_controller;

  localparam int K = 3, W = 7, H = 7, P = 1;
  localparam int OW = W + 2 * P - K + 1, OH = H + 2 * P - K + 1;
  localparam int PERIOD = K * K + 2;
  localparam int NWIN = OW * OH;

  logic       clk = 1'b0;
  logic       rst, start, busy, done;
  logic       act_rd_en, w_rd_en, layer_rst, layer_en, pad, out_valid;
  logic [5:0] act_rd_addr;
  logic [3:0] w_rd_row;
  logic [2:0] out_y, out_x;

  int checks = 0, failures = 0;

  layer_controller dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(string what, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  // Expected issue information at cycle c.
  function automatic void expect_issue(int c, output bit iss, output bit inmap,
                                       output int addr, output int tap);
    int w = c / PERIOD, t = c % PERIOD;
    iss = (c >= 0) && (w < NWIN) && (t < K * K);
    tap = t;
    inmap = 1'b0; addr = 0;
    if (iss) begin
      int oy = w / OW, ox = w % OW, y = oy + t / K - P, x = ox + t % K - P;
      inmap = (y >= 0 && y < H && x >= 0 && x < W);
      addr  = inmap ? y * W + x : 0;
    end
  endfunction

  int valid_count, done_count;

  initial begin
    rst = 1'b1; start = 1'b0;
    repeat (3) @(posedge clk);
    #1 rst = 1'b0;
    @(posedge clk);
    check("idle not busy", int'(busy), 0);
    for (int pass = 0; pass < 2; pass++) begin
      valid_count = 0; done_count = 0;
      #1 start = 1'b1;
      @(posedge clk); #1 start = 1'b0;
      for (int c = 0; c <= NWIN * PERIOD + 2; c++) begin
        bit iss, inmap, iss_p, inmap_p;
        int addr, tap, addr_p, tap_p;
        @(negedge clk);
        expect_issue(c, iss, inmap, addr, tap);
        expect_issue(c - 1, iss_p, inmap_p, addr_p, tap_p);
        check($sformatf("c%0d w_rd_en", c), int'(w_rd_en), int'(iss));
        if (iss) check($sformatf("c%0d w_rd_row", c), int'(w_rd_row), tap);
        check($sformatf("c%0d act_rd_en", c), int'(act_rd_en), int'(iss && inmap));
        if (iss && inmap) check($sformatf("c%0d act_rd_addr", c), int'(act_rd_addr), addr);
        check($sformatf("c%0d layer_rst", c), int'(layer_rst), int'(iss && tap == 0));
        check($sformatf("c%0d layer_en", c), int'(layer_en), int'(iss_p));
        check($sformatf("c%0d pad", c), int'(pad), int'(iss_p && !inmap_p));
        // Result strobe for window c/PERIOD - 1.
        begin
          bit v;
          int w;
          v = (c > 0) && (c % PERIOD == 0) && (c / PERIOD <= NWIN);
          w = c / PERIOD - 1;
          check($sformatf("c%0d out_valid", c), int'(out_valid), int'(v));
          check($sformatf("c%0d done", c), int'(done), int'(v && w == NWIN - 1));
          check($sformatf("c%0d busy", c), int'(busy), int'(c <= NWIN * PERIOD));
          if (v) begin
            check("out_y", int'(out_y), w / OW);
            check("out_x", int'(out_x), w % OW);
          end
          valid_count += int'(out_valid);
          done_count  += int'(done);
        end
      end
      check("windows per pass", valid_count, NWIN);
      check("done pulses per pass", done_count, 1);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
