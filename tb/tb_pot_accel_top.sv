// tb_pot_accel_top: end-to-end testbench of the PoT convolution accelerator at
// its default size (512 filters of 3x3, 7x7 input map, padding 1).
//
// For each of three passes it loads random 4-bit PoT weights for all filters
// through the 32-bit weight write port and a random 7x7 map of 8-bit
// activations, pulses start and compares every filter's result at each of the
// 49 output positions with a convolution computed here from the weight
// definition (-1)^sign * floor(a / 2^shift), zero for the code 4'b0111.
// The passes use increasing shares of zero weights (none, about 40 %, about
// 70 %), as after pruning.  It checks the order of the output positions and
// the run time: done must come 49*11 cycles after the clock edge that
// samples start.  It counts how often
// each mechanism of the design was exercised - zero-weight skips, negative
// weights (subtraction), every shift amount, padding taps and accumulator
// clears between windows - and counts a failure for any that never occurred.
module tb_pot_accel_top;

  import pot_pkg::*;

  localparam int NF = NUM_FILTERS;
  localparam int OW = IMG_W + 2 * PAD - KSIZE + 1;
  localparam int OH = IMG_H + 2 * PAD - KSIZE + 1;
  localparam int CHUNKS = NF * W_WIDTH / WMEM_WR_WIDTH;
  localparam int WPC = WMEM_WR_WIDTH / W_WIDTH;  // weights per chunk

  logic                          clk = 1'b0;
  logic                          rst;
  logic                          wmem_wr_en, amem_wr_en, start;
  logic [3:0]                    wmem_wr_row;
  logic [5:0]                    wmem_wr_chunk;
  logic [31:0]                   wmem_wr_data;
  logic [5:0]                    amem_wr_addr;
  logic [7:0]                    amem_wr_data;
  logic                          busy, done, out_valid;
  logic [2:0]                    out_y, out_x;
  logic [NF-1:0][ACC_WIDTH-1:0]  out_data;

  int checks = 0, failures = 0;

  pot_accel_top dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [3:0] wgt [NF][TAPS];
  logic [7:0] img [IMG_H][IMG_W];

  // Mechanism counters.
  int n_zero, n_neg, n_pad, n_clear, n_windows;
  int n_shift [8];

  function automatic int ref_product(logic [3:0] w, logic [7:0] a);
    int mag;
    if (w == ZERO_WEIGHT) return 0;
    mag = int'(a) >> w[2:0];
    return w[3] ? -mag : mag;
  endfunction

  function automatic int ref_conv(int f, int oy, int ox);
    int s = 0;
    for (int ky = 0; ky < int'(KSIZE); ky++)
      for (int kx = 0; kx < int'(KSIZE); kx++) begin
        int y = oy + ky - int'(PAD), x = ox + kx - int'(PAD);
        if (y >= 0 && y < int'(IMG_H) && x >= 0 && x < int'(IMG_W))
          s += ref_product(wgt[f][ky * KSIZE + kx], img[y][x]);
      end
    return s;
  endfunction

  task automatic load(int zero_pct);
    for (int f = 0; f < NF; f++)
      for (int t = 0; t < int'(TAPS); t++) begin
        if ($urandom_range(0, 99) < zero_pct) wgt[f][t] = ZERO_WEIGHT;
        else begin
          // any of the 14 non-zero levels: shift 0..6, either sign
          wgt[f][t] = {1'($urandom_range(0, 1)), 3'($urandom_range(0, 6))};
        end
      end
    for (int t = 0; t < int'(TAPS); t++)
      for (int c = 0; c < CHUNKS; c++) begin
        @(negedge clk);
        wmem_wr_en = 1'b1; wmem_wr_row = 4'(t); wmem_wr_chunk = 6'(c);
        for (int k = 0; k < WPC; k++) wmem_wr_data[k*4 +: 4] = wgt[c * WPC + k][t];
      end
    for (int y = 0; y < int'(IMG_H); y++)
      for (int x = 0; x < int'(IMG_W); x++) begin
        @(negedge clk);
        wmem_wr_en = 1'b0;
        img[y][x] = 8'($urandom_range(0, 255));
        amem_wr_en = 1'b1; amem_wr_addr = 6'(y * IMG_W + x); amem_wr_data = img[y][x];
      end
    @(negedge clk);
    amem_wr_en = 1'b0;
  endtask

  // Mechanism monitor on the datapath inside the design.
  always @(posedge clk) begin
    if (!rst) begin
      if (dut.layer_rst) n_clear++;
      if (dut.layer_en && dut.pad) n_pad++;
      if (dut.layer_en)
        for (int f = 0; f < NF; f++) begin
          logic [3:0] w;
          w = dut.w_rd_data[f];
          if (w == ZERO_WEIGHT) n_zero++;
          else begin
            if (w[3]) n_neg++;
            n_shift[w[2:0]]++;
          end
        end
    end
  end

  initial begin
    automatic int pct [3] = '{0, 40, 70};
    rst = 1'b1; start = 1'b0; wmem_wr_en = 1'b0; amem_wr_en = 1'b0;
    wmem_wr_row = '0; wmem_wr_chunk = '0; wmem_wr_data = '0;
    amem_wr_addr = '0; amem_wr_data = '0;
    n_zero = 0; n_neg = 0; n_pad = 0; n_clear = 0; n_windows = 0;
    foreach (n_shift[i]) n_shift[i] = 0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst = 1'b0;

    for (int pass = 0; pass < 3; pass++) begin
      int win, cycles, bad;
      load(pct[pass]);
      @(negedge clk) start = 1'b1;
      @(negedge clk) start = 1'b0;
      win = 0; cycles = 0; bad = 0;
      while (!done) begin
        if (out_valid) begin
          checks++;
          if (int'(out_y) != win / OW || int'(out_x) != win % OW) begin
            failures++;
            $display("FAIL pass %0d: position (%0d,%0d) expected (%0d,%0d)",
                     pass, out_y, out_x, win / OW, win % OW);
          end
          for (int f = 0; f < NF; f++) begin
            int e;
            e = ref_conv(f, win / OW, win % OW);
            checks++;
            if ($signed(out_data[f]) != e) begin
              failures++;
              if (bad++ < 5)
                $display("FAIL pass %0d (%0d,%0d) filter %0d: got %0d expected %0d",
                         pass, win / OW, win % OW, f, $signed(out_data[f]), e);
            end
          end
          win++;
          n_windows++;
        end
        @(negedge clk);
        cycles++;
      end
      // The done cycle carries the last window's results.
      for (int f = 0; f < NF; f++) begin
        checks++;
        if ($signed(out_data[f]) != ref_conv(f, OH - 1, OW - 1)) failures++;
      end
      win++;
      n_windows++;
      checks++;
      if (win != OW * OH) begin
        failures++;
        $display("FAIL pass %0d: %0d windows", pass, win);
      end
      checks++;
      if (cycles != OW * OH * (TAPS + 2)) begin
        failures++;
        $display("FAIL pass %0d: done after %0d cycles, expected %0d",
                 pass, cycles, OW * OH * (TAPS + 2));
      end
      $display("pass %0d (%0d%% zero weights): %0d windows in %0d cycles",
               pass, pct[pass], win, cycles);
    end

    $display("mechanisms: zero-weight skips %0d, negative weights %0d, padding taps %0d, accumulator clears %0d, windows %0d",
             n_zero, n_neg, n_pad, n_clear, n_windows);
    foreach (n_shift[i]) if (i < 7) $display("  shift %0d used %0d times", i, n_shift[i]);
    checks++; if (n_zero == 0)  begin failures++; $display("FAIL no zero-weight skip"); end
    checks++; if (n_neg == 0)   begin failures++; $display("FAIL no negative weight"); end
    checks++; if (n_pad == 0)   begin failures++; $display("FAIL no padding tap"); end
    checks++; if (n_clear < n_windows) begin failures++; $display("FAIL too few accumulator clears"); end
    for (int i = 0; i < 7; i++) begin
      checks++;
      if (n_shift[i] == 0) begin failures++; $display("FAIL shift %0d never used", i); end
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
