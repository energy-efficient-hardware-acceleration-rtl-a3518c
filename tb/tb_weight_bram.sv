// tb_weight_bram: self-checking testbench of the weight memory.
//
// Fills all 9 rows of the default 512 x 4-bit layout through the 32-bit
// chunk write port with random data, keeping a model row array in the
// testbench, then reads every row back in random order and compares it.
// Checks the one-cycle read latency, that rd_data holds while rd_en is low,
// and that a read of a row written in the same cycle returns old data.
module tb_weight_bram;

  localparam int unsigned NF     = 512;
  localparam int unsigned DEPTH  = 9;
  localparam int unsigned CHUNKS = NF * 4 / 32;

  logic                 clk = 1'b0;
  logic                 wr_en, rd_en;
  logic [3:0]           wr_row, rd_row;
  logic [5:0]           wr_chunk;
  logic [31:0]          wr_data;
  logic [NF-1:0][3:0]   rd_data;

  logic [CHUNKS-1:0][31:0] model [DEPTH];

  int checks = 0, failures = 0;

  weight_bram dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_row(string what, logic [CHUNKS-1:0][31:0] exp);
    checks++;
    if (rd_data !== exp) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  initial begin
    wr_en = 0; rd_en = 0; wr_row = 0; rd_row = 0; wr_chunk = 0; wr_data = 0;
    @(posedge clk);
    for (int pass = 0; pass < 2; pass++) begin
      for (int r = 0; r < int'(DEPTH); r++)
        for (int c = 0; c < int'(CHUNKS); c++) begin
          #1 wr_en = 1; wr_row = 4'(r); wr_chunk = 6'(c); wr_data = $urandom;
          model[r][c] = wr_data;
          @(posedge clk);
        end
      #1 wr_en = 0;
      for (int k = 0; k < 30; k++) begin
        automatic int r = $urandom_range(0, DEPTH - 1);
        #1 rd_en = 1; rd_row = 4'(r);
        @(posedge clk); #1 rd_en = 0; rd_row = 4'($urandom_range(0, DEPTH - 1));
        check_row($sformatf("row %0d", r), model[r]);
        @(posedge clk); #1;
        check_row("hold with rd_en low", model[r]);
      end
    end
    // Read-during-write returns the old row.
    #1 rd_en = 1; rd_row = 4'd3; wr_en = 1; wr_row = 4'd3; wr_chunk = 6'd5; wr_data = ~model[3][5];
    @(posedge clk); #1 rd_en = 0; wr_en = 0;
    check_row("read during write (old)", model[3]);
    model[3][5] = ~model[3][5];
    #1 rd_en = 1; @(posedge clk); #1 rd_en = 0;
    check_row("after write", model[3]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
