// tb_act_bram: self-checking testbench of the activation memory.
//
// Writes random bytes to all 49 words of the default 7x7 map, reads them back
// in random order against a model array, and checks the one-cycle read
// latency, the hold while rd_en is low and old-data read-during-write.
module tb_act_bram;

  localparam int DEPTH = 49;

  logic       clk = 1'b0;
  logic       wr_en, rd_en;
  logic [5:0] wr_addr, rd_addr;
  logic [7:0] wr_data, rd_data;
  logic [7:0] model [DEPTH];

  int checks = 0, failures = 0;

  act_bram dut (.*);

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
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin
    wr_en = 0; rd_en = 0; wr_addr = 0; rd_addr = 0; wr_data = 0;
    @(posedge clk);
    for (int a = 0; a < DEPTH; a++) begin
      #1 wr_en = 1; wr_addr = 6'(a); wr_data = 8'($urandom); model[a] = wr_data;
      @(posedge clk);
    end
    #1 wr_en = 0;
    for (int k = 0; k < 200; k++) begin
      automatic int a = $urandom_range(0, DEPTH - 1);
      #1 rd_en = 1; rd_addr = 6'(a);
      @(posedge clk); #1 rd_en = 0; rd_addr = 6'($urandom_range(0, DEPTH - 1));
      check($sformatf("addr %0d", a), int'(rd_data), int'(model[a]));
      @(posedge clk); #1;
      check("hold", int'(rd_data), int'(model[a]));
    end
    #1 rd_en = 1; rd_addr = 6'd10; wr_en = 1; wr_addr = 6'd10; wr_data = ~model[10];
    @(posedge clk); #1 rd_en = 0; wr_en = 0;
    check("read during write (old)", int'(rd_data), int'(model[10]));
    model[10] = ~model[10];
    #1 rd_en = 1; @(posedge clk); #1 rd_en = 0;
    check("after write", int'(rd_data), int'(model[10]));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
