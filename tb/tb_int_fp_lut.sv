// tb_int_fp_lut -- self-checking test of the 16 x 16b INT-to-FP lookup table: reset clears
// every entry, writes land at their address on the clock edge, reads are combinational and
// the write port does not disturb other entries.
module tb_int_fp_lut;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  logic        rst, wr_en;
  logic [3:0]  wr_addr, rd_addr;
  logic [15:0] wr_data, rd_data;
  logic [15:0] model [16];

  int_fp_lut #(.DEPTH(16), .WIDTH(16)) dut (.*);

  task automatic expect_eq(input logic [15:0] got, input logic [15:0] exp, input string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: addr=%0d got=%h exp=%h", what, rd_addr, got, exp);
    end
  endtask

  initial begin
    rst = 1; wr_en = 0; wr_addr = 0; wr_data = 0; rd_addr = 0;
    repeat (2) @(posedge clk);
    #1 rst = 0;
    for (int i = 0; i < 16; i++) begin
      rd_addr = 4'(i); #1; expect_eq(rd_data, 16'h0, "after reset");
      model[i] = 16'h0;
    end
    // Fill with random words, one per cycle.
    for (int i = 0; i < 16; i++) begin
      @(negedge clk);
      wr_en = 1; wr_addr = 4'(i); wr_data = 16'($urandom);
      model[i] = wr_data;
    end
    @(negedge clk) wr_en = 0;
    for (int i = 0; i < 16; i++) begin
      rd_addr = 4'(i); #1; expect_eq(rd_data, model[i], "after fill");
    end
    // Random overwrites with reads in between.
    repeat (400) begin
      @(negedge clk);
      wr_en   = 1'($urandom);
      wr_addr = 4'($urandom);
      wr_data = 16'($urandom);
      rd_addr = 4'($urandom);
      #1 expect_eq(rd_data, model[rd_addr], "random read");
      @(posedge clk);
      if (wr_en) model[wr_addr] = wr_data;
    end
    @(negedge clk) wr_en = 0;
    for (int i = 0; i < 16; i++) begin
      rd_addr = 4'(i); #1; expect_eq(rd_data, model[i], "final");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
