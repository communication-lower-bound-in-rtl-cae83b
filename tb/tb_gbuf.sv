// tb_gbuf: self-checking test of the GBuf SRAM model at the IGBuf size
// (1024 x 16). Writes a pattern, reads it back in random order and checks
// the one-cycle read latency and that the output holds when rd_en is low.
// Timing: 10 ns clock, inputs changed on the falling edge, watchdog after
// 100000 cycles. The size follows the paper; the read latency is this design's.
module tb_gbuf;
  localparam int unsigned DEPTH = 1024;
  localparam int unsigned WIDTH = 16;

  logic clk = 1'b0;
  logic wr_en, rd_en;
  logic [$clog2(DEPTH)-1:0] wr_addr, rd_addr;
  logic [WIDTH-1:0] wr_data, rd_data;
  logic [WIDTH-1:0] ref_mem [DEPTH];
  int checks = 0, failures = 0;

  gbuf #(.DEPTH(DEPTH), .WIDTH(WIDTH)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  initial begin
    wr_en = 0; rd_en = 0; wr_addr = '0; rd_addr = '0; wr_data = '0;
    @(negedge clk);
    for (int a = 0; a < DEPTH; a++) begin
      wr_en = 1; wr_addr = a[$clog2(DEPTH)-1:0]; wr_data = WIDTH'(a * 37 + 11);
      ref_mem[a] = wr_data;
      @(negedge clk);
    end
    wr_en = 0;
    for (int n = 0; n < 3000; n++) begin
      int a;
      a = $urandom_range(0, DEPTH - 1);
      rd_en = 1; rd_addr = a[$clog2(DEPTH)-1:0];
      // simultaneous write to another address
      wr_en = ($urandom_range(0, 1) == 1);
      wr_addr = $clog2(DEPTH)'((a + 1 + $urandom_range(0, DEPTH - 2)) % DEPTH);
      wr_data = WIDTH'($urandom);
      @(posedge clk);
      if (wr_en) ref_mem[wr_addr] = wr_data;
      @(negedge clk);
      check(rd_data == ref_mem[a], "read data after one cycle");
      rd_en = 0; wr_en = 0;
      rd_addr = $clog2(DEPTH)'($urandom);  // must not matter while rd_en is low
      @(negedge clk);
      check(rd_data == ref_mem[a], "read data held while rd_en low");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
