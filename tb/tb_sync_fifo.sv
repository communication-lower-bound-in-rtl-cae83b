// tb_sync_fifo: self-checking test of the DRAM-side FIFO.
// Random pushes and pops against a queue model; checks order, data, the full
// flag at DEPTH words and first-word fall-through (data visible the cycle
// after the push).
// Timing: 10 ns clock, valid/ready sampled at the rising edge; watchdog.
// The depth of 16 and the handshake are this design's choices.
module tb_sync_fifo;
  localparam int unsigned WIDTH = 16;
  localparam int unsigned DEPTH = 16;

  logic clk = 1'b0, rst_n = 1'b0;
  logic wr_valid, wr_ready, rd_valid, rd_ready;
  logic [WIDTH-1:0] wr_data, rd_data;
  int checks = 0, failures = 0;
  logic [WIDTH-1:0] model [$];
  int saw_full = 0;

  sync_fifo #(.WIDTH(WIDTH), .DEPTH(DEPTH)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  initial begin
    wr_valid = 0; rd_ready = 0; wr_data = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    check(!rd_valid && wr_ready, "empty after reset");
    // Fill to full without popping.
    for (int i = 0; i < DEPTH; i++) begin
      wr_valid = 1; wr_data = WIDTH'(i * 7 + 3);
      @(posedge clk); model.push_back(wr_data);
      @(negedge clk);
      check(rd_valid, "valid after first push");
    end
    wr_valid = 0;
    check(!wr_ready, "full after DEPTH pushes");
    if (!wr_ready) saw_full++;
    // Random traffic.
    for (int n = 0; n < 2000; n++) begin
      wr_valid = ($urandom_range(0, 2) != 0);
      rd_ready = ($urandom_range(0, 2) != 0);
      wr_data  = WIDTH'($urandom);
      check(rd_valid == (model.size() != 0), "valid matches occupancy");
      check(wr_ready == (model.size() != DEPTH), "ready matches occupancy");
      if (rd_valid && model.size() != 0) check(rd_data == model[0], "head data");
      @(posedge clk);
      if (rd_valid && rd_ready) void'(model.pop_front());
      if (wr_valid && wr_ready) model.push_back(wr_data);
      if (model.size() == DEPTH) saw_full++;
      @(negedge clk);
    end
    check(saw_full > 0, "full condition reached");
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
