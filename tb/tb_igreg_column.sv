// tb_igreg_column: self-checking test of an input GReg column at its full
// size (16 segments x 64 entries, 16 64-to-1 input MUXes). Fills segments in
// random order and checks in_out[r] = segment r, entry sel, for all r, sel.
// Timing: 10 ns clock, writes on the rising edge, MUX outputs checked
// combinationally; a watchdog ends a hung run. Segment count and depth follow
// the paper.
module tb_igreg_column;
  import cla_pkg::*;
  localparam int unsigned P = 16, SEG_DEPTH = 64;

  logic clk = 1'b0;
  logic we;
  logic [$clog2(P)-1:0] wseg;
  logic [$clog2(SEG_DEPTH)-1:0] waddr, sel;
  data_t wdata;
  data_t in_out [P];
  data_t ref_seg [P][SEG_DEPTH];
  int checks = 0, failures = 0;

  igreg_column #(.P(P), .SEG_DEPTH(SEG_DEPTH)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    we = 0; wseg = '0; waddr = '0; wdata = '0; sel = '0;
    @(negedge clk);
    for (int r = 0; r < P; r++)
      for (int a = 0; a < SEG_DEPTH; a++) begin
        we = 1; wseg = r[3:0]; waddr = a[5:0]; wdata = data_t'($urandom);
        ref_seg[r][a] = wdata;
        @(negedge clk);
      end
    // random overwrites
    for (int n = 0; n < 500; n++) begin
      we = 1; wseg = 4'($urandom); waddr = 6'($urandom); wdata = data_t'($urandom);
      ref_seg[wseg][waddr] = wdata;
      @(negedge clk);
    end
    we = 0;
    for (int s = 0; s < SEG_DEPTH; s++) begin
      sel = s[5:0];
      #1;
      for (int r = 0; r < P; r++) begin
        checks++;
        if (in_out[r] !== ref_seg[r][s]) begin
          failures++;
          $display("FAIL: seg %0d sel %0d", r, s);
        end
      end
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
