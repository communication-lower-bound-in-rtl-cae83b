// tb_wgreg_row: self-checking test of a weight GReg row at its full size
// (256 entries, 16 round-robin 16-to-1 weight MUXes). Checks that MUX c with
// select s returns entry c + 16*s, for every c and s.
// Timing: 10 ns clock for writes, MUX outputs checked combinationally;
// watchdog. The round-robin wiring follows the paper.
module tb_wgreg_row;
  import cla_pkg::*;
  localparam int unsigned Q = 16, DEPTH = 256;

  logic clk = 1'b0;
  logic we;
  logic [$clog2(DEPTH)-1:0] waddr;
  data_t wdata;
  logic [$clog2(DEPTH/Q)-1:0] sel;
  data_t w_out [Q];
  data_t ref_regs [DEPTH];
  int checks = 0, failures = 0;

  wgreg_row #(.Q(Q), .DEPTH(DEPTH)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    we = 0; waddr = '0; wdata = '0; sel = '0;
    for (int round = 0; round < 3; round++) begin
      @(negedge clk);
      for (int a = 0; a < DEPTH; a++) begin
        we = 1; waddr = a[7:0]; wdata = data_t'($urandom);
        ref_regs[a] = wdata;
        @(negedge clk);
      end
      we = 0;
      for (int s = 0; s < DEPTH / Q; s++) begin
        sel = s[$clog2(DEPTH/Q)-1:0];
        #1;
        for (int c = 0; c < Q; c++) begin
          checks++;
          if (w_out[c] !== ref_regs[c + Q * s]) begin
            failures++;
            $display("FAIL: mux %0d sel %0d got %0d want %0d", c, s, w_out[c], ref_regs[c + Q * s]);
          end
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
