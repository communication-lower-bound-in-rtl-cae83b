// tb_pe: self-checking test of one PE (MAC + 128 LRegs) at full size.
// Drives random MACs at random LReg addresses, some with 'first' (start of a
// new tile) and some with large operands that saturate, and checks every
// LReg against a model: psum = clamp(psum + floor(a*w / 2^8), -32768, 32767).
// Checks one MAC per cycle: the result is readable right after the edge.
// Timing: 10 ns clock, inputs driven on the falling edge; watchdog. The
// 128 LRegs follow the paper; the Q8.8 format and saturation are this design's.
module tb_pe;
  import cla_pkg::*;
  localparam int unsigned LREG_DEPTH = 128;

  logic clk = 1'b0;
  logic mac_en, first;
  logic [$clog2(LREG_DEPTH)-1:0] addr;
  data_t in_a, in_w, rd_data;
  longint model [LREG_DEPTH];
  bit     valid [LREG_DEPTH];
  int checks = 0, failures = 0, n_sat = 0, n_first = 0;

  pe #(.LREG_DEPTH(LREG_DEPTH)) dut (.*);

  always #5 clk = ~clk;

  function automatic longint ref_mac(longint acc, longint a, longint w);
    longint p, s;
    p = a * w;
    // floor division by 256 (arithmetic shift of a signed product)
    s = (p >= 0) ? (p / 256) : -((-p + 255) / 256);
    s = acc + s;
    if (s > 32767)  begin s = 32767;  n_sat++; end
    if (s < -32768) begin s = -32768; n_sat++; end
    return s;
  endfunction

  initial begin
    mac_en = 0; first = 0; addr = '0; in_a = '0; in_w = '0;
    foreach (valid[i]) valid[i] = 0;
    @(negedge clk);
    for (int n = 0; n < 20000; n++) begin
      int a;
      bit big;
      a = $urandom_range(0, LREG_DEPTH - 1);
      big = ($urandom_range(0, 9) == 0);
      mac_en = ($urandom_range(0, 7) != 0);
      first  = !valid[a] || ($urandom_range(0, 15) == 0);
      addr   = a[6:0];
      in_a   = big ? data_t'($urandom) : data_t'($urandom_range(0, 1023) - 512);
      in_w   = big ? data_t'($urandom) : data_t'($urandom_range(0, 1023) - 512);
      @(posedge clk);
      if (mac_en) begin
        model[a] = ref_mac(first ? 0 : model[a], longint'(in_a), longint'(in_w));
        valid[a] = 1;
        if (first) n_first++;
      end
      @(negedge clk);
      if (valid[a]) begin
        checks++;
        if (longint'(rd_data) != model[a]) begin
          failures++;
          if (failures < 10) $display("FAIL: addr %0d got %0d want %0d", a, rd_data, model[a]);
        end
      end
    end
    checks++;
    if (n_sat == 0 || n_first == 0) begin
      failures++;
      $display("FAIL: saturation or first never exercised");
    end
    $display("saturations=%0d first=%0d", n_sat, n_first);
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
