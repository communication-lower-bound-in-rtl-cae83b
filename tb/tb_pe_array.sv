// tb_pe_array: self-checking test of the PE array with its GRegs at full size
// (16 x 16 PEs, 4 x 4 groups, 256-entry weight rows, 16 x 64 input segments,
// 128 LRegs). Loads the GRegs, runs random lock-step MAC cycles and reads
// every LReg of every PE back through the output MUX. The model follows the
// sharing rule: PE(r,c) multiplies input segment r, entry in_sel, by weight
// entry c + 16*w_sel.
// Timing: 10 ns clock, all PEs in lock step as in the paper; watchdog.
// The grouping and MUX wiring follow the paper.
module tb_pe_array;
  import cla_pkg::*;
  localparam int unsigned P = 16, Q = 16, PG = 4, QG = 4;
  localparam int unsigned LREG_DEPTH = 128, WG_DEPTH = 256, SEG_DEPTH = 64;

  logic clk = 1'b0;
  logic wg_we, ig_we, mac_en, first;
  logic [7:0] wg_waddr;
  data_t wg_wdata, ig_wdata, out_data;
  logic [3:0] ig_wseg, out_row, out_col, w_sel;
  logic [5:0] ig_waddr, in_sel;
  logic [6:0] lreg_addr;

  data_t  wref [WG_DEPTH];
  data_t  iref [P][SEG_DEPTH];
  data_t  lref [P][Q][LREG_DEPTH];
  bit     lval [LREG_DEPTH];
  int checks = 0, failures = 0;

  pe_array #(.P(P), .Q(Q), .PG(PG), .QG(QG), .LREG_DEPTH(LREG_DEPTH),
             .WG_DEPTH(WG_DEPTH), .SEG_DEPTH(SEG_DEPTH)) dut (.*);

  always #5 clk = ~clk;

  // Independent fixed-point MAC: floor(a*w/256) added with clamping.
  function automatic data_t ref_mac(data_t acc, data_t a, data_t w);
    longint p, s;
    p = longint'(a) * longint'(w);
    s = (p >= 0) ? (p / 256) : -((-p + 255) / 256);
    s = s + longint'(acc);
    if (s > 32767) s = 32767;
    if (s < -32768) s = -32768;
    return data_t'(s);
  endfunction

  task automatic load_gregs();
    wg_we = 1; ig_we = 0;
    for (int a = 0; a < WG_DEPTH; a++) begin
      wg_waddr = a[7:0]; wg_wdata = data_t'($urandom_range(0, 2047) - 1024);
      wref[a] = wg_wdata;
      @(negedge clk);
    end
    wg_we = 0; ig_we = 1;
    for (int r = 0; r < P; r++)
      for (int a = 0; a < SEG_DEPTH; a++) begin
        ig_wseg = r[3:0]; ig_waddr = a[5:0]; ig_wdata = data_t'($urandom_range(0, 2047) - 1024);
        iref[r][a] = ig_wdata;
        @(negedge clk);
      end
    ig_we = 0;
  endtask

  initial begin
    wg_we = 0; ig_we = 0; mac_en = 0; first = 0; wg_waddr = '0; wg_wdata = '0;
    ig_wseg = '0; ig_waddr = '0; ig_wdata = '0; in_sel = '0; w_sel = '0;
    lreg_addr = '0; out_row = '0; out_col = '0;
    foreach (lval[i]) lval[i] = 0;
    @(negedge clk);
    for (int round = 0; round < 2; round++) begin
      load_gregs();
      for (int n = 0; n < 600; n++) begin
        int la;
        la = $urandom_range(0, LREG_DEPTH - 1);
        mac_en = 1;
        first = !lval[la] || ($urandom_range(0, 19) == 0);
        lreg_addr = la[6:0];
        in_sel = 6'($urandom);
        w_sel = 4'($urandom);
        @(posedge clk);
        for (int r = 0; r < P; r++)
          for (int c = 0; c < Q; c++)
            lref[r][c][la] = ref_mac(first ? data_t'(0) : lref[r][c][la],
                                     iref[r][in_sel], wref[c + Q * int'(w_sel)]);
        lval[la] = 1;
        @(negedge clk);
      end
      mac_en = 0;
      for (int r = 0; r < P; r++)
        for (int c = 0; c < Q; c++)
          for (int a = 0; a < LREG_DEPTH; a++) begin
            if (!lval[a]) continue;
            out_row = r[3:0]; out_col = c[3:0]; lreg_addr = a[6:0];
            #1;
            checks++;
            if (out_data !== lref[r][c][a]) begin
              failures++;
              if (failures < 10) $display("FAIL: PE(%0d,%0d) LReg %0d got %0d want %0d", r, c, a, out_data, lref[r][c][a]);
            end
          end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
