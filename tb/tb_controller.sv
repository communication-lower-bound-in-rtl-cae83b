// tb_controller: self-checking test of the global controller on its own.
// Two layer runs (stride 1 and stride 2, several tiles, iterations and
// partially used PE columns) with randomly stalling FIFOs. The testbench
// builds, from the tiling equations, the expected sequence of
//   IGBuf read addresses and input GReg (segment, address) writes,
//   WGBuf read addresses and weight GReg writes,
//   lock-step MAC controls (input MUX select, weight MUX select, LReg
//   address, first flag),
//   output MUX selects and output tags,
// and compares each event as it happens. It also checks that a pass is
// exactly xs*ys*zs back-to-back MAC cycles, the number of FIFO pops and that
// 'done' pulses once per run.
// Interface: no ports; it plays the FIFOs (random valid gaps) and the output
// FIFO (random ready) around the controller at its default parameters. Timing:
// 10 ns clock, reference events checked cycle by cycle, watchdog on the cycle
// count. The loop structure checked follows the paper; the state sequence and
// event order are this design's.
module tb_controller;
  import cla_pkg::*;
  localparam int unsigned P = 16, Q = 16, LREG_DEPTH = 128, WG_DEPTH = 256;
  localparam int unsigned IG_DEPTH = 1024, SEG_DEPTH = 64;

  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  layer_cfg_t cfg;
  logic busy, done;
  logic in_fifo_valid, in_fifo_pop, w_fifo_valid, w_fifo_pop;
  logic [9:0] igbuf_waddr, igbuf_raddr;
  logic [7:0] wgbuf_waddr, wgbuf_raddr, wg_waddr;
  logic igbuf_re, ig_we, wgbuf_re, wg_we, mac_en, first, out_valid, out_ready;
  logic [3:0] ig_wseg, out_row, out_col, w_sel;
  logic [5:0] ig_waddr, in_sel;
  logic [6:0] lreg_addr;
  out_tag_t out_tag;

  controller #(.P(P), .Q(Q), .LREG_DEPTH(LREG_DEPTH), .WG_DEPTH(WG_DEPTH),
               .IG_DEPTH(IG_DEPTH), .SEG_DEPTH(SEG_DEPTH)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int exp_ird[$], exp_igw[$], exp_wrd[$], exp_mac[$], exp_out[$];
  int n_in_pop, n_w_pop, n_done, run_len, n_pass_ok, n_stall;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %0t: %s", $time, what);
    end
  endtask

  // Expected event streams of one run.
  task automatic build(input layer_cfg_t k);
    int xsp, ysp, xp, yp, plane, nact;
    xsp = (k.xs - 1) * k.stride + k.wk;
    ysp = (k.ys - 1) * k.stride + k.hk;
    xp  = (k.nbx * k.xs - 1) * k.stride + k.wk;
    yp  = (k.nby * k.ys - 1) * k.stride + k.hk;
    plane = xp * yp;
    nact = k.nb * k.nby * k.nbx;
    for (int t = 0; t < k.n_tiles; t++) begin
      for (int it = 0; it < k.ci; it++) begin
        for (int bi = 0; bi < k.nb; bi++)
          for (int by = 0; by < k.nby; by++)
            for (int bx = 0; bx < k.nbx; bx++)
              for (int ry = 0; ry < ysp; ry++)
                for (int rx = 0; rx < xsp; rx++) begin
                  exp_ird.push_back(bi * plane + (by * k.ys * k.stride + ry) * xp + bx * k.xs * k.stride + rx);
                  exp_igw.push_back(((bi * k.nby + by) * k.nbx + bx) * 256 + ry * xsp + rx);
                end
        for (int ky = 0; ky < k.hk; ky++)
          for (int kx = 0; kx < k.wk; kx++) begin
            for (int jj = 0; jj < k.z; jj++) exp_wrd.push_back(jj);
            for (int jj = 0; jj < k.zs; jj++)
              for (int oy = 0; oy < k.ys; oy++)
                for (int ox = 0; ox < k.xs; ox++)
                  exp_mac.push_back((((oy * k.stride + ky) * xsp + ox * k.stride + kx) << 16)
                                    | (jj << 8) | (((jj * k.ys + oy) * k.xs + ox) << 1)
                                    | int'(it == 0 && ky == 0 && kx == 0));
          end
      end
      for (int bi = 0; bi < k.nb; bi++)
        for (int by = 0; by < k.nby; by++)
          for (int bx = 0; bx < k.nbx; bx++)
            for (int c = 0; c < Q; c++)
              for (int jj = 0; jj < k.zs; jj++) begin
                if (c + Q * jj >= k.z) continue;
                for (int oy = 0; oy < k.ys; oy++)
                  for (int ox = 0; ox < k.xs; ox++)
                    exp_out.push_back(int'({8'(bi), 9'(c + Q * jj), 8'(by * k.ys + oy), 8'(bx * k.xs + ox)}) ^
                                      (((bi * k.nby + by) * k.nbx + bx) << 28) ^ (c << 24));
              end
    end
  endtask

  // Event monitor.
  logic ig_pend;
  int   ig_exp_w;
  always @(posedge clk) begin
    if (rst_n) begin
      if (in_fifo_pop) n_in_pop++;
      if (w_fifo_pop) n_w_pop++;
      if (done) n_done++;
      if (dut.wait_igbuf) n_stall++;
      if (igbuf_re) begin
        check(exp_ird.size() > 0 && int'(igbuf_raddr) == exp_ird[0], "IGBuf read address");
        if (exp_ird.size() > 0) void'(exp_ird.pop_front());
      end
      if (ig_we) begin
        check(exp_igw.size() > 0 && (int'(ig_wseg) * 256 + int'(ig_waddr)) == exp_igw[0], "input GReg write");
        if (exp_igw.size() > 0) void'(exp_igw.pop_front());
      end
      if (wgbuf_re) begin
        check(exp_wrd.size() > 0 && int'(wgbuf_raddr) == exp_wrd[0], "WGBuf read address");
        if (exp_wrd.size() > 0) void'(exp_wrd.pop_front());
      end
      if (mac_en) begin
        int got;
        got = (int'(in_sel) << 16) | (int'(w_sel) << 8) | (int'(lreg_addr) << 1) | int'(first);
        check(exp_mac.size() > 0 && got == exp_mac[0], "MAC controls");
        if (exp_mac.size() > 0) void'(exp_mac.pop_front());
        run_len++;
      end else if (run_len != 0) begin
        check(run_len == int'(cfg.xs) * cfg.ys * cfg.zs, "pass length xs*ys*zs back-to-back cycles");
        n_pass_ok++;
        run_len = 0;
      end
      if (out_valid && out_ready) begin
        int got;
        got = int'(out_tag) ^ (int'(out_row) << 28) ^ (int'(out_col) << 24);
        check(exp_out.size() > 0 && got == exp_out[0], "output tag and MUX select");
        if (exp_out.size() > 0) void'(exp_out.pop_front());
      end
    end
  end

  task automatic run(input layer_cfg_t k);
    int xp, yp, passes_before;
    xp = (k.nbx * k.xs - 1) * k.stride + k.wk;
    yp = (k.nby * k.ys - 1) * k.stride + k.hk;
    n_in_pop = 0; n_w_pop = 0; n_done = 0; passes_before = n_pass_ok;
    build(k);
    cfg = k;
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    while (busy) @(negedge clk);
    repeat (3) @(negedge clk);
    check(exp_ird.size() == 0 && exp_igw.size() == 0 && exp_wrd.size() == 0, "all loads done");
    check(exp_mac.size() == 0 && exp_out.size() == 0, "all MACs and outputs done");
    check(n_done == 1, "done pulses once");
    check(n_in_pop == k.n_tiles * k.ci * k.nb * xp * yp, "input FIFO pops");
    check(n_w_pop == k.n_tiles * k.ci * k.wk * k.hk * k.z, "weight FIFO pops");
    check(n_pass_ok - passes_before == k.n_tiles * k.ci * k.wk * k.hk, "number of passes");
  endtask

  // Random FIFO availability and output backpressure.
  always @(negedge clk) begin
    in_fifo_valid = ($urandom_range(0, 3) != 0);
    w_fifo_valid  = ($urandom_range(0, 3) != 0);
    out_ready     = ($urandom_range(0, 4) != 0);
  end

  initial begin
    layer_cfg_t k;
    cfg = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    k = '0;
    k.n_tiles = 2; k.ci = 2; k.wk = 3; k.hk = 3; k.stride = 1;
    k.xs = 2; k.ys = 2; k.zs = 2; k.z = 20; k.nbx = 2; k.nby = 1; k.nb = 2;
    run(k);
    k.n_tiles = 1; k.ci = 3; k.wk = 3; k.hk = 2; k.stride = 2;
    k.xs = 3; k.ys = 1; k.zs = 3; k.z = 40; k.nbx = 1; k.nby = 3; k.nb = 1;
    run(k);
    check(n_stall > 0, "controller waited for the IGBuf at least once");
    $display("passes=%0d stall_cycles=%0d", n_pass_ok, n_stall);
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
