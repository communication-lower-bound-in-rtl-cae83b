// conv_tb_core: stimulus, DRAM-side streams and checker shared by the
// end-to-end accelerator testbenches (tb_cla_accel, tb_cla_accel_full).
//
// For each layer in its list it draws random inputs in[B][Ci][Hi][Wi] and
// weights w[Co][Ci][Hk][Wk], computes the reference convolution with the
// accumulation order of the hardware (input channel, then ky, then kx) and
// saturating 16-bit fixed-point arithmetic (8 fraction bits), and plays the
// part of the DRAM: it streams the inputs and weights of every tile in the
// order the accelerator expects (tiles in the order batch, output channel,
// output row, output column; zero padding where a tile reaches past the
// layer) with random gaps, and drains the outputs with random backpressure.
// Every output inside the layer is compared with the reference; outputs of a
// tile that reach past the layer are counted and dropped.
// Mechanism events come in on 'ev' from the enclosing testbench:
//   0 the sequencer waits for the IGBuf    1 it waits for the WGBuf
//   2 a GBuf is filled during a pass       3 the output FIFO is full in drain
//   4 a pass starts a new tile (first)     5 drain skips an unused PE column
//   6 a MAC cycle
// With REQUIRE_ALL each of them must happen at least once, and so must
// boundary tiles, idle PE rows and a stride-2 layer. The number of MAC
// cycles must equal tiles*ci*Wk*Hk*xs*ys*zs: one MAC per PE per cycle.
// Interface: ports to the DUT's stream, control and configuration pins,
// plus 'ev'; it generates clk and rst_n itself and ends the simulation with the
// TB_RESULT line. Timing: 10 ns clock; a watchdog of WATCHDOG cycles counts a
// failure. The tiling, loop order and data sharing checked here follow the
// paper; the stream orders, tags and number format are this design's choices.
module conv_tb_core
  import cla_pkg::*;
#(
  parameter int unsigned P           = 16,
  parameter int unsigned Q           = 16,
  parameter bit          FULL        = 1'b0,  // full-size layer list
  parameter bit          REQUIRE_ALL = 1'b1,
  parameter int unsigned WATCHDOG    = 2000000
) (
  output logic       clk,
  output logic       rst_n,
  output logic       start,
  output layer_cfg_t cfg,
  input  logic       busy,
  input  logic       done,
  output logic       in_valid,
  input  logic       in_ready,
  output data_t      in_data,
  output logic       w_valid,
  input  logic       w_ready,
  output data_t      w_data,
  input  logic       out_valid,
  output logic       out_ready,
  input  data_t      out_data,
  input  out_tag_t   out_tag,
  input  logic [6:0] ev
);
  typedef struct {
    int B, Ci, Co, Ho, Wo, Wk, Hk, D;
    int b, z, zs, xs, ys, nbx, nby;
  } layer_t;

  int checks = 0, failures = 0;
  int ev_cnt [7];
  int n_boundary = 0, n_idle_rows = 0, n_stride2 = 0;

  // Layer tensors (flattened).
  data_t in_t [], w_t [], ref_t [];
  layer_t L;
  int Hi, Wi;

  initial clk = 1'b0;
  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %0t: %s", $time, what);
    end
  endtask

  function automatic int iidx(int bi, int ci, int yy, int xx);
    return ((bi * L.Ci + ci) * Hi + yy) * Wi + xx;
  endfunction
  function automatic int widx(int co, int ci, int ky, int kx);
    return ((co * L.Ci + ci) * L.Hk + ky) * L.Wk + kx;
  endfunction
  function automatic int oidx(int bi, int co, int oy, int ox);
    return ((bi * L.Co + co) * L.Ho + oy) * L.Wo + ox;
  endfunction

  // Fixed-point MAC written independently of the RTL: floor(a*w/256), clamp.
  function automatic data_t ref_mac(data_t acc, data_t a, data_t w);
    longint p, s;
    p = longint'(a) * longint'(w);
    s = (p >= 0) ? (p / 256) : -((-p + 255) / 256);
    s = s + longint'(acc);
    if (s > 32767) s = 32767;
    if (s < -32768) s = -32768;
    return data_t'(s);
  endfunction


  task automatic make_layer();
    Hi = (L.Ho - 1) * L.D + L.Hk;
    Wi = (L.Wo - 1) * L.D + L.Wk;
    in_t  = new[L.B * L.Ci * Hi * Wi];
    w_t   = new[L.Co * L.Ci * L.Hk * L.Wk];
    ref_t = new[L.B * L.Co * L.Ho * L.Wo];
    foreach (in_t[i]) in_t[i] = data_t'($urandom_range(0, 1023) - 512);
    foreach (w_t[i])  w_t[i]  = data_t'($urandom_range(0, 1023) - 512);
    for (int bi = 0; bi < L.B; bi++)
      for (int co = 0; co < L.Co; co++)
        for (int oy = 0; oy < L.Ho; oy++)
          for (int ox = 0; ox < L.Wo; ox++) begin
            data_t acc;
            acc = '0;
            for (int ci = 0; ci < L.Ci; ci++)
              for (int ky = 0; ky < L.Hk; ky++)
                for (int kx = 0; kx < L.Wk; kx++)
                  acc = ref_mac(acc, in_t[iidx(bi, ci, oy * L.D + ky, ox * L.D + kx)],
                                w_t[widx(co, ci, ky, kx)]);
            ref_t[oidx(bi, co, oy, ox)] = acc;
          end
  endtask

  // Tile origins in DRAM order: batch, output channel, output row, column.
  int t_b [$], t_z [$], t_y [$], t_x [$];
  task automatic make_tiles();
    int ty, tx;
    ty = L.nby * L.ys;
    tx = L.nbx * L.xs;
    t_b.delete(); t_z.delete(); t_y.delete(); t_x.delete();
    for (int i = 0; i < L.B; i += L.b)
      for (int oz = 0; oz < L.Co; oz += L.z)
        for (int oy = 0; oy < L.Ho; oy += ty)
          for (int ox = 0; ox < L.Wo; ox += tx) begin
            t_b.push_back(i); t_z.push_back(oz); t_y.push_back(oy); t_x.push_back(ox);
          end
  endtask

  // DRAM -> input FIFO stream.
  bit stream_go = 0;
  initial begin
    in_valid = 0; in_data = '0;
    forever begin
      @(negedge clk);
      if (stream_go) begin
        int xp, yp;
        xp = (L.nbx * L.xs - 1) * L.D + L.Wk;
        yp = (L.nby * L.ys - 1) * L.D + L.Hk;
        for (int t = 0; t < t_b.size(); t++)
          for (int ci = 0; ci < L.Ci; ci++)
            for (int bi = 0; bi < L.b; bi++)
              for (int yy = 0; yy < yp; yy++)
                for (int xx = 0; xx < xp; xx++) begin
                  int gi, gy, gx;
                  gi = t_b[t] + bi; gy = t_y[t] * L.D + yy; gx = t_x[t] * L.D + xx;
                  while ($urandom_range(0, 5) == 0) begin
                    in_valid = 0;
                    @(negedge clk);
                  end
                  in_valid = 1;
                  in_data  = (gi < L.B && gy < Hi && gx < Wi) ? in_t[iidx(gi, ci, gy, gx)] : data_t'(0);
                  @(posedge clk);
                  while (!in_ready) @(posedge clk);
                  @(negedge clk);
                end
        in_valid = 0;
        wait (!stream_go);
      end
    end
  end

  // DRAM -> weight FIFO stream.
  initial begin
    w_valid = 0; w_data = '0;
    forever begin
      @(negedge clk);
      if (stream_go) begin
        for (int t = 0; t < t_b.size(); t++)
          for (int ci = 0; ci < L.Ci; ci++)
            for (int ky = 0; ky < L.Hk; ky++)
              for (int kx = 0; kx < L.Wk; kx++)
                for (int jj = 0; jj < L.z; jj++) begin
                  int co;
                  co = t_z[t] + jj;
                  while ($urandom_range(0, 2) == 0) begin
                    w_valid = 0;
                    @(negedge clk);
                  end
                  w_valid = 1;
                  w_data  = (co < L.Co) ? w_t[widx(co, ci, ky, kx)] : data_t'(0);
                  @(posedge clk);
                  while (!w_ready) @(posedge clk);
                  @(negedge clk);
                end
        w_valid = 0;
        wait (!stream_go);
      end
    end
  end

  // Output side: random backpressure, compare with the reference.
  int out_tile, out_in_tile, per_tile, n_out;
  always @(negedge clk) out_ready = ($urandom_range(0, 9) > 2);

  always @(posedge clk) begin
    if (rst_n && out_valid && out_ready) begin
      int gi, gz, gy, gx;
      if (out_tile < t_b.size()) begin
        gi = t_b[out_tile] + int'(out_tag.img);
        gz = t_z[out_tile] + int'(out_tag.chan);
        gy = t_y[out_tile] + int'(out_tag.oy);
        gx = t_x[out_tile] + int'(out_tag.ox);
        if (gi < L.B && gz < L.Co && gy < L.Ho && gx < L.Wo) begin
          check(out_data == ref_t[oidx(gi, gz, gy, gx)], "output value");
          if (out_data != ref_t[oidx(gi, gz, gy, gx)] && failures < 20)
            $display("  out[%0d][%0d][%0d][%0d] got %0d want %0d", gi, gz, gy, gx,
                     out_data, ref_t[oidx(gi, gz, gy, gx)]);
          n_out++;
        end else begin
          n_boundary++;
        end
      end else begin
        check(0, "output beyond the last tile");
      end
      out_in_tile++;
      if (out_in_tile == per_tile) begin
        out_in_tile = 0;
        out_tile++;
      end
    end
  end

  always @(posedge clk) begin
    if (rst_n) for (int e = 0; e < 7; e++) if (ev[e]) ev_cnt[e]++;
  end

  task automatic run_layer(input layer_t lay);
    int mac_before, cycles;
    L = lay;
    make_layer();
    make_tiles();
    per_tile = L.b * L.nby * L.nbx * L.xs * L.ys * L.z;
    out_tile = 0; out_in_tile = 0; n_out = 0;
    mac_before = ev_cnt[6];
    if (L.b * L.nby * L.nbx < int'(P)) n_idle_rows++;
    if (L.D > 1) n_stride2++;
    cfg = '0;
    cfg.n_tiles = 16'(t_b.size());
    cfg.ci = 16'(L.Ci); cfg.wk = 8'(L.Wk); cfg.hk = 8'(L.Hk); cfg.stride = 4'(L.D);
    cfg.xs = 8'(L.xs); cfg.ys = 8'(L.ys); cfg.zs = 8'(L.zs); cfg.z = 9'(L.z);
    cfg.nbx = 8'(L.nbx); cfg.nby = 8'(L.nby); cfg.nb = 8'(L.b);
    stream_go = 1;
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    cycles = 0;
    while (busy || out_valid) begin
      @(negedge clk);
      cycles++;
    end
    stream_go = 0;
    repeat (2) @(negedge clk);
    check(out_tile == t_b.size(), "number of tiles drained");
    check(n_out == L.B * L.Co * L.Ho * L.Wo, "every output of the layer checked");
    check(ev_cnt[6] - mac_before == t_b.size() * L.Ci * L.Wk * L.Hk * L.xs * L.ys * L.zs,
          "MAC cycles = tiles*ci*Wk*Hk*xs*ys*zs (one pass = xs*ys*zs cycles)");
    $display("layer %0dx%0dx%0dx%0d k%0dx%0d D%0d: %0d tiles, %0d outputs, %0d cycles",
             L.B, L.Co, L.Ho, L.Wo, L.Wk, L.Hk, L.D, t_b.size(), n_out, cycles);
  endtask

  initial begin
    layer_t lay;
    rst_n = 0; start = 0; cfg = '0;
    foreach (ev_cnt[e]) ev_cnt[e] = 0;
    repeat (4) @(negedge clk);
    rst_n = 1;
    repeat (2) @(negedge clk);
    if (FULL) begin
      // One tile with every PE and every LReg in use (16x16 PEs,
      // 128 Psums each: xs*ys*zs = 4*2*16), z = 256 output channels.
      lay = '{B:1, Ci:2, Co:256, Ho:8, Wo:16, Wk:3, Hk:3, D:1,
              b:1, z:256, zs:16, xs:4, ys:2, nbx:4, nby:4};
      run_layer(lay);
    end else begin
      // 3x3 stride 1, boundary tiles in rows and channels.
      lay = '{B:2, Ci:3, Co:10, Ho:5, Wo:6, Wk:3, Hk:3, D:1,
              b:1, z:8, zs:2, xs:3, ys:2, nbx:2, nby:2};
      run_layer(lay);
      // 3x3 stride 2, two images per tile, idle PE rows, z not a multiple of Q.
      lay = '{B:2, Ci:2, Co:6, Ho:3, Wo:3, Wk:3, Hk:3, D:2,
              b:2, z:6, zs:2, xs:3, ys:3, nbx:1, nby:1};
      run_layer(lay);
      // 1x1 kernel (no sliding-window reuse, R = 1).
      lay = '{B:1, Ci:4, Co:8, Ho:4, Wo:4, Wk:1, Hk:1, D:1,
              b:1, z:8, zs:2, xs:2, ys:2, nbx:2, nby:2};
      run_layer(lay);
    end
    $display("events: wait_igbuf=%0d wait_wgbuf=%0d prefetch_in_pass=%0d out_fifo_full=%0d first_pass=%0d col_skip=%0d mac=%0d",
             ev_cnt[0], ev_cnt[1], ev_cnt[2], ev_cnt[3], ev_cnt[4], ev_cnt[5], ev_cnt[6]);
    $display("boundary_outputs=%0d idle_row_layers=%0d stride2_layers=%0d",
             n_boundary, n_idle_rows, n_stride2);
    if (REQUIRE_ALL) begin
      for (int e = 0; e < 7; e++) check(ev_cnt[e] > 0, $sformatf("mechanism event %0d happened", e));
      check(n_boundary > 0, "boundary tile outputs happened");
      check(n_idle_rows > 0, "layer with idle PE rows ran");
      check(n_stride2 > 0, "stride-2 layer ran");
    end else begin
      check(ev_cnt[6] > 0 && ev_cnt[4] > 0, "MACs and tile start happened");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
