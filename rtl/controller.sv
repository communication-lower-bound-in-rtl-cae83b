// controller: the global finite-state machine of the accelerator.
//
// It runs one convolutional layer as n_tiles output tiles. For every tile it
// runs ci iterations (one input channel each, k = 1) and every iteration runs
// Wk*Hk passes (one kernel position (ky,kx) each):
//
//   for tile:                                   (Fig. 8 outer loops)
//     for it in 0..ci-1:                        (iterations)
//       LOAD_IN : IGBuf -> input GReg segments  (once per iteration)
//       for ky, kx:                             (passes)
//         LOAD_W  : WGBuf -> weight GReg row    (z weights)
//         COMPUTE : xs*ys*zs cycles, one MAC per PE per cycle
//     DRAIN : LRegs -> output FIFO, one output per cycle
//
// PE row r works on output block r of the tile (image bi, block row by, block
// column bx; bx counts fastest) and its input GReg segment holds that block's
// xs'*ys' window, xs' = (xs-1)*D+Wk, ys' = (ys-1)*D+Hk. PE column c computes
// output channels c, c+Q, ..., c+Q*(zs-1). In COMPUTE the controller walks
// j (channel step), oy, ox and drives, identically to all PEs,
//   weight MUX select = j
//   input MUX select  = (oy*D+ky)*xs' + ox*D + kx
//   LReg address      = (j*ys+oy)*xs + ox
//   first             = first pass of the first iteration (Psum starts at 0).
//
// Prefetch: two fill engines run beside the sequencer. As soon as the IGBuf
// has been copied to the GRegs it is refilled from the input FIFO with the
// next iteration's b*x'*y' inputs (x' = (nbx*xs-1)*D+Wk, y' likewise); as
// soon as the WGBuf has been copied it is refilled with the next pass's z
// weights. The engines count the fills of the run (n_tiles*ci input sets,
// n_tiles*ci*Wk*Hk weight sets) and take nothing from the FIFOs beyond them. Filling overlaps COMPUTE and DRAIN; the sequencer waits (stalls)
// in LOAD_IN / LOAD_W only when a GBuf is not yet full. The DRAIN waits
// while the output FIFO is full.
//
// DRAM-side order expected on the two input FIFOs (the natural order of the
// tile loops): inputs per tile, per input channel, per image, row-major y'
// rows of x' values; weights per tile, per input channel, per ky, per kx, the
// z weights of output channels 0..z-1 of the tile. Outputs leave per PE row
// block, per PE column c, per j with c+Q*j < z, row-major, with a tag giving
// image, channel, row and column inside the tile.
//
// Timing: GBuf reads have one cycle of latency, so each copy into the GRegs
// is a one-stage pipeline; the sequencer leaves a load state only when that
// pipeline is empty. LOAD_IN takes n_act*xs'*ys' + 2 cycles, LOAD_W z + 2
// cycles, a pass xs*ys*zs cycles, when no GBuf is waiting for data.
// The paper describes the controller only as an FSM that generates all
// read/write signals, addresses and MUX selects; the state sequence, the
// fill engines, the data orders and the handshakes are this design's
// choices, derived from the paper's dataflow and mapping.
//
// Lint notes: wait_igbuf, wait_wgbuf and drain_skip are status signals that
// nothing in the design reads; they exist so that testbenches can count how
// often the sequencer stalls and the drain skips a column. The nb field of the
// latched configuration is used only at start, inside the products checked
// and latched there, so its latched bits are unread. rst_n is both the
// asynchronous reset of the registers and the 'disable iff' condition of the
// handshake assertions, which Verilator reports as SYNCASYNCNET; the
// assertions are not part of the circuit.
module controller
  import cla_pkg::*;
#(
  parameter int unsigned P          = 16,
  parameter int unsigned Q          = 16,
  parameter int unsigned LREG_DEPTH = 128,
  parameter int unsigned WG_DEPTH   = 256,
  parameter int unsigned IG_DEPTH   = 1024,
  parameter int unsigned SEG_DEPTH  = 64
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          start,
  input  layer_cfg_t                    cfg,
  output logic                          busy,
  output logic                          done,
  // input FIFO -> IGBuf
  input  logic                          in_fifo_valid,
  output logic                          in_fifo_pop,
  output logic [$clog2(IG_DEPTH)-1:0]   igbuf_waddr,
  // weight FIFO -> WGBuf
  input  logic                          w_fifo_valid,
  output logic                          w_fifo_pop,
  output logic [$clog2(WG_DEPTH)-1:0]   wgbuf_waddr,
  // IGBuf -> input GRegs
  output logic                          igbuf_re,
  output logic [$clog2(IG_DEPTH)-1:0]   igbuf_raddr,
  output logic                          ig_we,
  output logic [$clog2(P)-1:0]          ig_wseg,
  output logic [$clog2(SEG_DEPTH)-1:0]  ig_waddr,
  // WGBuf -> weight GRegs
  output logic                          wgbuf_re,
  output logic [$clog2(WG_DEPTH)-1:0]   wgbuf_raddr,
  output logic                          wg_we,
  output logic [$clog2(WG_DEPTH)-1:0]   wg_waddr,
  // PE array controls
  output logic [$clog2(SEG_DEPTH)-1:0]  in_sel,
  output logic [$clog2(WG_DEPTH/Q)-1:0] w_sel,
  output logic                          mac_en,
  output logic                          first,
  output logic [$clog2(LREG_DEPTH)-1:0] lreg_addr,
  // output MUX -> output FIFO
  output logic [$clog2(P)-1:0]          out_row,
  output logic [$clog2(Q)-1:0]          out_col,
  output logic                          out_valid,
  input  logic                          out_ready,
  output out_tag_t                      out_tag
);
  localparam int unsigned IGA = $clog2(IG_DEPTH);
  localparam int unsigned WGA = $clog2(WG_DEPTH);
  localparam int unsigned SGA = $clog2(SEG_DEPTH);
  localparam int unsigned LA  = $clog2(LREG_DEPTH);
  localparam int unsigned PA  = $clog2(P);
  localparam int unsigned QA  = $clog2(Q);
  localparam int unsigned WSA = $clog2(WG_DEPTH/Q);

  typedef enum logic [2:0] {S_IDLE, S_LOAD_IN, S_LOAD_W, S_COMPUTE, S_DRAIN} state_t;
  state_t state;

  // Latched configuration and derived sizes.
  layer_cfg_t c;
  logic [15:0] xsp, ysp;        // xs', ys': PE-row input window
  logic [15:0] xp;              // x': tile input plane width
  logic [15:0] plane;           // x'*y'
  logic [15:0] in_need;         // inputs per iteration, b*x'*y'
  logic [7:0]  n_act;           // active PE rows, b*nby*nbx

  // Derived sizes of the incoming configuration (used at start).
  logic [15:0] d_xsp, d_ysp, d_xp, d_yp, d_plane, d_in_need;
  logic [15:0] d_nact, d_lregs;
  always_comb begin
    d_xsp     = 16'((16'(cfg.xs) - 16'd1) * cfg.stride) + 16'(cfg.wk);
    d_ysp     = 16'((16'(cfg.ys) - 16'd1) * cfg.stride) + 16'(cfg.hk);
    d_xp      = 16'((16'(cfg.nbx) * cfg.xs - 16'd1) * cfg.stride) + 16'(cfg.wk);
    d_yp      = 16'((16'(cfg.nby) * cfg.ys - 16'd1) * cfg.stride) + 16'(cfg.hk);
    d_plane   = 16'(d_xp * d_yp);
    d_in_need = 16'(d_plane * cfg.nb);
    d_nact    = 16'(16'(cfg.nb) * cfg.nby * cfg.nbx);
    d_lregs   = 16'(16'(cfg.xs) * cfg.ys * cfg.zs);
  end

  // Loop counters.
  logic [15:0] tile_cnt, it_cnt;
  logic [7:0]  kx, ky;
  logic [7:0]  r, bi, by, bx;   // PE row block (load-in and drain)
  logic [7:0]  ry, rx;          // position in a segment window
  logic [SGA-1:0] swaddr;       // segment write address ry*xs'+rx
  logic [8:0]  wj;              // weight copy index
  logic [7:0]  j, oy, ox;       // compute / drain position
  logic [7:0]  dc;              // drain PE column
  logic [LA-1:0] lcnt;          // LReg address (j*ys+oy)*xs+ox
  logic        issued;          // all GBuf reads of a load issued

  // GBuf -> GReg copy pipelines (one cycle GBuf read latency).
  logic           ig_pv, wg_pv;
  logic [PA-1:0]  ig_pseg;
  logic [SGA-1:0] ig_paddr;
  logic [WGA-1:0] wg_paddr;

  // Fill engines.
  logic        in_full, w_full;
  logic [15:0] in_wcnt;
  logic [8:0]  w_wcnt;
  logic        in_release, w_release;
  logic [31:0] in_sets, w_sets;  // GBuf fills still to come in this run

  assign busy = (state != S_IDLE);

  // ---------------------------------------------------------------- fill
  assign in_fifo_pop = busy && !in_full && (in_sets != 0) && in_fifo_valid;
  assign w_fifo_pop  = busy && !w_full && (w_sets != 0) && w_fifo_valid;
  assign igbuf_waddr = IGA'(in_wcnt);
  assign wgbuf_waddr = WGA'(w_wcnt);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      in_full <= 1'b0;
      w_full  <= 1'b0;
      in_wcnt <= '0;
      w_wcnt  <= '0;
      in_sets <= '0;
      w_sets  <= '0;
    end else if (state == S_IDLE) begin
      // One input set per iteration, one weight set per pass.
      in_sets <= 32'(cfg.n_tiles) * cfg.ci;
      w_sets  <= 32'(cfg.n_tiles) * cfg.ci * cfg.wk * cfg.hk;
    end else begin
      if (in_release) in_full <= 1'b0;
      if (in_fifo_pop) begin
        if (in_wcnt == in_need - 16'd1) begin
          in_full <= 1'b1;
          in_wcnt <= '0;
          in_sets <= in_sets - 32'd1;
        end else begin
          in_wcnt <= in_wcnt + 16'd1;
        end
      end
      if (w_release) w_full <= 1'b0;
      if (w_fifo_pop) begin
        if (w_wcnt == c.z - 9'd1) begin
          w_full <= 1'b1;
          w_wcnt <= '0;
          w_sets <= w_sets - 32'd1;
        end else begin
          w_wcnt <= w_wcnt + 9'd1;
        end
      end
    end
  end

  // ---------------------------------------------------------- datapath
  logic last_rx, last_ry, last_r, last_wj, last_ox, last_oy, last_j, last_kx, last_ky, last_it;
  logic last_tile, last_dc, drain_ok, last_pos, leave_col;
  assign last_rx   = ({8'd0, rx} == xsp - 16'd1);
  assign last_ry   = ({8'd0, ry} == ysp - 16'd1);
  assign last_r    = (r == n_act - 8'd1);
  assign last_wj   = (wj == c.z - 9'd1);
  assign last_ox   = (ox == c.xs - 8'd1);
  assign last_oy   = (oy == c.ys - 8'd1);
  assign last_j    = (j == c.zs - 8'd1);
  assign last_kx   = (kx == c.wk - 8'd1);
  assign last_ky   = (ky == c.hk - 8'd1);
  assign last_it   = (it_cnt == c.ci - 16'd1);
  assign last_tile = (tile_cnt == c.n_tiles - 16'd1);
  assign last_dc   = (dc == 8'(Q - 1));
  // Drain element exists: channel dc + Q*j is one of the tile's z channels.
  assign drain_ok  = (16'(dc) + 16'(Q) * 16'(j)) < 16'(c.z);

  // Address arithmetic.
  always_comb begin
    igbuf_raddr = IGA'(32'(bi) * plane
                       + (32'(by) * c.ys * c.stride + 32'(ry)) * xp
                       + 32'(bx) * c.xs * c.stride + 32'(rx));
    in_sel      = SGA'((32'(oy) * c.stride + 32'(ky)) * xsp + 32'(ox) * c.stride + 32'(kx));
    w_sel       = WSA'(j);
    lreg_addr   = lcnt;
    wgbuf_raddr = WGA'(wj);
    out_row     = PA'(r);
    out_col     = QA'(dc);
    out_tag.img  = bi;
    out_tag.chan = 9'(16'(dc) + 16'(Q) * 16'(j));
    out_tag.oy   = 8'(16'(by) * c.ys + 16'(oy));
    out_tag.ox   = 8'(16'(bx) * c.xs + 16'(ox));
  end

  assign igbuf_re   = (state == S_LOAD_IN) && !issued && in_full;
  assign wgbuf_re   = (state == S_LOAD_W) && !issued && w_full;
  assign in_release = igbuf_re && last_r && last_ry && last_rx;
  assign w_release  = wgbuf_re && last_wj;
  assign mac_en     = (state == S_COMPUTE);
  assign first      = (it_cnt == 16'd0) && (kx == 8'd0) && (ky == 8'd0);
  assign out_valid  = (state == S_DRAIN) && drain_ok;

  // Status: sequencer waiting for a GBuf fill, drain skipping a PE column
  // whose next channel lies outside the tile.
  logic wait_igbuf, wait_wgbuf, drain_skip;
  assign wait_igbuf = (state == S_LOAD_IN) && !issued && !in_full;
  assign wait_wgbuf = (state == S_LOAD_W) && !issued && !w_full;
  assign drain_skip = (state == S_DRAIN) && !drain_ok;

  assign ig_we    = ig_pv;
  assign ig_wseg  = ig_pseg;
  assign ig_waddr = ig_paddr;
  assign wg_we    = wg_pv;
  assign wg_waddr = wg_paddr;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ig_pv    <= 1'b0;
      wg_pv    <= 1'b0;
      ig_pseg  <= '0;
      ig_paddr <= '0;
      wg_paddr <= '0;
    end else begin
      ig_pv    <= igbuf_re;
      ig_pseg  <= PA'(r);
      ig_paddr <= swaddr;
      wg_pv    <= wgbuf_re;
      wg_paddr <= WGA'(wj);
    end
  end

  // Next PE-row block {r, bi, by, bx}: bx fastest, then by, then image bi.
  function automatic logic [31:0] blk_next();
    logic [7:0] nbi, nby_, nbx_;
    nbi  = bi;
    nby_ = by;
    nbx_ = bx + 8'd1;
    if (bx == c.nbx - 8'd1) begin
      nbx_ = '0;
      nby_ = by + 8'd1;
      if (by == c.nby - 8'd1) begin
        nby_ = '0;
        nbi  = bi + 8'd1;
      end
    end
    return {r + 8'd1, nbi, nby_, nbx_};
  endfunction

  // Next position {j, oy, ox, lcnt}: ox fastest, then oy, then j; wraps to 0.
  function automatic logic [24+LA-1:0] pos_next();
    logic [7:0] nj, noy, nox;
    nj  = j;
    noy = oy;
    nox = ox + 8'd1;
    if (last_ox) begin
      nox = '0;
      noy = oy + 8'd1;
      if (last_oy) begin
        noy = '0;
        nj  = last_j ? 8'd0 : j + 8'd1;
      end
    end
    return {nj, noy, nox, last_pos ? LA'(0) : lcnt + 1'b1};
  endfunction

  assign last_pos  = last_ox && last_oy && last_j;
  // DRAIN leaves a PE column when its next channel is not in the tile or its
  // last output has been accepted.
  assign leave_col = !drain_ok || (out_ready && last_pos);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      done     <= 1'b0;
      c        <= '0;
      xsp      <= '0;
      ysp      <= '0;
      xp       <= '0;
      plane    <= '0;
      in_need  <= '0;
      n_act    <= '0;
      tile_cnt <= '0;
      it_cnt   <= '0;
      kx       <= '0;
      ky       <= '0;
      r        <= '0;
      bi       <= '0;
      by       <= '0;
      bx       <= '0;
      ry       <= '0;
      rx       <= '0;
      swaddr   <= '0;
      wj       <= '0;
      j        <= '0;
      oy       <= '0;
      ox       <= '0;
      dc       <= '0;
      lcnt     <= '0;
      issued   <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: begin
          if (start) begin
            c        <= cfg;
            xsp      <= d_xsp;
            ysp      <= d_ysp;
            xp       <= d_xp;
            plane    <= d_plane;
            in_need  <= d_in_need;
            n_act    <= 8'(d_nact);
            tile_cnt <= '0;
            it_cnt   <= '0;
            kx       <= '0;
            ky       <= '0;
            {r, bi, by, bx} <= '0;
            {j, oy, ox, lcnt} <= '0;
            ry       <= '0;
            rx       <= '0;
            swaddr   <= '0;
            wj       <= '0;
            dc       <= '0;
            issued   <= 1'b0;
            state    <= S_LOAD_IN;
          end
        end

        // Copy each active PE row's xs'*ys' window from the IGBuf into its
        // input GReg segment (all GReg column copies at once).
        S_LOAD_IN: begin
          if (!issued) begin
            if (igbuf_re) begin
              swaddr <= swaddr + 1'b1;
              if (last_rx) begin
                rx <= '0;
                if (last_ry) begin
                  ry     <= '0;
                  swaddr <= '0;
                  if (last_r) begin
                    {r, bi, by, bx} <= '0;
                    issued <= 1'b1;
                  end else begin
                    {r, bi, by, bx} <= blk_next();
                  end
                end else begin
                  ry <= ry + 8'd1;
                end
              end else begin
                rx <= rx + 8'd1;
              end
            end
          end else if (!ig_pv) begin
            issued <= 1'b0;
            state  <= S_LOAD_W;
          end
        end

        // Copy the pass's z weights from the WGBuf into the weight GReg rows.
        S_LOAD_W: begin
          if (!issued) begin
            if (wgbuf_re) begin
              if (last_wj) begin
                wj     <= '0;
                issued <= 1'b1;
              end else begin
                wj <= wj + 9'd1;
              end
            end
          end else if (!wg_pv) begin
            issued <= 1'b0;
            {j, oy, ox, lcnt} <= '0;
            state  <= S_COMPUTE;
          end
        end

        // One pass: xs*ys*zs cycles, every PE does one MAC per cycle.
        S_COMPUTE: begin
          {j, oy, ox, lcnt} <= pos_next();
          if (last_pos) begin
            if (last_kx) begin
              kx <= '0;
              if (last_ky) begin
                ky <= '0;
                if (last_it) begin
                  it_cnt <= '0;
                  dc     <= '0;
                  {r, bi, by, bx} <= '0;
                  state  <= S_DRAIN;
                end else begin
                  it_cnt <= it_cnt + 16'd1;
                  state  <= S_LOAD_IN;
                end
              end else begin
                ky    <= ky + 8'd1;
                state <= S_LOAD_W;
              end
            end else begin
              kx    <= kx + 8'd1;
              state <= S_LOAD_W;
            end
          end
        end

        // Stream the finished outputs of the tile into the output FIFO.
        S_DRAIN: begin
          if (leave_col) begin
            {j, oy, ox, lcnt} <= '0;
            if (last_dc) begin
              dc <= '0;
              if (last_r) begin
                {r, bi, by, bx} <= '0;
                if (last_tile) begin
                  state <= S_IDLE;
                  done  <= 1'b1;
                end else begin
                  tile_cnt <= tile_cnt + 16'd1;
                  state    <= S_LOAD_IN;
                end
              end else begin
                {r, bi, by, bx} <= blk_next();
              end
            end else begin
              dc <= dc + 8'd1;
            end
          end else if (out_ready) begin
            {j, oy, ox, lcnt} <= pos_next();
          end
        end

        default: state <= S_IDLE;
      endcase
    end
  end

  // Configuration limits of the hardware, checked when a run starts.
  always_ff @(posedge clk) begin
    if (rst_n && state == S_IDLE && start) begin
      a_cfg_window: assert (d_xsp * d_ysp <= 32'(SEG_DEPTH))
        else $error("controller: xs'*ys' exceeds a GReg segment");
      a_cfg_lregs: assert (d_lregs <= 16'(LREG_DEPTH) && d_lregs != 0)
        else $error("controller: xs*ys*zs exceeds the LRegs");
      a_cfg_zs: assert (32'(cfg.zs) <= WG_DEPTH / Q && 32'(cfg.z) <= Q * 32'(cfg.zs) && cfg.z != 0)
        else $error("controller: z/zs do not fit the weight MUXes");
      a_cfg_in: assert (d_in_need <= 16'(IG_DEPTH) && d_in_need != 0)
        else $error("controller: tile inputs exceed the IGBuf");
      a_cfg_rows: assert (d_nact <= 16'(P) && d_nact != 0)
        else $error("controller: more PE-row blocks than PE rows");
      a_cfg_loops: assert (cfg.n_tiles != 0 && cfg.ci != 0 && cfg.wk != 0 && cfg.hk != 0 && cfg.stride != 0)
        else $error("controller: zero loop bound");
    end
  end

  // Handshake rules: a drain element is offered only in DRAIN; no pop while
  // a GBuf is full.
  a_pop_in: assert property (@(posedge clk) disable iff (!rst_n) in_fifo_pop |-> !in_full);
  a_pop_w:  assert property (@(posedge clk) disable iff (!rst_n) w_fifo_pop |-> !w_full);
endmodule
