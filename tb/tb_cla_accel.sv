// tb_cla_accel: end-to-end test of the accelerator at reduced size (4 x 4 PEs
// in 2 x 2 groups, 32 LRegs per PE, 32-entry weight rows and WGBuf, 256-entry
// IGBuf, 64-entry input segments). Three layers (3x3 stride 1 with boundary
// tiles, 3x3 stride 2 with two images per tile, 1x1) are streamed in from a
// DRAM model and every output is compared with a reference convolution; see
// conv_tb_core for the checks and the mechanisms that must occur.
// Interface: no ports; the DUT's pins go to conv_tb_core, which drives the
// clock (10 ns) and reset and runs a watchdog. The reduced sizes are this
// test's choice to keep it short; the structure is the default one.
module tb_cla_accel;
  import cla_pkg::*;
  localparam int unsigned P = 4, Q = 4;

  logic clk, rst_n, start, busy, done;
  layer_cfg_t cfg;
  logic in_valid, in_ready, w_valid, w_ready, out_valid, out_ready;
  data_t in_data, w_data, out_data;
  out_tag_t out_tag;
  logic [6:0] ev;

  cla_accel #(.P(P), .Q(Q), .PG(2), .QG(2), .LREG_DEPTH(32), .WG_DEPTH(32),
              .IG_DEPTH(256), .SEG_DEPTH(64), .FIFO_DEPTH(4)) dut (.*);

  assign ev[0] = dut.u_ctrl.wait_igbuf;
  assign ev[1] = dut.u_ctrl.wait_wgbuf;
  assign ev[2] = dut.u_ctrl.mac_en && (dut.u_ctrl.in_fifo_pop || dut.u_ctrl.w_fifo_pop);
  assign ev[3] = dut.u_ctrl.out_valid && !dut.u_ctrl.out_ready;
  assign ev[4] = dut.u_ctrl.mac_en && dut.u_ctrl.first && dut.u_ctrl.lreg_addr == '0;
  assign ev[5] = dut.u_ctrl.drain_skip;
  assign ev[6] = dut.u_ctrl.mac_en;

  conv_tb_core #(.P(P), .Q(Q), .FULL(1'b0), .REQUIRE_ALL(1'b1), .WATCHDOG(400000)) core (.*);
endmodule
