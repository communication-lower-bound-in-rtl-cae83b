// tb_cla_accel_full: one complete layer run of the accelerator at its
// default size (16 x 16 PEs in 4 x 4 groups, 128 LRegs per PE, 256-entry
// WGBuf and weight GReg rows, 1024-entry IGBuf, 16 x 64-entry input segments).
// One 3x3 tile of 256 output channels x 8 x 16 outputs over 2 input channels
// fills every PE and every LReg; each of its 32768 outputs is compared with a
// reference convolution (see conv_tb_core).
// Interface: no ports; the DUT keeps all its default parameters and its pins
// go to conv_tb_core (10 ns clock, watchdog). The sizes are those of the
// paper's 16 x 16 example; the layer itself is this test's choice. It runs
// in well under a minute with Verilator.
module tb_cla_accel_full;
  import cla_pkg::*;
  localparam int unsigned P = 16, Q = 16;

  logic clk, rst_n, start, busy, done;
  layer_cfg_t cfg;
  logic in_valid, in_ready, w_valid, w_ready, out_valid, out_ready;
  data_t in_data, w_data, out_data;
  out_tag_t out_tag;
  logic [6:0] ev;

  cla_accel dut (.*);

  assign ev[0] = dut.u_ctrl.wait_igbuf;
  assign ev[1] = dut.u_ctrl.wait_wgbuf;
  assign ev[2] = dut.u_ctrl.mac_en && (dut.u_ctrl.in_fifo_pop || dut.u_ctrl.w_fifo_pop);
  assign ev[3] = dut.u_ctrl.out_valid && !dut.u_ctrl.out_ready;
  assign ev[4] = dut.u_ctrl.mac_en && dut.u_ctrl.first && dut.u_ctrl.lreg_addr == '0;
  assign ev[5] = dut.u_ctrl.drain_skip;
  assign ev[6] = dut.u_ctrl.mac_en;

  conv_tb_core #(.P(P), .Q(Q), .FULL(1'b1), .REQUIRE_ALL(1'b0), .WATCHDOG(2000000)) core (.*);
endmodule
