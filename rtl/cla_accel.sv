// cla_accel: communication-optimal convolution accelerator (top level).
//
// Blocks and connections:
//   DRAM input stream  -> input FIFO  -> input GBuf (IGBuf, 1024 x 16 bit)
//   DRAM weight stream -> weight FIFO -> weight GBuf (WGBuf, 256 x 16 bit)
//   IGBuf -> input GReg columns, WGBuf -> weight GReg rows (pe_array)
//   16 x 16 PEs, each a MAC with 128 LRegs that keep the tile's Psums
//   output MUX -> output FIFO -> DRAM output stream
//   controller: the global FSM that drives every address, enable and select.
// The off-chip DRAM itself is not part of the design: its three transfer
// paths are the three streaming ports below (valid/ready handshakes). The
// host writes the layer configuration on 'cfg', pulses 'start' and keeps
// cfg stable while 'busy' is high; 'done' pulses for one cycle after the last
// output of the last tile has entered the output FIFO. The order in which
// inputs and weights must arrive and outputs leave is described in
// controller.sv.
// Each finished output leaves with a tag (image, channel, row, column inside
// its tile); its DRAM address is the tile origin plus that tag.
// The block set, their sizes and the sharing pattern follow the paper; FIFO
// depth, handshakes, port formats and the fixed-point format are this
// design's choices.
module cla_accel
  import cla_pkg::*;
#(
  parameter int unsigned P          = 16,    // PE rows
  parameter int unsigned Q          = 16,    // PE columns
  parameter int unsigned PG         = 4,     // PE rows per group
  parameter int unsigned QG         = 4,     // PE columns per group
  parameter int unsigned LREG_DEPTH = 128,   // Psum LRegs per PE
  parameter int unsigned WG_DEPTH   = 256,   // WGBuf and weight GReg row entries
  parameter int unsigned IG_DEPTH   = 1024,  // IGBuf entries
  parameter int unsigned SEG_DEPTH  = 64,    // input GReg segment entries
  parameter int unsigned FIFO_DEPTH = 16     // each DRAM FIFO
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       start,
  input  layer_cfg_t cfg,
  output logic       busy,
  output logic       done,
  // DRAM -> input FIFO
  input  logic       in_valid,
  output logic       in_ready,
  input  data_t      in_data,
  // DRAM -> weight FIFO
  input  logic       w_valid,
  output logic       w_ready,
  input  data_t      w_data,
  // output FIFO -> DRAM
  output logic       out_valid,
  input  logic       out_ready,
  output data_t      out_data,
  output out_tag_t   out_tag
);
  localparam int unsigned TAG_W = $bits(out_tag_t);

  // FIFO -> GBuf
  logic  in_f_valid, in_f_pop, w_f_valid, w_f_pop;
  data_t in_f_data, w_f_data;
  logic [$clog2(IG_DEPTH)-1:0] igbuf_waddr, igbuf_raddr;
  logic [$clog2(WG_DEPTH)-1:0] wgbuf_waddr, wgbuf_raddr;
  logic  igbuf_re, wgbuf_re;
  data_t igbuf_rdata, wgbuf_rdata;

  // GBuf -> GRegs, PE controls
  logic                          ig_we, wg_we, mac_en, first;
  logic [$clog2(P)-1:0]          ig_wseg, out_row;
  logic [$clog2(Q)-1:0]          out_col;
  logic [$clog2(SEG_DEPTH)-1:0]  ig_waddr, in_sel;
  logic [$clog2(WG_DEPTH)-1:0]   wg_waddr;
  logic [$clog2(WG_DEPTH/Q)-1:0] w_sel;
  logic [$clog2(LREG_DEPTH)-1:0] lreg_addr;

  // PE array -> output FIFO
  data_t    arr_out;
  out_tag_t ctl_tag;
  logic     ctl_out_valid, ofifo_ready;

  sync_fifo #(.WIDTH(DATA_W), .DEPTH(FIFO_DEPTH)) u_in_fifo (
    .clk, .rst_n,
    .wr_valid(in_valid), .wr_ready(in_ready), .wr_data(in_data),
    .rd_valid(in_f_valid), .rd_ready(in_f_pop), .rd_data(in_f_data)
  );

  sync_fifo #(.WIDTH(DATA_W), .DEPTH(FIFO_DEPTH)) u_w_fifo (
    .clk, .rst_n,
    .wr_valid(w_valid), .wr_ready(w_ready), .wr_data(w_data),
    .rd_valid(w_f_valid), .rd_ready(w_f_pop), .rd_data(w_f_data)
  );

  gbuf #(.DEPTH(IG_DEPTH), .WIDTH(DATA_W)) u_igbuf (
    .clk,
    .wr_en(in_f_pop), .wr_addr(igbuf_waddr), .wr_data(in_f_data),
    .rd_en(igbuf_re), .rd_addr(igbuf_raddr), .rd_data(igbuf_rdata)
  );

  gbuf #(.DEPTH(WG_DEPTH), .WIDTH(DATA_W)) u_wgbuf (
    .clk,
    .wr_en(w_f_pop), .wr_addr(wgbuf_waddr), .wr_data(w_f_data),
    .rd_en(wgbuf_re), .rd_addr(wgbuf_raddr), .rd_data(wgbuf_rdata)
  );

  pe_array #(
    .P(P), .Q(Q), .PG(PG), .QG(QG),
    .LREG_DEPTH(LREG_DEPTH), .WG_DEPTH(WG_DEPTH), .SEG_DEPTH(SEG_DEPTH)
  ) u_array (
    .clk,
    .wg_we, .wg_waddr, .wg_wdata(wgbuf_rdata),
    .ig_we, .ig_wseg, .ig_waddr, .ig_wdata(igbuf_rdata),
    .in_sel, .w_sel, .mac_en, .first, .lreg_addr,
    .out_row, .out_col, .out_data(arr_out)
  );

  controller #(
    .P(P), .Q(Q), .LREG_DEPTH(LREG_DEPTH), .WG_DEPTH(WG_DEPTH),
    .IG_DEPTH(IG_DEPTH), .SEG_DEPTH(SEG_DEPTH)
  ) u_ctrl (
    .clk, .rst_n, .start, .cfg, .busy, .done,
    .in_fifo_valid(in_f_valid), .in_fifo_pop(in_f_pop), .igbuf_waddr,
    .w_fifo_valid(w_f_valid), .w_fifo_pop(w_f_pop), .wgbuf_waddr,
    .igbuf_re, .igbuf_raddr, .ig_we, .ig_wseg, .ig_waddr,
    .wgbuf_re, .wgbuf_raddr, .wg_we, .wg_waddr,
    .in_sel, .w_sel, .mac_en, .first, .lreg_addr,
    .out_row, .out_col, .out_valid(ctl_out_valid), .out_ready(ofifo_ready),
    .out_tag(ctl_tag)
  );

  logic [DATA_W+TAG_W-1:0] ofifo_rd;

  sync_fifo #(.WIDTH(DATA_W + TAG_W), .DEPTH(FIFO_DEPTH)) u_out_fifo (
    .clk, .rst_n,
    .wr_valid(ctl_out_valid), .wr_ready(ofifo_ready), .wr_data({ctl_tag, arr_out}),
    .rd_valid(out_valid), .rd_ready(out_ready), .rd_data(ofifo_rd)
  );

  assign out_data = ofifo_rd[DATA_W-1:0];
  assign out_tag  = ofifo_rd[DATA_W+TAG_W-1:DATA_W];
endmodule
