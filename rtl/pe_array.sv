// pe_array: the P x Q PE array with its global registers (GRegs) and the
// output MUX.
//
// The array is cut into PE groups of PG x QG PEs to keep the GReg fan-out
// short. Every group row (PG PE rows) has its own copy of the weight GReg row
// (wgreg_row) and every group column (QG PE columns) its own copy of the
// input GReg column (igreg_column). All copies are written by the same write
// port at the same time, so they always hold the same data:
//   PE(r,c) input  = input GReg column c/QG, segment r   (shared by a row)
//   PE(r,c) weight = weight GReg row r/PG, weight MUX c  (shared by a column)
// PEs never exchange data with each other. All PEs receive the same in_sel,
// w_sel, lreg_addr, mac_en and first (lock step). The output MUX returns
// LReg[lreg_addr] of PE(out_row, out_col) combinationally for the drain to
// the output FIFO.
// The grouping, the GReg copies, the MUX structure and the default sizes
// (16 x 16 PEs, 4 x 4 groups, 256-entry weight rows, 16 x 64-entry input
// segments, 128 LRegs) follow the paper.
module pe_array
  import cla_pkg::*;
#(
  parameter int unsigned P          = 16,
  parameter int unsigned Q          = 16,
  parameter int unsigned PG         = 4,
  parameter int unsigned QG         = 4,
  parameter int unsigned LREG_DEPTH = 128,
  parameter int unsigned WG_DEPTH   = 256,
  parameter int unsigned SEG_DEPTH  = 64
) (
  input  logic                          clk,
  // weight GReg row write port (from the weight GBuf)
  input  logic                          wg_we,
  input  logic [$clog2(WG_DEPTH)-1:0]   wg_waddr,
  input  data_t                         wg_wdata,
  // input GReg column write port (from the input GBuf)
  input  logic                          ig_we,
  input  logic [$clog2(P)-1:0]          ig_wseg,
  input  logic [$clog2(SEG_DEPTH)-1:0]  ig_waddr,
  input  data_t                         ig_wdata,
  // lock-step compute controls
  input  logic [$clog2(SEG_DEPTH)-1:0]  in_sel,
  input  logic [$clog2(WG_DEPTH/Q)-1:0] w_sel,
  input  logic                          mac_en,
  input  logic                          first,
  input  logic [$clog2(LREG_DEPTH)-1:0] lreg_addr,
  // output MUX
  input  logic [$clog2(P)-1:0]          out_row,
  input  logic [$clog2(Q)-1:0]          out_col,
  output data_t                         out_data
);
  localparam int unsigned NGR = P / PG;  // weight GReg rows
  localparam int unsigned NGC = Q / QG;  // input GReg columns

  data_t w_row  [NGR][Q];   // weight MUX outputs of each GReg row
  data_t in_col [NGC][P];   // input MUX outputs of each GReg column
  data_t pe_rd  [P][Q];

  for (genvar g = 0; g < NGR; g++) begin : g_wrow
    wgreg_row #(.Q(Q), .DEPTH(WG_DEPTH)) u_wrow (
      .clk, .we(wg_we), .waddr(wg_waddr), .wdata(wg_wdata),
      .sel(w_sel), .w_out(w_row[g])
    );
  end

  for (genvar g = 0; g < NGC; g++) begin : g_icol
    igreg_column #(.P(P), .SEG_DEPTH(SEG_DEPTH)) u_icol (
      .clk, .we(ig_we), .wseg(ig_wseg), .waddr(ig_waddr), .wdata(ig_wdata),
      .sel(in_sel), .in_out(in_col[g])
    );
  end

  for (genvar r = 0; r < P; r++) begin : g_row
    for (genvar c = 0; c < Q; c++) begin : g_col
      pe #(.LREG_DEPTH(LREG_DEPTH)) u_pe (
        .clk, .mac_en, .first, .addr(lreg_addr),
        .in_a(in_col[c / QG][r]), .in_w(w_row[r / PG][c]),
        .rd_data(pe_rd[r][c])
      );
    end
  end

  assign out_data = pe_rd[out_row][out_col];

  initial begin
    assert (P % PG == 0 && Q % QG == 0) else $error("pe_array: P, Q must be multiples of PG, QG");
  end
endmodule
