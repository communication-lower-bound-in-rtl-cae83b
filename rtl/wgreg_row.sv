// wgreg_row: one weight GReg row with its weight MUXes.
//
// DEPTH (256) 16-bit global registers hold the weights of one pass, copied
// from the weight GBuf: entry j holds the weight of output channel j of the
// tile. Q (16) weight MUXes, each DEPTH/Q-to-1 (16-to-1), feed the Q PE
// columns. Their inputs are wired round-robin: MUX c sees entries
// c, c+Q, c+2Q, ..., so PE column c computes channels c, c+Q, ... and the Q
// MUXes together cover every entry. All MUXes share one select 'sel'
// (all PEs run in lock step); with zs channels per PE the controller steps
// sel through 0..zs-1, which reaches only the first Q*zs entries.
// Writes: one entry per cycle (we, waddr, wdata). Reads are combinational.
// Structure and sizes follow the paper; the write port width is this
// design's choice.
module wgreg_row
  import cla_pkg::*;
#(
  parameter int unsigned Q     = 16,
  parameter int unsigned DEPTH = 256
) (
  input  logic                       clk,
  input  logic                       we,
  input  logic [$clog2(DEPTH)-1:0]   waddr,
  input  data_t                      wdata,
  input  logic [$clog2(DEPTH/Q)-1:0] sel,
  output data_t                      w_out [Q]
);
  localparam int unsigned SEL_N = DEPTH / Q;

  data_t regs [DEPTH];

  always_ff @(posedge clk) begin
    if (we) regs[waddr] <= wdata;
  end

  // Round-robin weight MUXes: input i of MUX c is entry c + Q*i.
  always_comb begin
    for (int c = 0; c < Q; c++) begin
      w_out[c] = regs[c + Q * int'(sel)];
    end
  end

  initial begin
    assert (DEPTH % Q == 0) else $error("wgreg_row: DEPTH must be a multiple of Q");
    assert (SEL_N > 1) else $error("wgreg_row: DEPTH/Q must be at least 2");
  end
endmodule
