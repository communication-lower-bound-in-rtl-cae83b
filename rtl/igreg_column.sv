// igreg_column: one input GReg column with its input MUXes.
//
// The column is split into P (16) segments of SEG_DEPTH (64) 16-bit
// registers. Segment r serves PE row r: it holds the xs'*ys' input window
// (output block plus halo) of that row for one input channel, loaded once per
// iteration and then read in all Wk*Hk passes, which is how sliding-window
// reuse happens in the registers. Each segment has a SEG_DEPTH-to-1 input
// MUX; all MUXes share one select 'sel' because all PEs run in lock step.
// Writes: one entry per cycle into segment wseg at waddr. Reads are
// combinational: in_out[r] = segment r, entry sel.
// Structure and sizes follow the paper; the one-entry-per-cycle write port is
// this design's choice.
module igreg_column
  import cla_pkg::*;
#(
  parameter int unsigned P         = 16,
  parameter int unsigned SEG_DEPTH = 64
) (
  input  logic                         clk,
  input  logic                         we,
  input  logic [$clog2(P)-1:0]         wseg,
  input  logic [$clog2(SEG_DEPTH)-1:0] waddr,
  input  data_t                        wdata,
  input  logic [$clog2(SEG_DEPTH)-1:0] sel,
  output data_t                        in_out [P]
);
  data_t seg [P][SEG_DEPTH];

  always_ff @(posedge clk) begin
    if (we) seg[wseg][waddr] <= wdata;
  end

  always_comb begin
    for (int r = 0; r < P; r++) begin
      in_out[r] = seg[r][sel];
    end
  end
endmodule
