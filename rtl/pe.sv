// pe: processing element = one 16-bit fixed-point MAC unit and LREG_DEPTH
// (128) local registers (LRegs) that hold the PE's partial sums (Psums).
//
// The PE stores no inputs or weights of its own: both arrive combinationally
// from the shared GRegs through their MUXes. Every cycle with mac_en high it
// reads LReg[addr], adds in_a*in_w (shifted by the fixed-point fraction and
// saturated, see cla_pkg::mac_sat) and writes the result back to the same
// LReg at the rising edge: one MAC and one LReg write per cycle. When 'first'
// is high the old Psum is taken as zero, which starts a new output tile
// without a separate clear. rd_data = LReg[addr] (combinational) is the read
// port used to drain finished outputs.
// The MAC-plus-LRegs structure, the 128 entries and the 16-bit width follow
// the paper; the single-cycle read-modify-write, the 'first' flag and the
// saturation are this design's choices.
module pe
  import cla_pkg::*;
#(
  parameter int unsigned LREG_DEPTH = 128
) (
  input  logic                          clk,
  input  logic                          mac_en,
  input  logic                          first,
  input  logic [$clog2(LREG_DEPTH)-1:0] addr,
  input  data_t                         in_a,
  input  data_t                         in_w,
  output data_t                         rd_data
);
  data_t lreg [LREG_DEPTH];

  assign rd_data = lreg[addr];

  always_ff @(posedge clk) begin
    if (mac_en) lreg[addr] <= mac_sat(first ? data_t'(0) : lreg[addr], in_a, in_w);
  end
endmodule
