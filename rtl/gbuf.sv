// gbuf: on-chip SRAM global buffer (GBuf). The accelerator has two of them:
// the input GBuf (IGBuf, 1024 x 16 bit) and the weight GBuf (WGBuf,
// 256 x 16 bit).
//
// The IGBuf holds the inputs of one iteration (one input channel of the b
// x'*y' input planes of a tile); the WGBuf holds the z weights of one pass.
// Both are filled from the DRAM FIFOs in the order the data arrive and are
// copied into the global registers (GRegs); after the copy they prefetch the
// data of the next pass while the PEs compute.
// Modelled as a simple dual-port synchronous SRAM: one write port and one
// read port, read data valid one cycle after the read request (rd_en). The
// paper uses compiler-generated SRAM macros; this array is its behavioural
// equivalent and the one-cycle read latency is this design's choice.
module gbuf #(
  parameter int unsigned DEPTH = 1024,
  parameter int unsigned WIDTH = 16
) (
  input  logic                     clk,
  input  logic                     wr_en,
  input  logic [$clog2(DEPTH)-1:0] wr_addr,
  input  logic [WIDTH-1:0]         wr_data,
  input  logic                     rd_en,
  input  logic [$clog2(DEPTH)-1:0] rd_addr,
  output logic [WIDTH-1:0]         rd_data
);
  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
    if (rd_en) rd_data <= mem[rd_addr];
  end
endmodule
