// sync_fifo: first-in first-out buffer between the off-chip DRAM port and the
// on-chip memories (one for inputs, one for weights, one for outputs).
//
// A single-clock circular buffer of DEPTH words of WIDTH bits. Both sides use
// a valid/ready handshake: a word moves when valid and ready are high at the
// same rising clock edge. The write side sees ready = not full; the read side
// sees valid = not empty, with the head word on rd_data (no read latency,
// first-word fall-through). A push and a pop may happen in the same cycle.
// The paper shows these FIFOs and their places but gives neither depth nor
// handshake: the depth of 16 and the valid/ready protocol are this design's
// choices.
// rst_n also disables the overflow assertion ('disable iff'), which Verilator
// reports as SYNCASYNCNET; the assertion is not part of the circuit.
module sync_fifo #(
  parameter int unsigned WIDTH = 16,
  parameter int unsigned DEPTH = 16
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             wr_valid,
  output logic             wr_ready,
  input  logic [WIDTH-1:0] wr_data,
  output logic             rd_valid,
  input  logic             rd_ready,
  output logic [WIDTH-1:0] rd_data
);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [WIDTH-1:0]  mem [DEPTH];
  logic [AW-1:0]     wptr, rptr;
  logic [AW:0]       count;
  logic              push, pop;

  assign wr_ready = (count != (AW+1)'(DEPTH));
  assign rd_valid = (count != '0);
  assign rd_data  = mem[rptr];
  assign push     = wr_valid && wr_ready;
  assign pop      = rd_valid && rd_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wptr  <= '0;
      rptr  <= '0;
      count <= '0;
    end else begin
      if (push) wptr <= (wptr == AW'(DEPTH-1)) ? '0 : wptr + 1'b1;
      if (pop)  rptr <= (rptr == AW'(DEPTH-1)) ? '0 : rptr + 1'b1;
      count <= count + (AW+1)'(push) - (AW+1)'(pop);
    end
  end

  always_ff @(posedge clk) begin
    if (push) mem[wptr] <= wr_data;
  end

  // The occupancy never exceeds the depth.
  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n) count <= (AW+1)'(DEPTH));
endmodule
