// rc_sram: the vector memory of the wrapper around the multiplier.
//
// The multiplier is fed from, and writes its results back into, one memory.
// Here each word holds a whole vector: an input vector (R elements of BW_I
// bits, element r at bits [r*BW_I +: BW_I]) or a result vector (C elements
// of OUT_W bits). The memory has one synchronous read port (data one cycle
// after the address) and one synchronous write port, so reading the next
// input and writing the previous result never collide. Word organisation,
// depth and ports are this design's choice; the paper only says the wrapper
// uses an SRAM. Reading and writing the same address in one cycle returns
// the old word.
module rc_sram #(
  parameter int unsigned DEPTH = 128,
  parameter int unsigned DW    = 26624,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          re,
  input  logic [AW-1:0] raddr,
  output logic [DW-1:0] rdata,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic [DW-1:0] wdata
);

  logic [DW-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (re) rdata <= mem[raddr];
    if (we) mem[waddr] <= wdata;
  end

endmodule
