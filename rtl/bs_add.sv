// bs_add: a vector of N independent bit-serial adders (or subtractors).
//
// Each lane is the circuit of a full adder whose carry is kept in a flip-flop
// and fed back in the next cycle, with the sum registered: operands arrive
// least significant bit first, one bit per clock, and the sum leaves one
// cycle later, also LSb first. With SUB = 1 a lane computes a - b by
// inverting b and starting the carry at 1, as the paper describes.
//
// The lane's carry is restarted when `first` is high, i.e. in the cycle
// that carries bit 0 of a new operand pair; this lets new operations follow
// each other with no gap. (Restarting on a marker bit is this design's own
// choice; the paper does not say how carries are cleared.)
//
// A_USED and B_USED are elaboration-time constants saying which lanes have
// a real operand. A lane whose other operand is known to be zero keeps no
// carry and degenerates to a D flip-flop; a lane with no operand is a
// constant 0. This is the constant-propagation rule the design is built on:
// logic only exists where a weight bit is 1.
//
// Timing: s(t+1) = bit t of (a + b) when a and b carry bit t in cycle t.
module bs_add #(
  parameter int unsigned    N      = 1,
  parameter bit             SUB    = 1'b0,
  parameter logic [N-1:0]   A_USED = '1,
  parameter logic [N-1:0]   B_USED = '1
) (
  input  logic         clk,
  input  logic         first,   // cycle holding bit 0 of the operands
  input  logic [N-1:0] a,
  input  logic [N-1:0] b,
  output logic [N-1:0] s
);

  // Lanes that need a carry: both operands present, or any subtraction
  // with a subtrahend (0 - b needs the +1 and the carry chain).
  localparam logic [N-1:0] KEEPC    = SUB ? B_USED : (A_USED & B_USED);
  localparam logic [N-1:0] OUT_USED = A_USED | B_USED;

  logic [N-1:0] c_q;
  logic [N-1:0] a_m, b_m, cin, s_d, c_d;

  always_comb begin
    a_m = a & A_USED;
    b_m = (SUB ? ~b : b) & B_USED;
    cin = KEEPC & (first ? (SUB ? '1 : '0) : c_q);
    s_d = (a_m ^ b_m ^ cin) & OUT_USED;
    c_d = KEEPC & ((a_m & b_m) | (cin & (a_m ^ b_m)));
  end

  always_ff @(posedge clk) begin
    s   <= s_d;
    c_q <= c_d;
  end

endmodule
