// in_sreg: the input shift registers, one per matrix row.
//
// On `load` all R elements of an input vector are captured in parallel.
// From the next cycle on, every register shifts right once per clock and
// presents its current least significant bit on xb[r], so bit t of every
// element appears in the t-th cycle after the load. Once the BW_I bits are
// out, the register keeps repeating its top bit (arithmetic shift), which
// sign-extends a signed input for as long as the multiplier needs bits, as
// the paper prescribes; with SIGNED = 0 zeros are shifted in instead.
// The registers are stored bit-plane first so that a shift is one vector
// move across all rows.
module in_sreg #(
  parameter int unsigned R      = rc_pkg::DEF_ROWS,
  parameter int unsigned BW_I   = rc_pkg::DEF_BW_I,
  parameter bit          SIGNED = 1'b1
) (
  input  logic                   clk,
  input  logic                   load,
  input  logic [R-1:0][BW_I-1:0] x,    // element r in x[r]
  output logic [R-1:0]           xb    // current bit of every element
);

  logic [BW_I-1:0][R-1:0] sr;   // sr[k][r] = bit k of element r after k shifts

  always_ff @(posedge clk) begin
    if (load) begin
      for (int unsigned r = 0; r < R; r++)
        for (int unsigned k = 0; k < BW_I; k++)
          sr[k][r] <= x[r][k];
    end else begin
      for (int unsigned k = 0; k + 1 < BW_I; k++) sr[k] <= sr[k+1];
      sr[BW_I-1] <= SIGNED ? sr[BW_I-1] : '0;
    end
  end

  assign xb = sr[0];

endmodule
