// out_sreg: the result shift registers, one per matrix column.
//
// While `shift` is high the serial result bits yb[c] (LSb first) are shifted
// in at the top and move down one place per clock; after OUT_W shifts the
// register holds the OUT_W-bit result, bit 0 at the bottom. `y_next` is the
// value the registers will hold after the current clock edge, so a result
// can be stored in the same cycle as its last bit arrives; `y` is the
// registered value. Stored bit-plane first so that a shift is a single
// vector move.
module out_sreg #(
  parameter int unsigned C     = rc_pkg::DEF_COLS,
  parameter int unsigned OUT_W = rc_pkg::DEF_BW_I + rc_pkg::DEF_BW_W + 10
) (
  input  logic                    clk,
  input  logic                    shift,
  input  logic [C-1:0]            yb,
  output logic [C-1:0][OUT_W-1:0] y,
  output logic [C-1:0][OUT_W-1:0] y_next
);

  logic [OUT_W-1:0][C-1:0] sr, sr_d;

  always_comb begin
    sr_d = shift ? {yb, sr[OUT_W-1:1]} : sr;
    for (int unsigned c = 0; c < C; c++)
      for (int unsigned t = 0; t < OUT_W; t++) begin
        y[c][t]      = sr[t][c];
        y_next[c][t] = sr_d[t][c];
      end
  end

  always_ff @(posedge clk) sr <= sr_d;

endmodule
