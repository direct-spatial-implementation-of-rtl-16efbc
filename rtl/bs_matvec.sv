// bs_matvec: bit-serial vector x fixed-matrix multiplier, y = x^T V.
//
// One bs_column per matrix column; every input bit stream is broadcast to
// all columns (the paper's full vector-matrix architecture). The matrix V is
// not an input: it is the fixed matrix defined in rc_pkg by (SEED, DENSITY,
// BW_W), split at elaboration into P and N bit planes by the PN or CSD rule
// (ENC), and handed to each column as a constant so that every zero weight
// bit removes its AND gate and adder. The split, the CSD rewrite and the
// random matrix follow the paper; the particular pseudo-random generator is
// this design's own.
//
// Interface: xb[r] carries bit t of input element r in cycle t (LSb first,
// already sign-extended by the feeding shift register), `first` marks t = 0.
// yb[c] carries bit t of output element c in cycle t + LAT, LAT =
// log2(RP) + 2, where RP is R rounded up to a power of two. Streaming
// OUT_W bits through the array gives y modulo 2^OUT_W; the next vector may
// start right after the last bit of the previous one.
module bs_matvec
  import rc_pkg::*;
#(
  parameter int unsigned R       = DEF_ROWS,
  parameter int unsigned C       = DEF_COLS,
  parameter int unsigned BW_W    = DEF_BW_W,
  parameter enc_e        ENC     = ENC_CSD,
  parameter int unsigned SEED    = DEF_SEED,
  parameter int unsigned DENSITY = DEF_DENSITY,
  localparam int unsigned NPL    = planes(ENC, BW_W),
  localparam int unsigned G      = 2 * NPL,
  localparam int unsigned RP     = (R < 2) ? 2 : (1 << $clog2(R)),
  localparam int unsigned LAT    = $clog2(RP) + 2
) (
  input  logic         clk,
  input  logic         first,
  input  logic [R-1:0] xb,
  output logic [C-1:0] yb
);

  localparam int unsigned CH  = (RP < 32) ? RP : 32;   // rows per chunk
  localparam int unsigned NCH = RP / CH;

  // Weight bits of column `col` in the bs_column leaf layout.
  function automatic logic [RP*G-1:0] column_mask(int unsigned col);
    logic [RP*G-1:0] v;
    logic [CH*G-1:0] chunk;
    logic [63:0]     f;
    pn_t             pn;
    int unsigned     row;
    v = 0;
    for (int unsigned i = 0; i < NCH; i++) begin
      chunk = 0;
      for (int unsigned j = 0; j < CH; j++) begin
        row = i * CH + j;
        if (row < R) begin
          pn = split_weight(SEED, col, row, DENSITY, BW_W, ENC);
          f  = {32'd0, pn.p} | ({32'd0, pn.n} << NPL);
          chunk[j*G +: G] = f[G-1:0];
        end
      end
      v[i*CH*G +: CH*G] = chunk;
    end
    return v;
  endfunction

  // Broadcast: each input bit goes to every bit plane of every column.
  logic [RP*G-1:0] xg;
  always_comb begin
    xg = 0;
    for (int unsigned r = 0; r < R; r++) xg[r*G +: G] = {G{xb[r]}};
  end

  for (genvar c = 0; c < C; c++) begin : g_col
    localparam logic [RP*G-1:0] WCOL = column_mask(c);
    bs_column #(
      .R     (R),
      .NPL   (NPL),
      .WMASK (WCOL)
    ) u_col (
      .clk   (clk),
      .first (first),
      .xg    (xg),
      .y     (yb[c])
    );
  end

endmodule
