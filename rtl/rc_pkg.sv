// rc_pkg: constants, types and the fixed-matrix definition shared by the
// bit-serial fixed-matrix multiplier.
//
// The multiplier implements o = a^T V for one fixed, sparse, signed integer
// matrix V. V is never loaded at run time: it is a constant of the hardware,
// defined here element by element so that the RTL (which folds it into the
// logic at elaboration) and any testbench (which uses it as a reference) agree.
//
// Matrix definition (this design's own choice; the evaluated matrices are
// described only as random with a given element sparsity):
//   z        = rand64(seed, col, row)             64 pseudo-random bits
//   nonzero  = (z[7:0] < dens), i.e. probability dens/256
//   value    = z[8 +: bw_w] as a bw_w-bit two's complement number, or 0
//   coins    = z[40 +: 24], one coin per possible CSD chain start
// rand64 is the splitmix64 finaliser applied to (seed, col, row).
//
// split_weight() turns an element into its positive part P and negative part
// N (V = P - N), either by sign (ENC_PN) or by the canonical-signed-digit
// chain rewrite (ENC_CSD), which follows the algorithm listed in the paper:
// a run of ones of length 1 is kept, a run of length >= 3 from bit s to bit
// i-1 becomes +2^i - 2^s, and a run of length 2 is rewritten only when its
// coin is 1. CSD digits of a positive element stay in P and its negative
// digits go to N; for a negative element the roles swap.
package rc_pkg;

  // Default sizes: a 1024 x 1024 matrix of 8-bit signed weights driven by
  // 8-bit signed inputs, as in the paper's large-scale experiments.
  localparam int unsigned DEF_ROWS  = 1024;
  localparam int unsigned DEF_COLS  = 1024;
  localparam int unsigned DEF_BW_I  = 8;
  localparam int unsigned DEF_BW_W  = 8;
  // Element density in 1/256 units: 5/256 gives 98.0 % element sparsity,
  // the sparsity of the paper's main latency benchmarks.
  localparam int unsigned DEF_DENSITY = 5;
  localparam int unsigned DEF_SEED    = 1;

  // How the signed matrix is split into two unsigned matrices P and N.
  typedef enum logic [0:0] {
    ENC_PN  = 1'b0,   // P holds the positive elements, N the negated negative ones
    ENC_CSD = 1'b1    // canonical-signed-digit rewrite, one extra bit plane
  } enc_e;

  typedef struct packed {
    logic [31:0] p;   // magnitude placed in the positive matrix
    logic [31:0] n;   // magnitude placed in the negative matrix
  } pn_t;

  // Number of weight bit planes per sign for a given encoding.
  function automatic int unsigned planes(enc_e enc, int unsigned bw_w);
    return (enc == ENC_CSD) ? bw_w + 1 : bw_w;
  endfunction

  function automatic logic [63:0] rand64(int unsigned seed, int unsigned col,
                                         int unsigned row);
    logic [63:0] z;
    z = {seed, col} ^ ({32'd0, row} * 64'h9E3779B97F4A7C15);
    z = z + 64'h9E3779B97F4A7C15;
    z = (z ^ (z >> 30)) * 64'hBF58476D1CE4E5B9;
    z = (z ^ (z >> 27)) * 64'h94D049BB133111EB;
    return z ^ (z >> 31);
  endfunction

  // Signed value of element (row, col); bw_w is at most 31.
  function automatic int elem_value(int unsigned seed, int unsigned col,
                                    int unsigned row, int unsigned dens,
                                    int unsigned bw_w);
    logic [63:0] z;
    logic        nz;
    logic [31:0] raw;
    z  = rand64(seed, col, row);
    nz = (32'(z[7:0]) < dens);
    if (!nz) return 0;
    raw = 32'(z[8 +: 32] & ((64'd1 << bw_w) - 64'd1));
    if (raw[bw_w-1]) return int'(raw) - (1 << bw_w);
    return int'(raw);
  endfunction

  // CSD digits of an unsigned magnitude of nb bits: returns {pos, neg}.
  function automatic pn_t csd(logic [31:0] mag, int unsigned nb,
                              logic [23:0] coins);
    pn_t t;
    int  cs;
    int  len;
    logic b;
    t  = '0;
    cs = -1;
    for (int i = 0; i <= int'(nb); i++) begin
      b = (i < int'(nb)) ? mag[i] : 1'b0;
      if (!b) begin
        if (cs != -1) begin
          len = i - cs;
          if (len == 1) begin
            t.p[cs] = 1'b1;
          end else if (len == 2 && !coins[cs]) begin
            t.p[cs]  = 1'b1;
            t.p[i-1] = 1'b1;
          end else begin
            t.n[cs] = 1'b1;
            t.p[i]  = 1'b1;
          end
        end
        cs = -1;
      end else if (cs == -1) begin
        cs = i;
      end
    end
    return t;
  endfunction

  // Split element (row, col) into its P and N magnitudes.
  function automatic pn_t split_weight(int unsigned seed, int unsigned col,
                                       int unsigned row, int unsigned dens,
                                       int unsigned bw_w, enc_e enc);
    int          v;
    logic [31:0] mag;
    logic [23:0] coins;
    pn_t         d;
    pn_t         r;
    v   = elem_value(seed, col, row, dens, bw_w);
    if (v == 0) return '0;
    mag = (v < 0) ? 32'(-v) : 32'(v);
    if (enc == ENC_PN) begin
      d.p = mag;
      d.n = '0;
    end else begin
      coins = 24'(rand64(seed, col, row) >> 40);
      d = csd(mag, bw_w, coins);
    end
    if (v < 0) begin
      r.p = d.n;
      r.n = d.p;
    end else begin
      r = d;
    end
    return r;
  endfunction

endpackage
