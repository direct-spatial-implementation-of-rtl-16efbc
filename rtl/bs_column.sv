// bs_column: the dot-product unit of one matrix column.
//
// It computes y = sum_r x_r * V[r][c] bit-serially for one fixed column of
// the matrix, with V split into an unsigned positive part P and an unsigned
// negative part N, each stored as NPL bit planes. The structure follows the
// paper's figures for the multi-bit dot product:
//   * Leaves: each weight bit multiplies an input bit by an AND gate. Since
//     the weight is a constant, the AND reduces to a wire (bit 1) or to a
//     constant 0 (bit 0).
//   * Trees: for every sign and bit plane a balanced tree of log2(RP)
//     levels of registered bit-serial adders sums the selected input bits.
//     A node with one empty subtree is a flip-flop, a node with two empty
//     subtrees does not exist (see bs_add).
//   * Chain: the plane sums are combined by a chain of bit-serial adders that
//     starts at the most significant plane with a 0 operand; each link
//     delays the running sum by one cycle, which doubles it, so plane k ends
//     up weighted by 2^k.
//   * Subtractor: a final bit-serial subtractor forms P-sum minus N-sum.
//
// Layout: the leaf vector xg/WMASK is row-major, bit r*G + g with
// G = 2*NPL and group g = k for plane k of P and g = NPL + k for plane k of
// N. At every tree level node j of a group is paired with node j + K/2 (the
// upper half of the level vector with the lower half), which is a balanced
// binary tree over the rows and lets one vector adder serve a whole level.
// Rows are padded with zero rows up to the power of two RP.
//
// Timing: if bit t of every input is on xg in cycle t (first = 1 in the
// cycle of bit 0), bit t of the two's complement result is on y in cycle
// t + log2(RP) + 2: one cycle per tree level, one for the chain's last
// link, one for the subtractor. The arithmetic is modulo 2^(bits read out),
// so the result is exact once enough bits are streamed.
module bs_column #(
  parameter int unsigned R   = 4,    // matrix rows
  parameter int unsigned NPL = 2,    // weight bit planes per sign
  localparam int unsigned RP = (R < 2) ? 2 : (1 << $clog2(R)),
  localparam int unsigned G  = 2 * NPL,
  localparam int unsigned L  = $clog2(RP),
  // Constant weight bits, layout described above.
  parameter logic [RP*G-1:0] WMASK = '1
) (
  input  logic            clk,
  input  logic            first,  // bit 0 of an input vector is on xg
  input  logic [RP*G-1:0] xg,     // input bits, each row repeated G times
  output logic            y       // result bit stream, LSb first
);

  // Which nodes of level `lvl` have at least one weight bit below them
  // (valid in the low (RP*G >> lvl) bits).
  function automatic logic [RP*G-1:0] nz_level(int lvl);
    logic [RP*G-1:0] v;
    int unsigned     w;
    v = WMASK;
    w = RP * G;
    for (int i = 0; i < lvl; i++) begin
      w = w / 2;
      v = (v >> w) | v;
    end
    return v;
  endfunction

  localparam logic [RP*G-1:0] ROOT_NZ_FULL = nz_level(L);
  localparam logic [G-1:0]    ROOT_NZ      = ROOT_NZ_FULL[G-1:0];
  localparam logic [NPL-1:0]  P_NZ         = ROOT_NZ[NPL-1:0];
  localparam logic [NPL-1:0]  N_NZ         = ROOT_NZ[G-1:NPL];

  // Delay line for the bit-0 marker: fd[i] marks bit 0 at tree level i.
  logic [L+1:0] fd;
  assign fd[0] = first;
  always_ff @(posedge clk) fd[L+1:1] <= fd[L:0];

  // ---------------------------------------------------------------- trees
  for (genvar l = 0; l <= L; l++) begin : g_lvl
    localparam int unsigned W = (RP * G) >> l;
    logic [W-1:0] q;
    if (l == 0) begin : g_leaf
      assign q = xg & WMASK;
    end else begin : g_node
      localparam logic [RP*G-1:0] NZP = nz_level(int'(l) - 1);
      bs_add #(
        .N      (W),
        .SUB    (1'b0),
        .A_USED (NZP[2*W-1:W]),
        .B_USED (NZP[W-1:0])
      ) u_add (
        .clk   (clk),
        .first (fd[l-1]),
        .a     (g_lvl[l-1].q[2*W-1:W]),
        .b     (g_lvl[l-1].q[W-1:0]),
        .s     (q)
      );
    end
  end

  logic [G-1:0] root;
  assign root = g_lvl[L].q;

  // ---------------------------------------------------------------- chain
  // Link j adds plane k = NPL-1-j (lane 0: P, lane 1: N) to twice the
  // running sum of the planes above it.
  for (genvar j = 0; j < NPL; j++) begin : g_chain
    localparam int unsigned K = NPL - 1 - j;
    localparam logic [1:0] A_U = {N_NZ[K], P_NZ[K]};
    localparam logic [1:0] B_U = (j == 0) ? 2'b00 :
                                 {|(N_NZ >> (K + 1)), |(P_NZ >> (K + 1))};
    logic [1:0] sum;
    logic [1:0] prev;
    if (j == 0) begin : g_msb
      assign prev = 2'b00;
    end else begin : g_mid
      // The doubled running sum has a 0 in its bit 0.
      assign prev = fd[L] ? 2'b00 : g_chain[j-1].sum;
    end
    bs_add #(
      .N      (2),
      .SUB    (1'b0),
      .A_USED (A_U),
      .B_USED (B_U)
    ) u_link (
      .clk   (clk),
      .first (fd[L]),
      .a     ({root[NPL + K], root[K]}),
      .b     (prev),
      .s     (sum)
    );
  end

  logic [1:0] pn;
  assign pn = g_chain[NPL-1].sum;

  // ----------------------------------------------------------- subtractor
  bs_add #(
    .N      (1),
    .SUB    (1'b1),
    .A_USED (|P_NZ),
    .B_USED (|N_NZ)
  ) u_sub (
    .clk   (clk),
    .first (fd[L+1]),
    .a     (pn[0]),
    .b     (pn[1]),
    .s     (y)
  );

endmodule
