// rc_top: the wrapped bit-serial fixed-matrix multiplier.
//
// The multiplier computes y = x^T V for a constant sparse signed matrix V of
// R rows and C columns (BW_W-bit elements, defined in rc_pkg) and signed
// BW_I-bit input vectors x, producing OUT_W-bit two's complement results.
// It is wrapped, as in the paper's FPGA experiments, by a memory that holds
// the input vectors and receives the results, and by a small sequencer.
//
// Data path: memory word -> in_sreg (parallel load, bit-serial out, sign
// extension) -> bs_matvec (broadcast, per-column adder trees, plane chain,
// P - N subtraction) -> out_sreg (bit-serial in) -> memory word.
//
// Use: while idle, write input vectors through the host port (word a holds
// vector a, element r at bits [r*BW_I +: BW_I]); pulse `start` with src,
// dst and count; wait for `done`; read results (element c at bits
// [c*OUT_W +: OUT_W]) through the host port. The host port is ignored while
// busy. Latency of one vector from the cycle its first bit is on the input
// stream to the cycle its last result bit is captured:
// OUT_W + log2(R) + 2 cycles, the paper's BW_i + BW_w + log2 R + 2 when
// OUT_W = BW_I + BW_W. The default OUT_W = BW_I + BW_W + log2(R) is the
// exact width of the product, so no result wraps.
module rc_top
  import rc_pkg::*;
#(
  parameter int unsigned R       = DEF_ROWS,
  parameter int unsigned C       = DEF_COLS,
  parameter int unsigned BW_I    = DEF_BW_I,
  parameter int unsigned BW_W    = DEF_BW_W,
  parameter int unsigned OUT_W   = BW_I + BW_W + $clog2(R),
  parameter enc_e        ENC     = ENC_CSD,
  parameter int unsigned SEED    = DEF_SEED,
  parameter int unsigned DENSITY = DEF_DENSITY,
  parameter bit          SIGNED  = 1'b1,
  parameter int unsigned DEPTH   = 128,
  localparam int unsigned AW     = $clog2(DEPTH),
  localparam int unsigned IW     = R * BW_I,
  localparam int unsigned OW     = C * OUT_W,
  localparam int unsigned DW     = (IW > OW) ? IW : OW
) (
  input  logic          clk,
  input  logic          rst_n,
  // command
  input  logic          start,
  input  logic [AW-1:0] src,
  input  logic [AW-1:0] dst,
  input  logic [AW:0]   count,
  output logic          busy,
  output logic          done,
  // host access to the vector memory (while idle)
  input  logic          h_re,
  input  logic [AW-1:0] h_raddr,
  output logic [DW-1:0] h_rdata,
  input  logic          h_we,
  input  logic [AW-1:0] h_waddr,
  input  logic [DW-1:0] h_wdata
);

  localparam int unsigned RP  = (R < 2) ? 2 : (1 << $clog2(R));
  localparam int unsigned LAT = $clog2(RP) + 2;

  logic          c_re, c_we, load, first, shift;
  logic [AW-1:0] c_raddr, c_waddr;
  logic          m_re, m_we;
  logic [AW-1:0] m_raddr, m_waddr;
  logic [DW-1:0] m_rdata, m_wdata;
  logic [R-1:0]  xb;
  logic [C-1:0]  yb;
  logic [C-1:0][OUT_W-1:0] y_q, y_next;

  rc_ctrl #(
    .OUT_W (OUT_W),
    .LAT   (LAT),
    .AW    (AW)
  ) u_ctrl (
    .clk   (clk),
    .rst_n (rst_n),
    .start (start),
    .src   (src),
    .dst   (dst),
    .count (count),
    .busy  (busy),
    .done  (done),
    .re    (c_re),
    .raddr (c_raddr),
    .load  (load),
    .first (first),
    .shift (shift),
    .we    (c_we),
    .waddr (c_waddr)
  );

  // Memory ports: the sequencer owns them while busy, the host otherwise.
  always_comb begin
    m_re    = busy ? c_re    : (c_re | h_re);
    m_raddr = (busy || c_re) ? c_raddr : h_raddr;
    m_we    = busy ? c_we    : h_we;
    m_waddr = busy ? c_waddr : h_waddr;
    m_wdata = busy ? DW'(y_next) : h_wdata;
  end
  assign h_rdata = m_rdata;

  rc_sram #(
    .DEPTH (DEPTH),
    .DW    (DW)
  ) u_mem (
    .clk   (clk),
    .re    (m_re),
    .raddr (m_raddr),
    .rdata (m_rdata),
    .we    (m_we),
    .waddr (m_waddr),
    .wdata (m_wdata)
  );

  in_sreg #(
    .R      (R),
    .BW_I   (BW_I),
    .SIGNED (SIGNED)
  ) u_in (
    .clk  (clk),
    .load (load),
    .x    (m_rdata[IW-1:0]),
    .xb   (xb)
  );

  bs_matvec #(
    .R       (R),
    .C       (C),
    .BW_W    (BW_W),
    .ENC     (ENC),
    .SEED    (SEED),
    .DENSITY (DENSITY)
  ) u_mv (
    .clk   (clk),
    .first (first),
    .xb    (xb),
    .yb    (yb)
  );

  out_sreg #(
    .C     (C),
    .OUT_W (OUT_W)
  ) u_out (
    .clk    (clk),
    .shift  (shift),
    .yb     (yb),
    .y      (y_q),
    .y_next (y_next)
  );

endmodule
