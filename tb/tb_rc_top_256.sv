// tb_rc_top_256: one complete operation of the wrapped multiplier on a
// 256 x 256 matrix of 8-bit signed weights at 98 % element sparsity (the
// default DENSITY), split by CSD, with 8-bit signed inputs and 24-bit results.
//
// One random input vector and a second one of extreme values (127 and -128)
// are written through the host port, multiplied in a batch of two, and both
// result vectors are read back and compared column by column with
// sum_r V[r][c] * x_r computed here from the matrix definition. The batch
// must finish in 2 + 2*24 + (8 + 2) cycles after the start cycle. Setting R
// and C to 1024 runs the default-size design the same way.
module tb_rc_top_256;
  import rc_pkg::*;
  localparam int R     = 256;
  localparam int C     = 256;
  localparam int BW_I  = DEF_BW_I;
  localparam int BW_W  = DEF_BW_W;
  localparam int OUT_W = BW_I + BW_W + $clog2(R);
  localparam int AW    = 7;
  localparam int DW    = C * OUT_W;
  localparam int LATM  = $clog2(R) + 2;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic          rst_n, start, busy, done, h_re, h_we;
  logic [AW-1:0] src, dst, h_raddr, h_waddr;
  logic [AW:0]   count;
  logic [DW-1:0] h_wdata, h_rdata;

  rc_top #(.R(R), .C(C)) dut (
    .clk(clk), .rst_n(rst_n), .start(start), .src(src), .dst(dst), .count(count),
    .busy(busy), .done(done), .h_re(h_re), .h_raddr(h_raddr), .h_rdata(h_rdata),
    .h_we(h_we), .h_waddr(h_waddr), .h_wdata(h_wdata));

  int checks = 0, failures = 0;
  int xv [2][R];

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int t, nnz;
    rst_n = 1'b0; start = 1'b0; src = '0; dst = '0; count = '0;
    h_re = 1'b0; h_we = 1'b0; h_raddr = '0; h_waddr = '0; h_wdata = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int a = 0; a < 2; a++) begin
      @(negedge clk);
      h_we    = 1'b1;
      h_waddr = AW'(a);
      h_wdata = '0;
      for (int r = 0; r < R; r++) begin
        xv[a][r] = (a == 0) ? int'($urandom_range(0, 255)) - 128 : ((r % 3 == 0) ? 127 : -128);
        h_wdata[r*BW_I +: BW_I] = BW_I'(xv[a][r]);
      end
    end
    @(negedge clk);
    h_we = 1'b0;
    start = 1'b1; src = AW'(0); dst = AW'(2); count = (AW+1)'(2);
    @(negedge clk);
    start = 1'b0;
    t = 1;
    while (!done && t < 1000) begin
      @(negedge clk);
      t++;
    end
    checks++;
    if (t != 2 + 2 * OUT_W + LATM) begin
      failures++;
      $display("batch took %0d cycles, expected %0d", t, 2 + 2 * OUT_W + LATM);
    end
    nnz = 0;
    for (int a = 0; a < 2; a++) begin
      @(negedge clk);
      h_re = 1'b1; h_raddr = AW'(2 + a);
      @(negedge clk);
      h_re = 1'b0;
      for (int c = 0; c < C; c++) begin
        int acc, w;
        acc = 0;
        for (int r = 0; r < R; r++) begin
          w = elem_value(DEF_SEED, c, r, DEF_DENSITY, BW_W);
          if (w != 0) begin
            acc += w * xv[a][r];
            if (a == 0) nnz++;
          end
        end
        checks++;
        if (h_rdata[c*OUT_W +: OUT_W] != OUT_W'(acc)) begin
          failures++;
          if (failures < 10)
            $display("vec %0d col %0d: got %0d expected %0d", a, c,
                     $signed(h_rdata[c*OUT_W +: OUT_W]), acc);
        end
      end
    end
    $display("nonzero weights: %0d of %0d (element sparsity %0d.%0d %%)", nnz, R * C,
             100 - (nnz * 100) / (R * C), (1000 - (nnz * 1000) / (R * C)) % 10);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
