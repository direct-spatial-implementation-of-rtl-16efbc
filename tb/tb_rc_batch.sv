// tb_rc_batch: batching workload on a 64 x 64 matrix of 8-bit signed weights
// at 95 % element sparsity (DENSITY 13 of 256), CSD split, 8-bit signed
// inputs, 22-bit results.
//
// Batches of 1, 2, 4, 8, 16, 32 and 64 input vectors are written through the
// host port into words 0..n-1 and multiplied in one command each, with the
// results written to words 64..64+n-1. Every result column is compared with
// sum_r V[r][c] * x_r worked out here from the matrix definition, and every
// batch must finish in 2 + n*22 + (6 + 2) cycles after its start cycle:
// vectors stream back to back, one every 22 cycles, so the cycles per vector
// fall towards 22 as the batch grows.
module tb_rc_batch;
  import rc_pkg::*;
  localparam int R     = 64;
  localparam int C     = 64;
  localparam int BW_I  = 8;
  localparam int BW_W  = 8;
  localparam int DENS  = 13;
  localparam int SEED  = 7;
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

  rc_top #(.R(R), .C(C), .BW_I(BW_I), .BW_W(BW_W), .SEED(SEED), .DENSITY(DENS)) dut (
    .clk(clk), .rst_n(rst_n), .start(start), .src(src), .dst(dst), .count(count),
    .busy(busy), .done(done), .h_re(h_re), .h_raddr(h_raddr), .h_rdata(h_rdata),
    .h_we(h_we), .h_waddr(h_waddr), .h_wdata(h_wdata));

  int checks = 0, failures = 0;
  int batches = 0;
  int xv [64][R];
  int w  [R][C];

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int t, nnz;
    rst_n = 1'b0; start = 1'b0; src = '0; dst = '0; count = '0;
    h_re = 1'b0; h_we = 1'b0; h_raddr = '0; h_waddr = '0; h_wdata = '0;
    nnz = 0;
    for (int r = 0; r < R; r++)
      for (int c = 0; c < C; c++) begin
        w[r][c] = elem_value(SEED, c, r, DENS, BW_W);
        if (w[r][c] != 0) nnz++;
      end
    $display("nonzero weights: %0d of %0d", nnz, R * C);
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int n = 1; n <= 64; n = n * 2) begin
      for (int a = 0; a < n; a++) begin
        @(negedge clk);
        h_we    = 1'b1;
        h_waddr = AW'(a);
        h_wdata = '0;
        for (int r = 0; r < R; r++) begin
          xv[a][r] = int'($urandom_range(0, 255)) - 128;
          h_wdata[r*BW_I +: BW_I] = BW_I'(xv[a][r]);
        end
      end
      @(negedge clk);
      h_we = 1'b0;
      start = 1'b1; src = AW'(0); dst = AW'(64); count = (AW+1)'(n);
      @(negedge clk);
      start = 1'b0;
      t = 1;
      while (!done && t < 5000) begin
        @(negedge clk);
        t++;
      end
      checks++;
      batches++;
      if (t != 2 + n * OUT_W + LATM) begin
        failures++;
        $display("batch %0d took %0d cycles, expected %0d", n, t, 2 + n * OUT_W + LATM);
      end
      $display("batch %0d: %0d cycles, %0d.%0d cycles per vector", n, t, t / n, (10 * t / n) % 10);
      for (int a = 0; a < n; a++) begin
        @(negedge clk);
        h_re = 1'b1; h_raddr = AW'(64 + a);
        @(negedge clk);
        h_re = 1'b0;
        for (int c = 0; c < C; c++) begin
          int acc;
          acc = 0;
          for (int r = 0; r < R; r++) acc += w[r][c] * xv[a][r];
          checks++;
          if (h_rdata[c*OUT_W +: OUT_W] != OUT_W'(acc)) begin
            failures++;
            if (failures < 10)
              $display("batch %0d vec %0d col %0d: got %0d expected %0d", n, a, c,
                       $signed(h_rdata[c*OUT_W +: OUT_W]), acc);
          end
        end
      end
    end
    checks++;
    if (batches != 7) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
