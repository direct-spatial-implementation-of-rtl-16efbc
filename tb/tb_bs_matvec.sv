// tb_bs_matvec: checks the whole fixed-matrix array against integer math.
//
// Three 12 x 5 arrays with 4-bit signed weights are built from the same
// seed: PN split at 50 % density, CSD split at 50 % density (same matrix,
// different bit planes), and CSD on a fully dense matrix. Random signed
// 5-bit input vectors are streamed back to back (OUT_W = 13 bits each,
// sign extended). Every result must equal sum_r V[r][c] * x_r, with V taken
// element by element from the matrix definition, and bit t must leave the
// array exactly log2(16) + 2 = 6 cycles after bit t went in. The PN and CSD
// arrays must agree, which checks that the CSD rewrite preserves V.
module tb_bs_matvec;
  import rc_pkg::*;
  localparam int R     = 12;
  localparam int C     = 5;
  localparam int BW_W  = 4;
  localparam int BW_I  = 5;
  localparam int OUT_W = BW_I + BW_W + 4;
  localparam int LAT   = 6;
  localparam int NOPS  = 20;
  localparam int SEED  = 7;
  localparam int D0    = 128;
  localparam int D2    = 256;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic         first;
  logic [R-1:0] xb;
  logic [C-1:0] y0, y1, y2;

  bs_matvec #(.R(R), .C(C), .BW_W(BW_W), .ENC(ENC_PN),  .SEED(SEED), .DENSITY(D0)) u0 (
    .clk(clk), .first(first), .xb(xb), .yb(y0));
  bs_matvec #(.R(R), .C(C), .BW_W(BW_W), .ENC(ENC_CSD), .SEED(SEED), .DENSITY(D0)) u1 (
    .clk(clk), .first(first), .xb(xb), .yb(y1));
  bs_matvec #(.R(R), .C(C), .BW_W(BW_W), .ENC(ENC_CSD), .SEED(SEED), .DENSITY(D2)) u2 (
    .clk(clk), .first(first), .xb(xb), .yb(y2));

  int checks = 0, failures = 0;
  int               xv  [NOPS][R];
  logic [OUT_W-1:0] got [NOPS][3][C];

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int total;
    for (int o = 0; o < NOPS; o++)
      for (int r = 0; r < R; r++) begin
        xv[o][r] = int'($urandom_range(0, 31)) - 16;
        if (o == 0) xv[o][r] = -16;
      end
    total = OUT_W * NOPS;
    first = 1'b0;
    xb    = '0;
    for (int t = 0; t <= total + LAT; t++) begin
      @(negedge clk);
      if (t >= LAT && t - LAT < total)
        for (int c = 0; c < C; c++) begin
          got[(t-LAT)/OUT_W][0][c][(t-LAT)%OUT_W] = y0[c];
          got[(t-LAT)/OUT_W][1][c][(t-LAT)%OUT_W] = y1[c];
          got[(t-LAT)/OUT_W][2][c][(t-LAT)%OUT_W] = y2[c];
        end
      if (t < total) begin
        first = (t % OUT_W) == 0;
        for (int r = 0; r < R; r++) begin
          logic [31:0] xs;
          xs = 32'(xv[t/OUT_W][r]);
          xb[r] = xs[t % OUT_W];
        end
      end else begin
        first = 1'b0;
        xb    = '0;
      end
    end
    for (int o = 0; o < NOPS; o++)
      for (int a = 0; a < 3; a++)
        for (int c = 0; c < C; c++) begin
          int acc;
          acc = 0;
          for (int r = 0; r < R; r++)
            acc += elem_value(SEED, c, r, (a == 2) ? D2 : D0, BW_W) * xv[o][r];
          checks++;
          if (got[o][a][c] !== OUT_W'(acc)) begin
            failures++;
            if (failures < 10)
              $display("op %0d array %0d col %0d: got %h expected %h",
                       o, a, c, got[o][a][c], OUT_W'(acc));
          end
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
