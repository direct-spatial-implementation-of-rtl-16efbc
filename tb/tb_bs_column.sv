// tb_bs_column: checks one column dot-product unit against integer math.
//
// Three columns of 6 rows (padded to 8) with 3 weight planes per sign are
// built from fixed weight masks: a mixed signed column, a column with every
// weight bit set, and a column with an empty negative part. Random signed
// 5-bit input vectors are streamed back to back, LSb first and sign
// extended, OUT_W = 12 bits each. Bit t of each result must appear exactly
// log2(8) + 2 = 5 cycles after bit t of the inputs, and the collected
// 12-bit word must equal sum_r (P_r - N_r) * x_r modulo 2^12.
module tb_bs_column;
  localparam int R     = 6;
  localparam int NPL   = 3;
  localparam int G     = 2 * NPL;
  localparam int RP    = 8;
  localparam int LAT   = 5;
  localparam int BW_I  = 5;
  localparam int OUT_W = 12;
  localparam int NOPS  = 30;
  localparam logic [RP*G-1:0] M0 = 48'h0000_9A5C_E3B1;
  localparam logic [RP*G-1:0] M1 = 48'h000F_FFFF_FFFF;
  localparam logic [RP*G-1:0] M2 = 48'h0000_71C7_1C7;   // N planes empty

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic            first;
  logic [RP*G-1:0] xg;
  logic [2:0]      y;

  bs_column #(.R(R), .NPL(NPL), .WMASK(M0)) u0 (.clk(clk), .first(first), .xg(xg), .y(y[0]));
  bs_column #(.R(R), .NPL(NPL), .WMASK(M1)) u1 (.clk(clk), .first(first), .xg(xg), .y(y[1]));
  bs_column #(.R(R), .NPL(NPL), .WMASK(M2)) u2 (.clk(clk), .first(first), .xg(xg), .y(y[2]));

  int checks = 0, failures = 0;
  int           xv  [NOPS][R];
  logic [OUT_W-1:0] got [NOPS][3];

  function automatic int wval(logic [RP*G-1:0] m, int r);
    int p = 0, n = 0;
    for (int k = 0; k < NPL; k++) begin
      if (m[r*G + k])       p += (1 << k);
      if (m[r*G + NPL + k]) n += (1 << k);
    end
    return p - n;
  endfunction

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
        if (o == 0) xv[o][r] = -16;        // most negative input everywhere
        if (o == 1) xv[o][r] = 15;
      end
    total = OUT_W * NOPS;
    first = 1'b0;
    xg    = '0;
    for (int t = 0; t <= total + LAT; t++) begin
      @(negedge clk);
      // bit (t - LAT) of the results is visible now
      if (t >= LAT && t - LAT < total)
        for (int c = 0; c < 3; c++) got[(t-LAT)/OUT_W][c][(t-LAT)%OUT_W] = y[c];
      if (t < total) begin
        first = (t % OUT_W) == 0;
        for (int r = 0; r < R; r++) begin
          logic [31:0] xs;
          xs = 32'(xv[t/OUT_W][r]);
          xg[r*G +: G] = {G{xs[t % OUT_W]}};
        end
      end else begin
        first = 1'b0;
        xg    = '0;
      end
    end
    for (int o = 0; o < NOPS; o++)
      for (int c = 0; c < 3; c++) begin
        int acc;
        logic [RP*G-1:0] m;
        acc = 0;
        m = (c == 0) ? M0 : (c == 1) ? M1 : M2;
        for (int r = 0; r < R; r++) acc += wval(m, r) * xv[o][r];
        checks++;
        if (got[o][c] !== OUT_W'(acc)) begin
          failures++;
          if (failures < 10)
            $display("op %0d col %0d: got %h expected %h", o, c, got[o][c], OUT_W'(acc));
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
