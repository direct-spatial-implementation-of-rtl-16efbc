// tb_bs_add: checks the bit-serial adder lanes, including the culled lanes.
//
// Four adder lanes (both operands, only a, none, only b) and two subtractor
// lanes (full, no subtrahend) are fed back-to-back random W-bit operand
// pairs, LSb first, with `first` marking bit 0. Each result is collected one
// cycle after its bits go in (the adder's one-cycle latency) and compared
// with the sum or difference modulo 2^W computed here.
module tb_bs_add;
  localparam int W    = 12;
  localparam int NOPS = 40;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic       first;
  logic [3:0] a4, b4, s4;
  logic [1:0] a2, b2, s2;

  bs_add #(.N(4), .SUB(1'b0), .A_USED(4'b0011), .B_USED(4'b1001)) u_add (
    .clk(clk), .first(first), .a(a4), .b(b4), .s(s4));
  bs_add #(.N(2), .SUB(1'b1), .A_USED(2'b11), .B_USED(2'b01)) u_sub (
    .clk(clk), .first(first), .a(a2), .b(b2), .s(s2));

  int checks = 0, failures = 0;
  logic [W-1:0] av [NOPS][6];
  logic [W-1:0] bv [NOPS][6];
  logic [W-1:0] got [NOPS][6];

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int o = 0; o < NOPS; o++)
      for (int l = 0; l < 6; l++) begin
        av[o][l] = W'($urandom);
        bv[o][l] = W'($urandom);
        if (o < 2) begin av[o][l] = '1; bv[o][l] = '1; end   // long carry runs
      end
    first = 1'b0; a4 = '0; b4 = '0; a2 = '0; b2 = '0;
    for (int t = 0; t <= W * NOPS; t++) begin
      @(negedge clk);
      if (t > 0) begin
        for (int l = 0; l < 4; l++) got[(t-1)/W][l][(t-1)%W] = s4[l];
        for (int l = 0; l < 2; l++) got[(t-1)/W][4+l][(t-1)%W] = s2[l];
      end
      if (t < W * NOPS) begin
        first = (t % W) == 0;
        for (int l = 0; l < 4; l++) begin
          a4[l] = av[t/W][l][t%W];
          b4[l] = bv[t/W][l][t%W];
        end
        for (int l = 0; l < 2; l++) begin
          a2[l] = av[t/W][4+l][t%W];
          b2[l] = bv[t/W][4+l][t%W];
        end
      end
    end
    for (int o = 0; o < NOPS; o++) begin
      logic [W-1:0] exp [6];
      exp[0] = av[o][0] + bv[o][0];
      exp[1] = av[o][1];
      exp[2] = '0;
      exp[3] = bv[o][3];
      exp[4] = av[o][4] - bv[o][4];
      exp[5] = av[o][5];
      for (int l = 0; l < 6; l++) begin
        checks++;
        if (got[o][l] !== exp[l]) begin
          failures++;
          if (failures < 10)
            $display("op %0d lane %0d: got %h expected %h", o, l, got[o][l], exp[l]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
