// tb_in_sreg: checks parallel load, LSb-first streaming and sign extension.
//
// A signed and an unsigned bank of 5 registers of 4 bits are loaded with
// random vectors, sometimes back to back and sometimes after a gap, and
// streamed for up to 9 cycles. In the t-th cycle after a load each output
// must be bit t of its element, and for t >= 4 the sign bit (signed bank)
// or 0 (unsigned bank).
module tb_in_sreg;
  localparam int R    = 5;
  localparam int BW_I = 4;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic                   load;
  logic [R-1:0][BW_I-1:0] x;
  logic [R-1:0]           xs, xu;

  in_sreg #(.R(R), .BW_I(BW_I), .SIGNED(1'b1)) u_s (.clk(clk), .load(load), .x(x), .xb(xs));
  in_sreg #(.R(R), .BW_I(BW_I), .SIGNED(1'b0)) u_u (.clk(clk), .load(load), .x(x), .xb(xu));

  int checks = 0, failures = 0;

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [R-1:0][BW_I-1:0] v;
    int len;
    load = 1'b0;
    x    = '0;
    for (int n = 0; n < 40; n++) begin
      for (int r = 0; r < R; r++) v[r] = BW_I'($urandom);
      if (n == 0) v = '1;
      len = (n % 3 == 0) ? 9 : BW_I + (n % 4);
      @(negedge clk);
      load = 1'b1;
      x    = v;
      @(negedge clk);
      load = 1'b0;
      x    = '0;
      for (int t = 0; t < len; t++) begin
        for (int r = 0; r < R; r++) begin
          logic es, eu;
          es = (t < BW_I) ? v[r][t] : v[r][BW_I-1];
          eu = (t < BW_I) ? v[r][t] : 1'b0;
          checks += 2;
          if (xs[r] !== es || xu[r] !== eu) begin
            failures++;
            if (failures < 10)
              $display("vec %0d t %0d row %0d: got %b%b expected %b%b", n, t, r, xs[r], xu[r], es, eu);
          end
        end
        if (t + 1 < len) @(negedge clk);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
