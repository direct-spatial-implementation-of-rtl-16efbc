// tb_rc_sram: checks the vector memory.
//
// Random words are written to an 8 x 20 memory while random reads go on.
// Read data must appear in the cycle after the read and match a model
// array; a read of the word being written in the same cycle returns the old
// word; a cycle without a read keeps the previous read data.
module tb_rc_sram;
  localparam int DEPTH = 8;
  localparam int DW    = 20;
  localparam int AW    = 3;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic          re, we;
  logic [AW-1:0] raddr, waddr;
  logic [DW-1:0] rdata, wdata;

  rc_sram #(.DEPTH(DEPTH), .DW(DW)) dut (
    .clk(clk), .re(re), .raddr(raddr), .rdata(rdata), .we(we), .waddr(waddr), .wdata(wdata));

  int checks = 0, failures = 0;

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [DW-1:0] model [DEPTH];
    logic [DW-1:0] expd;
    re = 1'b0; we = 1'b0; raddr = '0; waddr = '0; wdata = '0;
    // fill every word
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk);
      we = 1'b1; waddr = AW'(a); wdata = DW'($urandom); model[a] = wdata;
    end
    @(negedge clk);
    we = 1'b0;
    expd = '0;
    for (int n = 0; n < 500; n++) begin
      @(negedge clk);
      re    = ($urandom_range(0, 3) != 0);
      raddr = AW'($urandom);
      we    = $urandom_range(0, 1);
      waddr = (n % 5 == 0) ? raddr : AW'($urandom);
      wdata = DW'($urandom);
      if (re) expd = model[raddr];
      @(posedge clk);
      if (we) model[waddr] = wdata;
      #1;
      checks++;
      if (rdata !== expd) begin
        failures++;
        if (failures < 10) $display("n %0d: rdata %h expected %h", n, rdata, expd);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
