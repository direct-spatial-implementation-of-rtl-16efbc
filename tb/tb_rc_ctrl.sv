// tb_rc_ctrl: checks the sequencer's stream timing.
//
// With OUT_W = 5 and LAT = 3, commands of 3, 1 and 2 vectors are issued
// (plus a count of 0, which must be ignored). For each command the
// testbench records every control pulse with its cycle number and checks:
// reads go to src, src+1, ... and each is followed by a load one cycle
// later; loads are exactly OUT_W cycles apart (back-to-back streaming);
// `first` is high in the cycle after each load and only then; `shift` is
// high for exactly count*OUT_W cycles starting LAT cycles after the first
// `first`; writes go to dst, dst+1, ... in cycle load + LAT + OUT_W; `done`
// follows the last write by one cycle and `busy` then drops.
module tb_rc_ctrl;
  localparam int OUT_W = 5;
  localparam int LAT   = 3;
  localparam int AW    = 3;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic          rst_n, start, busy, done, re, load, first, shift, we;
  logic [AW-1:0] src, dst, raddr, waddr;
  logic [AW:0]   count;

  rc_ctrl #(.OUT_W(OUT_W), .LAT(LAT), .AW(AW)) dut (
    .clk(clk), .rst_n(rst_n), .start(start), .src(src), .dst(dst), .count(count),
    .busy(busy), .done(done), .re(re), .raddr(raddr), .load(load), .first(first),
    .shift(shift), .we(we), .waddr(waddr));

  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 15) $display("cycle %0d: %s", cyc, what);
    end
  endtask

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input int n, input int s, input int d);
    int rd_c [$], rd_a [$], ld_c [$], fi_c [$], sh_c [$], wr_c [$], wr_a [$];
    int done_c, t0;
    @(negedge clk);
    start = 1'b1; src = AW'(s); dst = AW'(d); count = (AW+1)'(n);
    t0 = cyc;
    done_c = -1;
    for (int k = 0; k < n * OUT_W + 40 && done_c < 0; k++) begin
      #1;
      if (re)    begin rd_c.push_back(cyc); rd_a.push_back(int'(raddr)); end
      if (load)  ld_c.push_back(cyc);
      if (first) fi_c.push_back(cyc);
      if (shift) sh_c.push_back(cyc);
      if (we)    begin wr_c.push_back(cyc); wr_a.push_back(int'(waddr)); end
      if (done)  done_c = cyc;
      @(negedge clk);
      start = 1'b0;
    end
    check(rd_c.size() == n, $sformatf("%0d reads, expected %0d", rd_c.size(), n));
    check(ld_c.size() == n, "load count");
    check(fi_c.size() == n, "first count");
    check(wr_c.size() == n, "write count");
    check(sh_c.size() == n * OUT_W, $sformatf("%0d shifts", sh_c.size()));
    check(rd_c.size() > 0 && rd_c[0] == t0, "first read in the start cycle");
    for (int i = 0; i < n && i < rd_c.size() && i < ld_c.size() && i < fi_c.size()
                    && i < wr_c.size(); i++) begin
      check(rd_a[i] == ((s + i) % (1 << AW)), "read address");
      check(ld_c[i] == rd_c[i] + 1, "load one cycle after read");
      if (i > 0) check(ld_c[i] == ld_c[i-1] + OUT_W, "loads OUT_W apart");
      check(fi_c[i] == ld_c[i] + 1, "first after load");
      check(wr_c[i] == ld_c[i] + LAT + OUT_W, "write cycle");
      check(wr_a[i] == ((d + i) % (1 << AW)), "write address");
    end
    if (sh_c.size() > 0 && fi_c.size() > 0) begin
      check(sh_c[0] == fi_c[0] + LAT, "first shift LAT after first");
      check(sh_c[sh_c.size()-1] == sh_c[0] + n * OUT_W - 1, "shifts contiguous");
    end
    check(wr_c.size() > 0 && done_c == wr_c[wr_c.size()-1] + 1, "done after last write");
    #1;
    check(!busy, "busy low after done");
  endtask

  initial begin
    rst_n = 1'b0; start = 1'b0; src = '0; dst = '0; count = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    // count 0: nothing happens
    @(negedge clk);
    start = 1'b1; count = '0;
    @(negedge clk);
    start = 1'b0;
    #1;
    check(!busy && !re, "count 0 ignored");
    run(3, 1, 5);
    run(1, 6, 0);
    run(2, 7, 3);   // addresses wrap
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
