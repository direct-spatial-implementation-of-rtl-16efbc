// tb_out_sreg: checks the result shift registers.
//
// Random bit streams are shifted into 3 registers of 6 bits, LSb first,
// with random pauses (shift low). After every clock the registered value
// must equal a model register updated the same way here, and y_next must
// always show the value after the coming edge; after 6 consecutive shifts
// the register holds the 6 streamed bits in order.
module tb_out_sreg;
  localparam int C     = 3;
  localparam int OUT_W = 6;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic                    shift;
  logic [C-1:0]            yb;
  logic [C-1:0][OUT_W-1:0] y, y_next;

  out_sreg #(.C(C), .OUT_W(OUT_W)) dut (.clk(clk), .shift(shift), .yb(yb), .y(y), .y_next(y_next));

  int checks = 0, failures = 0;

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [C-1:0][OUT_W-1:0] model, word;
    int run;
    shift = 1'b1;
    yb    = '0;
    // flush to a known state
    repeat (OUT_W) @(negedge clk);
    model = '0;
    run   = 0;
    for (int n = 0; n < 400; n++) begin
      @(negedge clk);
      shift = (n < 60) ? 1'b1 : ($urandom_range(0, 3) != 0);
      yb    = C'($urandom);
      #1;
      if (shift) begin
        for (int c = 0; c < C; c++) word[c] = {yb[c], model[c][OUT_W-1:1]};
      end else begin
        word = model;
      end
      checks++;
      if (y_next !== word) begin
        failures++;
        if (failures < 10) $display("n %0d: y_next %h expected %h", n, y_next, word);
      end
      @(posedge clk);
      model = word;
      #1;
      checks++;
      if (y !== model) begin
        failures++;
        if (failures < 10) $display("n %0d: y %h expected %h", n, y, model);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
