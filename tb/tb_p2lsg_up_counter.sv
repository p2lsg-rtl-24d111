// tb_p2lsg_up_counter -- self-checking test of the binary up-counter.
//
// Runs the default 8-bit counter through more than one full period with a
// random enable, checking every value against a software count, the wrap
// from 255 to 0, at_max, the synchronous clear and the hold when en is low.
module tb_p2lsg_up_counter;

  localparam int unsigned W = 8;

  logic         clk = 1'b0;
  logic         rst_n = 1'b0;
  logic         clr = 1'b0;
  logic         en = 1'b0;
  logic [W-1:0] q;
  logic         at_max;

  int checks = 0;
  int failures = 0;
  int model = 0;
  int wraps = 0;

  p2lsg_up_counter dut (.clk(clk), .rst_n(rst_n), .clr(clr), .en(en), .q(q), .at_max(at_max));

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s: q=%0d model=%0d at_max=%0b", what, q, model, at_max);
    end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    check(q == 0, "reset value");
    for (int i = 0; i < 1200; i++) begin
      en  = ($urandom % 4) != 0;
      clr = (i == 700);
      @(posedge clk);
      #1;
      if (clr) model = 0;
      else if (en) begin
        if (model == 255) wraps++;
        model = (model + 1) % 256;
      end
      check(q == W'(model), "count");
      check(at_max == (model == 255), "at_max");
    end
    check(wraps >= 2, "wrapped at least twice");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
