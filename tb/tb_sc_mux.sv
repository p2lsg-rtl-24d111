// tb_sc_mux -- self-checking test of the stochastic MUX: every input
// pattern and select code of the 2-to-1 and 4-to-1 configurations, plus a
// probability check: a 2-to-1 MUX of two constant streams (all 0s and all
// 1s) selected by a stream with 96 ones in 256 must give 96 ones.
module tb_sc_mux;

  logic [1:0] in2;
  logic       sel2;
  logic       out2;
  logic [3:0] in4;
  logic [1:0] sel4;
  logic       out4;
  int checks = 0;
  int failures = 0;

  sc_mux #(.NIN(2)) dut2 (.in_bits(in2), .sel(sel2), .out_bit(out2));
  sc_mux #(.NIN(4)) dut4 (.in_bits(in4), .sel(sel4), .out_bit(out4));

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  initial begin
    int ones;
    for (int i = 0; i < 4; i++)
      for (int s = 0; s < 2; s++) begin
        in2 = 2'(i); sel2 = 1'(s);
        #1;
        chk(out2 == ((i >> s) & 1), $sformatf("2:1 in=%b sel=%0d", in2, s));
      end
    for (int i = 0; i < 16; i++)
      for (int s = 0; s < 4; s++) begin
        in4 = 4'(i); sel4 = 2'(s);
        #1;
        chk(out4 == ((i >> s) & 1), $sformatf("4:1 in=%b sel=%0d", in4, s));
      end
    ones = 0;
    for (int c = 0; c < 256; c++) begin
      in2  = 2'b10;
      sel2 = (c < 96);
      #1;
      ones += int'(out2);
    end
    chk(ones == 96, $sformatf("weighted select gave %0d ones", ones));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
