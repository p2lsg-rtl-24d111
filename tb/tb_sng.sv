// tb_sng -- self-checking test of the SNG comparator: all 2^16 pairs of
// 8-bit x and r, expecting 1 exactly when x > r.
module tb_sng;

  logic [7:0] x, r;
  logic       b;
  int checks = 0;
  int failures = 0;

  sng dut (.x(x), .r(r), .bit_o(b));

  initial begin
    for (int i = 0; i < 256; i++)
      for (int j = 0; j < 256; j++) begin
        x = 8'(i);
        r = 8'(j);
        #1;
        checks++;
        if (b != (i > j)) begin
          failures++;
          if (failures < 10) $display("FAIL x=%0d r=%0d bit=%0b", i, j, b);
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
