// tb_sc_ones_counter -- self-checking test of the ones counter with 4 bits
// per cycle: random bits and enables over several clears, compared with a
// software popcount, including a full 256-bit stream of 1s (count 256).
module tb_sc_ones_counter;

  localparam int unsigned PAR = 4;
  localparam int unsigned CW  = 9;

  logic           clk = 1'b0;
  logic           rst_n = 1'b0;
  logic           clr = 1'b0;
  logic           en = 1'b0;
  logic [PAR-1:0] bits = '0;
  logic [CW-1:0]  count;
  int checks = 0;
  int failures = 0;
  int model = 0;

  sc_ones_counter #(.PAR(PAR), .CW(CW)) dut (
    .clk(clk), .rst_n(rst_n), .clr(clr), .en(en), .bits(bits), .count(count));

  always #5 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < 600; i++) begin
      @(negedge clk);
      clr  = (i % 150 == 0) || (i == 64);
      en   = (i > 64 && i <= 128) ? 1'b1 : (($urandom % 3) != 0);
      bits = (i > 64 && i <= 128) ? '1 : PAR'($urandom);
      @(posedge clk);
      if (clr) model = 0;
      else if (en) model += $countones(bits);
      #1;
      checks++;
      if (count != CW'(model)) begin
        failures++;
        $display("FAIL cycle %0d count=%0d model=%0d", i, count, model);
      end
      if (i == 128) begin
        checks++;
        if (count != 9'd256) begin
          failures++;
          $display("FAIL full stream count=%0d", count);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
