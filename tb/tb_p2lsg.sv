// tb_p2lsg -- self-checking test of the P2LSG sequence generator.
//
// Two generators are checked over two full periods: the sequential default
// (PAR = 1, VDC-4 and VDC-16) and a 4-lane parallel one (VDC-2 and VDC-16).
// Every output is compared with the arithmetic Van der Corput value of its
// index PAR*count + lane; each period must visit every 8-bit value exactly
// once per sequence, and last must rise on cycle 2^8 / PAR of each period.
module tb_p2lsg;
  import tb_ref_pkg::*;

  localparam int unsigned W = 8;
  localparam int unsigned P4 = 4;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  logic clr = 1'b0;
  logic en = 1'b0;

  logic [1:0][0:0][W-1:0]    rnd_s;
  logic                      last_s;
  logic [1:0][P4-1:0][W-1:0] rnd_p;
  logic                      last_p;

  int lb_s [2] = '{2, 4};
  int lb_p [2] = '{1, 4};
  int checks = 0;
  int failures = 0;

  p2lsg dut_seq (.clk(clk), .rst_n(rst_n), .clr(clr), .en(en), .rnd(rnd_s), .last(last_s));

  p2lsg #(.W(W), .PAR(P4), .NSEQ(2), .LOG2B('{1, 4})) dut_par (
    .clk(clk), .rst_n(rst_n), .clr(clr), .en(en), .rnd(rnd_p), .last(last_p));

  always #5 clk = ~clk;

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit seen_s [2][256];
    bit seen_p [2][256];
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    clr = 1'b1;
    @(negedge clk);
    clr = 1'b0;
    en  = 1'b1;
    for (int period = 0; period < 2; period++) begin
      seen_s = '{default: 0};
      seen_p = '{default: 0};
      for (int c = 0; c < 256; c++) begin
        // sequential generator: one element per cycle
        for (int s = 0; s < 2; s++) begin
          chk(rnd_s[s][0] == W'(vdc_ref(c, 8, lb_s[s])),
              $sformatf("seq s=%0d idx=%0d got %0d", s, c, rnd_s[s][0]));
          seen_s[s][rnd_s[s][0]] = 1'b1;
        end
        chk(last_s == (c == 255), $sformatf("seq last at %0d", c));
        // parallel generator: 4 elements per cycle, first 64 cycles of each 256
        if (c < 256 / P4) begin
          for (int s = 0; s < 2; s++)
            for (int p = 0; p < P4; p++) begin
              chk(rnd_p[s][p] == W'(vdc_ref(c*P4 + p, 8, lb_p[s])),
                  $sformatf("par s=%0d idx=%0d got %0d", s, c*P4 + p, rnd_p[s][p]));
              seen_p[s][rnd_p[s][p]] = 1'b1;
            end
          chk(last_p == (c == 256 / P4 - 1), $sformatf("par last at %0d", c));
        end
        @(negedge clk);
        // clr on the edge that ends the period restarts both generators at 0
        clr = (c == 254);
      end
      for (int s = 0; s < 2; s++)
        for (int v = 0; v < 256; v++) begin
          chk(seen_s[s][v], $sformatf("seq s=%0d value %0d missing", s, v));
          chk(seen_p[s][v], $sformatf("par s=%0d value %0d missing", s, v));
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
