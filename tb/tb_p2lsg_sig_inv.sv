// tb_p2lsg_sig_inv -- self-checking test of the significance inversion.
//
// For every base 2^1 .. 2^8 at W = 8, and for W = 6 with base 16, all
// indices are applied and the output is compared with the Van der Corput
// value computed arithmetically. The four 8-bit wirings of the published
// examples (base 2, 4, 8, 16) are also checked bit by bit with one-hot
// indices.
module tb_p2lsg_sig_inv;
  import tb_ref_pkg::*;

  localparam int unsigned W = 8;

  logic [W-1:0] idx;
  logic [W-1:0] rnd [1:8];
  logic [5:0]   idx6;
  logic [5:0]   rnd6;

  int checks = 0;
  int failures = 0;

  for (genvar l = 1; l <= 8; l++) begin : g_base
    p2lsg_sig_inv #(.W(W), .LOG2B(l)) dut (.idx(idx), .rnd(rnd[l]));
  end
  p2lsg_sig_inv #(.W(6), .LOG2B(4)) dut6 (.idx(idx6), .rnd(rnd6));

  // Output bit j (MSB first, position 7..0) = index bit map[j]; -1 = constant 0.
  int map2  [8] = '{0, 1, 2, 3, 4, 5, 6, 7};
  int map4  [8] = '{1, 0, 3, 2, 5, 4, 7, 6};
  int map8  [8] = '{2, 1, 0, 5, 4, 3, -1, 7};
  int map16 [8] = '{3, 2, 1, 0, 7, 6, 5, 4};

  task automatic check_map(input int l, input int m [8]);
    for (int b = 0; b < 8; b++) begin
      idx = W'(1) << b;
      #1;
      for (int j = 0; j < 8; j++) begin
        bit expect_one;
        expect_one = (m[j] == b);
        checks++;
        if (rnd[l][7-j] !== expect_one) begin
          failures++;
          $display("FAIL base 2^%0d: index bit %0d, output bit %0d = %0b", l, b, 7-j, rnd[l][7-j]);
        end
      end
    end
  endtask

  initial begin
    for (int i = 0; i < 256; i++) begin
      idx = W'(i);
      #1;
      for (int l = 1; l <= 8; l++) begin
        checks++;
        if (rnd[l] != W'(vdc_ref(i, 8, l))) begin
          failures++;
          $display("FAIL base 2^%0d idx %0d: got %0d expected %0d", l, i, rnd[l], vdc_ref(i, 8, l));
        end
      end
    end
    for (int i = 0; i < 64; i++) begin
      idx6 = 6'(i);
      #1;
      checks++;
      if (rnd6 != 6'(vdc_ref(i, 6, 4))) begin
        failures++;
        $display("FAIL W=6 base 16 idx %0d: got %0d expected %0d", i, rnd6, vdc_ref(i, 6, 4));
      end
    end
    check_map(1, map2);
    check_map(2, map4);
    check_map(3, map8);
    check_map(4, map16);
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
