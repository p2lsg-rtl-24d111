// tb_bench_mae -- accuracy benchmarks of P2LSG bit-streams: SC
// multiplication (AND of two streams) and SC scaled addition (2-to-1 MUX
// with a select stream of value 0.5), for all pairs of 8-bit inputs.
//
// For each stream length N = 2^i (i = 2..16) a P2LSG with an i-bit counter
// produces the VDC-2 sequence (bit reversal) and the VDC-N sequence (the
// counter itself); both are scaled to 8-bit random numbers (shifted left
// by 8-i, or truncated to the top 8 bits when i > 8). Over one period the
// ones count of the AND of "x1 > R1" and "x2 > R2" is gathered for all
// 65536 input pairs at once from a 2-D cumulative histogram of (R1, R2),
// which gives the same count as running the comparators and the AND gate
// bit by bit. The scaled adder uses VDC-2 for both data inputs and VDC-N
// for the select. The mean absolute error (percent) is compared with the
// published P2LSG accuracy figures (multiplication for N = 2^6..2^16,
// addition for N = 2^2..2^9) to within one unit of their last printed
// digit.
module tb_bench_mae;

  localparam int IMIN = 2;
  localparam int IMAX = 16;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  logic clr = 1'b0;
  logic en = 1'b0;
  always #5 clk = ~clk;

  int checks = 0;
  int failures = 0;
  int cyc = 0;

  // published MAE (%) and the unit of the last printed digit
  real mul_ref  [6:16] = '{1.76, 0.88, 0.39, 0.170, 0.073, 0.030, 0.012, 0.0045, 0.0015, 0.0003, 0.0000};
  real mul_unit [6:16] = '{0.01, 0.01, 0.01, 0.001, 0.001, 0.001, 0.001, 0.0001, 0.0001, 0.0001, 0.0001};
  real add_ref  [2:9]  = '{13.40, 6.63, 3.24, 1.55, 0.71, 0.29, 0.097, 0.00};
  real add_unit [2:9]  = '{0.01, 0.01, 0.01, 0.01, 0.01, 0.01, 0.001, 0.01};

  // captured 8-bit random numbers of every length
  byte unsigned r1 [IMIN:IMAX][];
  byte unsigned r2 [IMIN:IMAX][];

  for (genvar i = IMIN; i <= IMAX; i++) begin : g_len
    logic [1:0][0:0][i-1:0] rnd;
    logic last;
    p2lsg #(.W(i), .PAR(1), .NSEQ(2), .LOG2B('{1, i})) gen (
      .clk(clk), .rst_n(rst_n), .clr(clr), .en(en), .rnd(rnd), .last(last));
    function automatic byte unsigned to8(logic [i-1:0] v);
      if (i <= 8) return byte'(int'(v) << (8 - i));
      else        return byte'(int'(v) >> (i - 8));
    endfunction
    initial begin
      r1[i] = new[1 << i];
      r2[i] = new[1 << i];
    end
    always @(negedge clk) if (en && cyc < (1 << i)) begin
      r1[i][cyc] = to8(rnd[0][0]);
      r2[i][cyc] = to8(rnd[1][0]);
      if (cyc == (1 << i) - 1) begin
        checks++;
        if (!last) begin
          failures++;
          $display("FAIL length 2^%0d: last not set at the end of the period", i);
        end
      end
    end
  end

  function automatic real mae_mul(int i);
    int h [257][257];
    real acc;
    int n;
    n = 1 << i;
    for (int a = 0; a <= 256; a++) for (int b = 0; b <= 256; b++) h[a][b] = 0;
    for (int c = 0; c < n; c++) h[int'(r1[i][c]) + 1][int'(r2[i][c]) + 1]++;
    // h[a][b] becomes #{c : R1 < a, R2 < b}
    for (int a = 1; a <= 256; a++) for (int b = 0; b <= 256; b++) h[a][b] += h[a-1][b];
    for (int a = 0; a <= 256; a++) for (int b = 1; b <= 256; b++) h[a][b] += h[a][b-1];
    acc = 0.0;
    for (int x1 = 0; x1 < 256; x1++)
      for (int x2 = 0; x2 < 256; x2++) begin
        real e;
        e = real'(h[x1][x2]) / real'(n) - real'(x1 * x2) / 65536.0;
        acc += (e < 0.0) ? -e : e;
      end
    return 100.0 * acc / 65536.0;
  endfunction

  function automatic real mae_add(int i);
    int c1 [256];
    int c2 [256];
    real acc;
    int n;
    n = 1 << i;
    for (int x = 0; x < 256; x++) begin
      c1[x] = 0;
      c2[x] = 0;
      for (int c = 0; c < n; c++) begin
        bit sel;
        sel = 128 > int'(r2[i][c]);
        if (x > int'(r1[i][c])) begin
          if (sel) c1[x]++;
          else     c2[x]++;
        end
      end
    end
    acc = 0.0;
    for (int x1 = 0; x1 < 256; x1++)
      for (int x2 = 0; x2 < 256; x2++) begin
        real e;
        e = real'(c1[x1] + c2[x2]) / real'(n) - real'(x1 + x2) / 512.0;
        acc += (e < 0.0) ? -e : e;
      end
    return 100.0 * acc / 65536.0;
  endfunction

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    clr = 1'b1;
    @(negedge clk);
    clr = 1'b0;
    en  = 1'b1;
    repeat ((1 << IMAX)) begin
      @(posedge clk);
      @(negedge clk) cyc++;
    end
    en = 1'b0;
    for (int i = 6; i <= 16; i++) begin
      real m, d;
      m = mae_mul(i);
      d = m - mul_ref[i];
      checks++;
      if ((d < 0.0 ? -d : d) > mul_unit[i] + 1e-9) begin
        failures++;
        $display("FAIL multiplication N=2^%0d: MAE %.5f%%, published %.4f%%", i, m, mul_ref[i]);
      end else
        $display("multiplication N=2^%0d: MAE %.5f%% (published %.4f%%)", i, m, mul_ref[i]);
    end
    for (int i = 2; i <= 9; i++) begin
      real m, d;
      m = mae_add(i);
      d = m - add_ref[i];
      checks++;
      if ((d < 0.0 ? -d : d) > add_unit[i] + 1e-9) begin
        failures++;
        $display("FAIL scaled addition N=2^%0d: MAE %.4f%%, published %.3f%%", i, m, add_ref[i]);
      end else
        $display("scaled addition N=2^%0d: MAE %.4f%% (published %.3f%%)", i, m, add_ref[i]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat ((1 << IMAX) + 1000) @(posedge clk);
    #100000000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
