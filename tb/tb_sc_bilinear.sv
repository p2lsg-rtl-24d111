// tb_sc_bilinear -- self-checking test of the SC bilinear interpolator.
//
// Two interpolators, the sequential default (PAR = 1) and a 4-lane one,
// process the same list of pixels: corner cases (u = v = 0 must return I11
// exactly, extreme pixel values) and random ones. For every pixel the
// output must equal the ones count predicted by the arithmetic model of the
// bit-streams, the accept-to-valid latency must be 256 / PAR clock edges,
// and the output must stay put while out_ready is held low. The mean
// distance to the exact bilinear value is also bounded.
module tb_sc_bilinear;
  import tb_ref_pkg::*;

  localparam int NV = 40;
  localparam int NDUT = 2;
  localparam int PARS [NDUT] = '{1, 4};

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  int vec [NV][6];      // I11, I12, I21, I22, u, v
  int expect_cnt [NV];
  int exact_x256 [NV];  // exact bilinear value times 256
  int checks [NDUT];
  int failures [NDUT];
  int err_sum [NDUT];
  int stalls [NDUT];
  bit done [NDUT];

  initial begin
    for (int i = 0; i < NV; i++) begin
      for (int k = 0; k < 6; k++) vec[i][k] = int'($urandom % 256);
      if (i == 0) vec[i] = '{200, 10, 20, 30, 0, 0};
      if (i == 1) vec[i] = '{255, 255, 255, 255, 255, 255};
      if (i == 2) vec[i] = '{0, 0, 0, 0, 128, 128};
      if (i == 3) vec[i] = '{0, 255, 0, 255, 0, 128};
      if (i == 4) vec[i] = '{17, 99, 180, 250, 128, 128};
      expect_cnt[i] = bilinear_count(vec[i][0], vec[i][1], vec[i][2], vec[i][3],
                                     vec[i][4], vec[i][5], 8, 1, 8, 6);
      exact_x256[i] = ((256 - vec[i][4]) * (256 - vec[i][5]) * vec[i][0]
                     + (256 - vec[i][4]) * vec[i][5] * vec[i][1]
                     + vec[i][4] * (256 - vec[i][5]) * vec[i][2]
                     + vec[i][4] * vec[i][5] * vec[i][3]) / 256;
    end
  end

  for (genvar g = 0; g < NDUT; g++) begin : g_dut
    localparam int P = PARS[g];
    logic             in_valid = 1'b0;
    logic             in_ready;
    logic [3:0][7:0]  pix = '0;
    logic [7:0]       u = '0, v = '0;
    logic             out_valid;
    logic             out_ready = 1'b0;
    logic [7:0]       out_pix;

    sc_bilinear #(.PAR(P)) dut (
      .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .in_ready(in_ready),
      .pix(pix), .u(u), .v(v), .out_valid(out_valid), .out_ready(out_ready),
      .out_pix(out_pix));

    task automatic chk(input bit ok, input string what);
      checks[g]++;
      if (!ok) begin
        failures[g]++;
        $display("FAIL PAR=%0d %s", P, what);
      end
    endtask

    initial begin
      checks[g] = 0; failures[g] = 0; err_sum[g] = 0; stalls[g] = 0; done[g] = 0;
      wait (rst_n);
      for (int i = 0; i < NV; i++) begin
        int lat, hold;
        logic [7:0] first;
        @(negedge clk);
        pix = {8'(vec[i][3]), 8'(vec[i][2]), 8'(vec[i][1]), 8'(vec[i][0])};
        u = 8'(vec[i][4]);
        v = 8'(vec[i][5]);
        in_valid = 1'b1;
        while (!in_ready) @(negedge clk);
        @(posedge clk);  // accepting edge
        #1 in_valid = 1'b0;
        pix = '1; u = '1; v = '1;  // operands must have been latched
        lat = 0;
        do begin
          @(posedge clk);
          #1 lat++;
        end while (!out_valid && lat < 1000);
        chk(lat == 256 / P, $sformatf("vec %0d latency %0d", i, lat));
        chk(int'(out_pix) == expect_cnt[i],
            $sformatf("vec %0d out %0d expected %0d", i, out_pix, expect_cnt[i]));
        err_sum[g] += (int'(out_pix) * 256 > exact_x256[i]) ? int'(out_pix) * 256 - exact_x256[i]
                                                            : exact_x256[i] - int'(out_pix) * 256;
        // back-pressure: keep the result waiting for a few cycles
        first = out_pix;
        hold = int'($urandom % 4);
        repeat (hold) begin
          @(posedge clk);
          #1 stalls[g]++;
          chk(out_valid && out_pix == first, $sformatf("vec %0d result not held", i));
        end
        @(negedge clk);
        out_ready = 1'b1;
        @(posedge clk);
        #1 out_ready = 1'b0;
        chk(!out_valid && in_ready, $sformatf("vec %0d not back to idle", i));
      end
      // mean |error| against exact bilinear below 6 LSB (value times 256)
      chk(err_sum[g] / NV < 6 * 256, $sformatf("mean error %0d/256 LSB", err_sum[g] / NV));
      chk(stalls[g] > 0, "back-pressure never exercised");
      done[g] = 1'b1;
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    wait (done[0] && done[1]);
    $display("mean |error| x256: PAR=1 %0d, PAR=4 %0d; stall cycles %0d / %0d",
             err_sum[0] / NV, err_sum[1] / NV, stalls[0], stalls[1]);
    $display("TB_RESULT checks=%0d failures=%0d", checks[0] + checks[1], failures[0] + failures[1]);
    $finish;
  end

  initial begin
    repeat (40 * 300 + 2000) @(posedge clk);
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks[0] + checks[1], failures[0] + failures[1] + 1);
    $finish;
  end

endmodule
