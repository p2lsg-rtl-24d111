// tb_sc_scene_merge -- self-checking test of the SC scene merger.
//
// Two mergers, the sequential default (PAR = 1) and a 4-lane one, blend the
// same list of pixels: alpha = 0 must give the background exactly, and
// random triples must give the ones count predicted by the arithmetic model
// of the bit-streams. The latency must be 256 / PAR clock edges, results
// must hold under back-pressure, and the mean distance to the exact
// bg*(1-alpha) + fg*alpha must stay below one LSB.
module tb_sc_scene_merge;
  import tb_ref_pkg::*;

  localparam int NV = 48;
  localparam int NDUT = 2;
  localparam int PARS [NDUT] = '{1, 4};

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  int vec [NV][3];      // bg, fg, alpha
  int expect_cnt [NV];
  int exact_x256 [NV];
  int checks [NDUT];
  int failures [NDUT];
  int err_sum [NDUT];
  int stalls [NDUT];
  bit done [NDUT];

  initial begin
    for (int i = 0; i < NV; i++) begin
      for (int k = 0; k < 3; k++) vec[i][k] = int'($urandom % 256);
      if (i == 0) vec[i] = '{123, 45, 0};
      if (i == 1) vec[i] = '{0, 255, 255};
      if (i == 2) vec[i] = '{255, 0, 128};
      if (i == 3) vec[i] = '{77, 77, 200};
      expect_cnt[i] = merge_count(vec[i][0], vec[i][1], vec[i][2], 8, 1, 8);
      exact_x256[i] = vec[i][0] * (256 - vec[i][2]) + vec[i][1] * vec[i][2];
    end
  end

  for (genvar g = 0; g < NDUT; g++) begin : g_dut
    localparam int P = PARS[g];
    logic       in_valid = 1'b0;
    logic       in_ready;
    logic [7:0] bg = '0, fg = '0, alpha = '0;
    logic       out_valid;
    logic       out_ready = 1'b0;
    logic [7:0] out_pix;

    sc_scene_merge #(.PAR(P)) dut (
      .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .in_ready(in_ready),
      .bg(bg), .fg(fg), .alpha(alpha), .out_valid(out_valid),
      .out_ready(out_ready), .out_pix(out_pix));

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
        bg = 8'(vec[i][0]);
        fg = 8'(vec[i][1]);
        alpha = 8'(vec[i][2]);
        in_valid = 1'b1;
        while (!in_ready) @(negedge clk);
        @(posedge clk);
        #1 in_valid = 1'b0;
        bg = '1; fg = '1; alpha = 8'h80;
        lat = 0;
        do begin
          @(posedge clk);
          #1 lat++;
        end while (!out_valid && lat < 1000);
        chk(lat == 256 / P, $sformatf("vec %0d latency %0d", i, lat));
        chk(int'(out_pix) == expect_cnt[i],
            $sformatf("vec %0d out %0d expected %0d", i, out_pix, expect_cnt[i]));
        if (i == 0) chk(out_pix == 8'd123, "alpha = 0 must return the background");
        err_sum[g] += (int'(out_pix) * 256 > exact_x256[i]) ? int'(out_pix) * 256 - exact_x256[i]
                                                            : exact_x256[i] - int'(out_pix) * 256;
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
      chk(err_sum[g] / NV < 256, $sformatf("mean error %0d/256 LSB", err_sum[g] / NV));
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
    repeat (48 * 300 + 2000) @(posedge clk);
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks[0] + checks[1], failures[0] + failures[1] + 1);
    $finish;
  end

endmodule
