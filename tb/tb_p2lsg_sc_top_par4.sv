// tb_p2lsg_sc_top_par4 -- end-to-end test of the P2LSG SC top in its 4x
// parallel configuration (8-bit data, 256-bit streams, PAR = 4, 64 cycles
// per pixel).
//
// Two complete operations run at the same time: a 2x bilinear upscaling of
// a random 4x4 image to 8x8 (u, v in {0, 128}, clamped at the border) on the
// interpolator, and the merging of a random 8x8 foreground into an 8x8
// background through an alpha map (with fully transparent and opaque
// pixels) on the scene merger. Inputs arrive with random gaps and the
// outputs are drained with random back-pressure. Each result is checked
// against the ones count of the arithmetic bit-stream model and the
// accept-to-valid latency against 256 / PAR edges. The test also counts the
// mechanisms it must reach: input stalls, output stalls, both engines busy
// together, half-pixel offsets and alpha extremes. The PSNR of both outputs
// against exact real arithmetic is reported and must exceed 40 dB.
module tb_p2lsg_sc_top_par4;
  import tb_ref_pkg::*;

  localparam int P = 4;
  localparam int SRC = 4;
  localparam int DST = 2 * SRC;
  localparam int NPIX = DST * DST;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic             scale_in_valid = 1'b0, scale_in_ready;
  logic [3:0][7:0]  scale_pix = '0;
  logic [7:0]       scale_u = '0, scale_v = '0;
  logic             scale_out_valid, scale_out_ready = 1'b0;
  logic [7:0]       scale_out_pix;
  logic             merge_in_valid = 1'b0, merge_in_ready;
  logic [7:0]       merge_bg = '0, merge_fg = '0, merge_alpha = '0;
  logic             merge_out_valid, merge_out_ready = 1'b0;
  logic [7:0]       merge_out_pix;

  p2lsg_sc_top #(.PAR(P)) dut (
    .clk(clk), .rst_n(rst_n),
    .scale_in_valid(scale_in_valid), .scale_in_ready(scale_in_ready),
    .scale_pix(scale_pix), .scale_u(scale_u), .scale_v(scale_v),
    .scale_out_valid(scale_out_valid), .scale_out_ready(scale_out_ready),
    .scale_out_pix(scale_out_pix),
    .merge_in_valid(merge_in_valid), .merge_in_ready(merge_in_ready),
    .merge_bg(merge_bg), .merge_fg(merge_fg), .merge_alpha(merge_alpha),
    .merge_out_valid(merge_out_valid), .merge_out_ready(merge_out_ready),
    .merge_out_pix(merge_out_pix));

  int checks = 0;
  int failures = 0;
  int cycle = 0;

  int src [SRC][SRC];
  int s_in [NPIX][6];       // I11, I12, I21, I22, u, v per output pixel
  int s_exp [NPIX];
  int m_in [NPIX][3];       // bg, fg, alpha
  int m_exp [NPIX];
  int s_acc_cycle [NPIX];
  int m_acc_cycle [NPIX];
  int s_out_n = 0, m_out_n = 0;
  int s_err = 0, m_err = 0;
  real s_sq = 0.0, m_sq = 0.0;  // squared error in LSB^2, for PSNR

  // mechanism counters
  int n_in_stall_s = 0, n_in_stall_m = 0;
  int n_out_stall_s = 0, n_out_stall_m = 0;
  int n_both_busy = 0, n_half = 0, n_alpha0 = 0, n_alpha1 = 0;

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  always @(posedge clk) cycle <= cycle + 1;

  // build both operations
  initial begin
    for (int y = 0; y < SRC; y++)
      for (int x = 0; x < SRC; x++) src[y][x] = int'($urandom % 256);
    for (int oy = 0; oy < DST; oy++)
      for (int ox = 0; ox < DST; ox++) begin
        int i, x1, y1, x2, y2;
        i  = oy * DST + ox;
        x1 = ox / 2; y1 = oy / 2;
        x2 = (x1 + 1 < SRC) ? x1 + 1 : x1;
        y2 = (y1 + 1 < SRC) ? y1 + 1 : y1;
        s_in[i] = '{src[y1][x1], src[y2][x1], src[y1][x2], src[y2][x2],
                    (ox % 2) * 128, (oy % 2) * 128};
        if (s_in[i][4] == 128 || s_in[i][5] == 128) n_half++;
        s_exp[i] = bilinear_count(s_in[i][0], s_in[i][1], s_in[i][2], s_in[i][3],
                                  s_in[i][4], s_in[i][5], 8, 1, 8, 6);
        m_in[i] = '{int'($urandom % 256), int'($urandom % 256),
                    (i % 5 == 0) ? 0 : (i % 5 == 1) ? 255 : int'($urandom % 256)};
        if (m_in[i][2] == 0) n_alpha0++;
        if (m_in[i][2] == 255) n_alpha1++;
        m_exp[i] = merge_count(m_in[i][0], m_in[i][1], m_in[i][2], 8, 1, 8);
      end
  end

  // input drivers
  initial begin
    wait (rst_n);
    for (int i = 0; i < NPIX; i++) begin
      @(negedge clk);
      repeat ($urandom % 3) @(negedge clk);
      scale_pix = {8'(s_in[i][3]), 8'(s_in[i][2]), 8'(s_in[i][1]), 8'(s_in[i][0])};
      scale_u = 8'(s_in[i][4]);
      scale_v = 8'(s_in[i][5]);
      scale_in_valid = 1'b1;
      forever begin
        automatic bit rdy = scale_in_ready;  // sampled ahead of the edge
        @(posedge clk);
        if (rdy) break;
        n_in_stall_s++;
        @(negedge clk);
      end
      #1;
      s_acc_cycle[i] = cycle - 1;  // edge number of the accepting edge
      scale_in_valid = 1'b0;
    end
  end

  initial begin
    wait (rst_n);
    for (int i = 0; i < NPIX; i++) begin
      @(negedge clk);
      repeat ($urandom % 3) @(negedge clk);
      merge_bg = 8'(m_in[i][0]);
      merge_fg = 8'(m_in[i][1]);
      merge_alpha = 8'(m_in[i][2]);
      merge_in_valid = 1'b1;
      forever begin
        automatic bit rdy = merge_in_ready;  // sampled ahead of the edge
        @(posedge clk);
        if (rdy) break;
        n_in_stall_m++;
        @(negedge clk);
      end
      #1;
      m_acc_cycle[i] = cycle - 1;  // edge number of the accepting edge
      merge_in_valid = 1'b0;
    end
  end

  // random back-pressure
  always @(negedge clk) begin
    scale_out_ready <= ($urandom % 3) == 0;
    merge_out_ready <= ($urandom % 2) == 0;
  end

  // output monitors
  int s_valid_since = -1, m_valid_since = -1;
  always @(posedge clk) if (rst_n) begin
    if (!scale_in_ready && !merge_in_ready && !scale_out_valid && !merge_out_valid) n_both_busy++;
    if (scale_out_valid) begin
      if (s_valid_since < 0) begin
        s_valid_since = cycle;
        // out_valid rises on edge 256/P after the accepting edge and is
        // first seen by this monitor one edge later
        chk(cycle - s_acc_cycle[s_out_n] == 256 / P + 1,
            $sformatf("scale pixel %0d latency %0d", s_out_n, cycle - s_acc_cycle[s_out_n]));
      end
      if (!scale_out_ready) n_out_stall_s++;
      else begin
        int e;
        chk(int'(scale_out_pix) == s_exp[s_out_n],
            $sformatf("scale pixel %0d got %0d expected %0d", s_out_n, scale_out_pix, s_exp[s_out_n]));
        e = int'(scale_out_pix) * 65536
          - ((256 - s_in[s_out_n][4]) * (256 - s_in[s_out_n][5]) * s_in[s_out_n][0]
           + (256 - s_in[s_out_n][4]) * s_in[s_out_n][5] * s_in[s_out_n][1]
           + s_in[s_out_n][4] * (256 - s_in[s_out_n][5]) * s_in[s_out_n][2]
           + s_in[s_out_n][4] * s_in[s_out_n][5] * s_in[s_out_n][3]);
        s_err += (e < 0 ? -e : e) / 256;
        s_sq += (real'(e) / 65536.0) ** 2;
        s_out_n++;
        s_valid_since = -1;
      end
    end
    if (merge_out_valid) begin
      if (m_valid_since < 0) begin
        m_valid_since = cycle;
        // out_valid rises on edge 256/P after the accepting edge and is
        // first seen by this monitor one edge later
        chk(cycle - m_acc_cycle[m_out_n] == 256 / P + 1,
            $sformatf("merge pixel %0d latency %0d", m_out_n, cycle - m_acc_cycle[m_out_n]));
      end
      if (!merge_out_ready) n_out_stall_m++;
      else begin
        int e;
        chk(int'(merge_out_pix) == m_exp[m_out_n],
            $sformatf("merge pixel %0d got %0d expected %0d", m_out_n, merge_out_pix, m_exp[m_out_n]));
        e = int'(merge_out_pix) * 256
          - (m_in[m_out_n][0] * (256 - m_in[m_out_n][2]) + m_in[m_out_n][1] * m_in[m_out_n][2]);
        m_err += e < 0 ? -e : e;
        m_sq += (real'(e) / 256.0) ** 2;
        m_out_n++;
        m_valid_since = -1;
      end
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    wait (s_out_n == NPIX && m_out_n == NPIX);
    @(posedge clk);
    $display("scaled %0d pixels (mean |err| %0d/256 LSB), merged %0d pixels (mean |err| %0d/256 LSB) in %0d cycles",
             s_out_n, s_err / NPIX, m_out_n, m_err / NPIX, cycle);
    $display("mechanisms: input stalls %0d/%0d, output stalls %0d/%0d, both busy %0d, half-pixel offsets %0d, alpha 0/255 %0d/%0d",
             n_in_stall_s, n_in_stall_m, n_out_stall_s, n_out_stall_m, n_both_busy, n_half, n_alpha0, n_alpha1);
    // PSNR against exact real-valued arithmetic; both must stay above 40 dB
    begin
      real ps, pm;
      ps = 10.0 * $log10(255.0 * 255.0 / (s_sq / NPIX + 1e-12));
      pm = 10.0 * $log10(255.0 * 255.0 / (m_sq / NPIX + 1e-12));
      $display("PSNR against exact arithmetic: scaling %.2f dB, merging %.2f dB", ps, pm);
      chk(ps > 40.0, "scaling PSNR below 40 dB");
      chk(pm > 40.0, "merging PSNR below 40 dB");
    end
    chk(n_in_stall_s > 0, "scaler input stall never happened");
    chk(n_in_stall_m > 0, "merger input stall never happened");
    chk(n_out_stall_s > 0, "scaler output stall never happened");
    chk(n_out_stall_m > 0, "merger output stall never happened");
    chk(n_both_busy > 0, "engines never ran together");
    chk(n_half > 0, "no half-pixel offsets");
    chk(n_alpha0 > 0 && n_alpha1 > 0, "alpha extremes missing");
    chk(s_err / NPIX < 6 * 256, "scaling error too large");
    chk(m_err / NPIX < 256, "merging error too large");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (NPIX * (256 / P + 12) + 2000) @(posedge clk);
    failures++;
    $display("FAIL watchdog: %0d / %0d results", s_out_n, m_out_n);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
