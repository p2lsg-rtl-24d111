// tb_workload_image_par4 -- the two image workloads at their full published
// image size, run on the P2LSG SC top with four lanes per clock (8-bit
// data, 256-bit streams, PAR = 4).
//
// Scaling: a 107 x 104 source image is enlarged 2x to 214 x 208 (44,512
// output pixels), the size of the portrait used in the published scaling
// experiment. The source is generated here from a formula (a diagonal
// gradient with a coarse checkerboard of +64 steps), since no picture file
// is used. Each output pixel takes its four neighbours, clamped at the
// right and bottom border, with u, v in {0, 128}.
//
// Merging runs at the same time on the second engine, over a 214 x 208
// frame: a gradient background, a mirrored gradient foreground and an alpha
// map that is opaque inside a disc, transparent outside a ring around it and
// ramps linearly in the ring. The frame size of the published video is not
// given, so this size is this test's own choice.
//
// Both engines are fed back to back and drained with out_ready held high,
// so the test measures throughput: every accept must come exactly
// 256 / PAR + 2 cycles (258 at PAR = 1) after the previous one. Every
// result is compared with the ones count of the arithmetic bit-stream
// model, and the PSNR of both output images against exact real arithmetic
// must exceed 40 dB. About 2.9 million clock cycles are simulated.
module tb_workload_image_par4;
  import tb_ref_pkg::*;

  localparam int SW = 107, SH = 104;       // source image
  localparam int DW = 2 * SW, DH = 2 * SH; // scaled image and merge frame
  localparam int NPIX = DW * DH;
  localparam int P = 4;                    // lanes of the top
  localparam int PERIOD = 256 / P + 2;     // cycles per pixel

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic             scale_in_valid = 1'b0, scale_in_ready;
  logic [3:0][7:0]  scale_pix = '0;
  logic [7:0]       scale_u = '0, scale_v = '0;
  logic             scale_out_valid;
  logic [7:0]       scale_out_pix;
  logic             merge_in_valid = 1'b0, merge_in_ready;
  logic [7:0]       merge_bg = '0, merge_fg = '0, merge_alpha = '0;
  logic             merge_out_valid;
  logic [7:0]       merge_out_pix;

  p2lsg_sc_top #(.PAR(P)) dut (
    .clk(clk), .rst_n(rst_n),
    .scale_in_valid(scale_in_valid), .scale_in_ready(scale_in_ready),
    .scale_pix(scale_pix), .scale_u(scale_u), .scale_v(scale_v),
    .scale_out_valid(scale_out_valid), .scale_out_ready(1'b1),
    .scale_out_pix(scale_out_pix),
    .merge_in_valid(merge_in_valid), .merge_in_ready(merge_in_ready),
    .merge_bg(merge_bg), .merge_fg(merge_fg), .merge_alpha(merge_alpha),
    .merge_out_valid(merge_out_valid), .merge_out_ready(1'b1),
    .merge_out_pix(merge_out_pix));

  int checks = 0;
  int failures = 0;
  int fail_prints = 0;
  int cycle = 0;

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (fail_prints < 20) $display("FAIL %s", what);
      fail_prints++;
    end
  endtask

  always @(posedge clk) cycle <= cycle + 1;

  // ---- image content ------------------------------------------------------
  function automatic int src_pix(int x, int y);
    return (2 * x + y + ((((x / 16) + (y / 16)) % 2) * 64)) % 256;
  endfunction

  function automatic int mg_bg(int x, int y);
    return (x + y) % 256;
  endfunction

  function automatic int mg_fg(int x, int y);
    return 255 - ((x + 2 * y) % 256);
  endfunction

  function automatic int mg_alpha(int x, int y);
    int dx, dy, d2, r_in2, r_out2;
    dx = x - DW / 2;
    dy = y - DH / 2;
    d2 = dx * dx + dy * dy;
    r_in2 = 60 * 60;
    r_out2 = 80 * 80;
    if (d2 <= r_in2) return 255;
    if (d2 >= r_out2) return 0;
    return ((r_out2 - d2) * 255) / (r_out2 - r_in2);
  endfunction

  // inputs of output pixel i: I11, I12, I21, I22, u, v
  function automatic void scale_inputs(int i, output int p [6]);
    int ox, oy, x1, y1, x2, y2;
    ox = i % DW; oy = i / DW;
    x1 = ox / 2; y1 = oy / 2;
    x2 = (x1 + 1 < SW) ? x1 + 1 : x1;
    y2 = (y1 + 1 < SH) ? y1 + 1 : y1;
    p = '{src_pix(x1, y1), src_pix(x1, y2), src_pix(x2, y1), src_pix(x2, y2),
          (ox % 2) * 128, (oy % 2) * 128};
  endfunction

  // ---- drivers: back to back, data changed right after each accept --------
  int s_acc_prev = -1, m_acc_prev = -1;
  int s_first_acc = -1, s_last_out = -1;

  initial begin
    int p [6];
    wait (rst_n);
    for (int i = 0; i < NPIX; i++) begin
      @(negedge clk);
      scale_inputs(i, p);
      scale_pix = {8'(p[3]), 8'(p[2]), 8'(p[1]), 8'(p[0])};
      scale_u = 8'(p[4]);
      scale_v = 8'(p[5]);
      scale_in_valid = 1'b1;
      while (!scale_in_ready) @(negedge clk);
      @(posedge clk);
      #1;
      if (s_acc_prev >= 0)
        chk(cycle - s_acc_prev == PERIOD,
            $sformatf("scale accept %0d after %0d cycles", i, cycle - s_acc_prev));
      else
        s_first_acc = cycle;
      s_acc_prev = cycle;
      scale_in_valid = 1'b0;
    end
  end

  initial begin
    wait (rst_n);
    for (int i = 0; i < NPIX; i++) begin
      int x, y;
      @(negedge clk);
      x = i % DW; y = i / DW;
      merge_bg = 8'(mg_bg(x, y));
      merge_fg = 8'(mg_fg(x, y));
      merge_alpha = 8'(mg_alpha(x, y));
      merge_in_valid = 1'b1;
      while (!merge_in_ready) @(negedge clk);
      @(posedge clk);
      #1;
      if (m_acc_prev >= 0)
        chk(cycle - m_acc_prev == PERIOD,
            $sformatf("merge accept %0d after %0d cycles", i, cycle - m_acc_prev));
      m_acc_prev = cycle;
      merge_in_valid = 1'b0;
    end
  end

  // ---- monitors ------------------------------------------------------------
  int s_out_n = 0, m_out_n = 0;
  real s_sq = 0.0, m_sq = 0.0;
  int n_half = 0, n_alpha0 = 0, n_alpha1 = 0, n_ramp = 0;

  always @(posedge clk) if (rst_n) begin
    if (scale_out_valid) begin
      int p [6];
      int e;
      scale_inputs(s_out_n, p);
      chk(int'(scale_out_pix) == bilinear_count(p[0], p[1], p[2], p[3], p[4], p[5],
                                                8, 1, 8, 6),
          $sformatf("scale pixel %0d got %0d", s_out_n, scale_out_pix));
      e = int'(scale_out_pix) * 65536
        - ((256 - p[4]) * (256 - p[5]) * p[0] + (256 - p[4]) * p[5] * p[1]
         + p[4] * (256 - p[5]) * p[2] + p[4] * p[5] * p[3]);
      s_sq += (real'(e) / 65536.0) ** 2;
      if (p[4] != 0 || p[5] != 0) n_half++;
      s_out_n++;
      s_last_out = cycle;
    end
    if (merge_out_valid) begin
      int x, y, bg, fg, al, e;
      x = m_out_n % DW; y = m_out_n / DW;
      bg = mg_bg(x, y); fg = mg_fg(x, y); al = mg_alpha(x, y);
      chk(int'(merge_out_pix) == merge_count(bg, fg, al, 8, 1, 8),
          $sformatf("merge pixel %0d got %0d", m_out_n, merge_out_pix));
      e = int'(merge_out_pix) * 256 - (bg * (256 - al) + fg * al);
      m_sq += (real'(e) / 256.0) ** 2;
      if (al == 0) n_alpha0++;
      else if (al == 255) n_alpha1++;
      else n_ramp++;
      m_out_n++;
    end
  end

  function automatic real psnr(real sq, int n);
    if (sq == 0.0) return 99.0;
    return 10.0 * $log10(255.0 * 255.0 / (sq / real'(n)));
  endfunction

  initial begin
    real ps, pm;
    repeat (4) @(posedge clk);
    rst_n = 1'b1;
    wait (s_out_n == NPIX && m_out_n == NPIX);
    repeat (2) @(posedge clk);
    ps = psnr(s_sq, NPIX);
    pm = psnr(m_sq, NPIX);
    $display("scaling %0dx%0d -> %0dx%0d: %0d pixels in %0d cycles, PSNR %0.2f dB",
             SW, SH, DW, DH, s_out_n, s_last_out - s_first_acc + 1, ps);
    $display("merging %0dx%0d: %0d pixels, PSNR %0.2f dB (opaque %0d, transparent %0d, ramp %0d)",
             DW, DH, m_out_n, pm, n_alpha1, n_alpha0, n_ramp);
    chk(ps > 40.0, $sformatf("scaling PSNR %0.2f dB", ps));
    chk(pm > 40.0, $sformatf("merging PSNR %0.2f dB", pm));
    chk(n_half > 0 && n_alpha0 > 0 && n_alpha1 > 0 && n_ramp > 0, "content reaches every case");
    chk(s_last_out - s_first_acc + 1 == (NPIX - 1) * PERIOD + 256 / P + 1,
        $sformatf("scaling run took %0d cycles", s_last_out - s_first_acc + 1));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // watchdog
  initial begin
    repeat (NPIX * PERIOD + 1000) @(posedge clk);
    failures++;
    $display("FAIL watchdog: scaled %0d, merged %0d of %0d", s_out_n, m_out_n, NPIX);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
