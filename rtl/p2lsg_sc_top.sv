// p2lsg_sc_top -- the two SC image/video case-study engines built on P2LSG.
//
// The top holds an SC bilinear interpolator (image scaling) and an SC
// scene-merging unit (alpha blending for video). Each engine has its own
// P2LSG generator, comparators, MUX and ones counter and its own
// valid/ready pixel interface, so both can run at once. PAR sets the number
// of bits per cycle of both engines: PAR = 1 is the sequential design
// (2^W cycles per pixel), PAR = 4 the 4x parallel one (2^W / 4 cycles).
// Putting both engines under one top is this design's packaging.
//
// Ports: scale_* is the interpolator (scale_pix[0..3] = I11, I12, I21, I22,
// scale_u / scale_v the offsets), merge_* the scene merger (background,
// foreground, alpha). Each result is valid on the 2^W/PAR-th clock edge
// after its operands were accepted; each engine takes a new pixel every
// 2^W/PAR + 2 cycles at best.
module p2lsg_sc_top #(
  parameter int unsigned W   = p2lsg_pkg::DATA_W,
  parameter int unsigned PAR = 1
) (
  input  logic              clk,
  input  logic              rst_n,
  // image scaling: bilinear interpolation
  input  logic              scale_in_valid,
  output logic              scale_in_ready,
  input  logic [3:0][W-1:0] scale_pix,
  input  logic [W-1:0]      scale_u,
  input  logic [W-1:0]      scale_v,
  output logic              scale_out_valid,
  input  logic              scale_out_ready,
  output logic [W-1:0]      scale_out_pix,
  // scene merging: alpha blending
  input  logic              merge_in_valid,
  output logic              merge_in_ready,
  input  logic [W-1:0]      merge_bg,
  input  logic [W-1:0]      merge_fg,
  input  logic [W-1:0]      merge_alpha,
  output logic              merge_out_valid,
  input  logic              merge_out_ready,
  output logic [W-1:0]      merge_out_pix
);

  sc_bilinear #(.W(W), .PAR(PAR)) u_scale (
    .clk       (clk),
    .rst_n     (rst_n),
    .in_valid  (scale_in_valid),
    .in_ready  (scale_in_ready),
    .pix       (scale_pix),
    .u         (scale_u),
    .v         (scale_v),
    .out_valid (scale_out_valid),
    .out_ready (scale_out_ready),
    .out_pix   (scale_out_pix)
  );

  sc_scene_merge #(.W(W), .PAR(PAR)) u_merge (
    .clk       (clk),
    .rst_n     (rst_n),
    .in_valid  (merge_in_valid),
    .in_ready  (merge_in_ready),
    .bg        (merge_bg),
    .fg        (merge_fg),
    .alpha     (merge_alpha),
    .out_valid (merge_out_valid),
    .out_ready (merge_out_ready),
    .out_pix   (merge_out_pix)
  );

endmodule
