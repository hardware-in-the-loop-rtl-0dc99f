// vision_top -- programmable-logic part of the landing-marker detector.
//
// A 24-bit RGB video stream (1280 x 720 at 60 frames/s, one pixel per clock, as delivered
// by an HDMI receiver) passes through four stages in a row:
//   rgb2gray -> gauss_blur -> adaptive_thresh -> ccl
// The first three stages each delay the stream by one clock and keep its timing; the
// labelling stage collects the objects of a frame and, during the vertical blanking that
// follows, hands one record per object (area, bounding box, centroid) to the processor
// side through obj_valid / obj_ready, then pulses frame_done with the object count and
// overflow flags. The processor software (shape classification, position and orientation,
// the landing controller and the serial link) is outside this module.
//
// The binary mask produced by the thresholding stage is also brought out (mask_*), so that
// a video output path can show what the detector sees.
//
// Following the paper: the order and function of the four stages and the frame format.
// Widths, stream framing, kernel, block size and table sizes are this design's choices,
// documented in each stage.
module vision_top
  import vision_pkg::*;
#(
  parameter int unsigned WIDTH      = 1280,
  parameter int unsigned HEIGHT     = 720,
  parameter int unsigned BLK        = 16,
  parameter int unsigned OFFSET     = 8,
  parameter int unsigned MAX_LABELS = 512,
  parameter int unsigned EQ_DEPTH   = 512
) (
  input  logic        clk,
  input  logic        rst_n,
  // video in
  input  logic        vid_valid,
  input  logic        vid_sof,
  input  logic        vid_eol,
  input  logic [23:0] vid_rgb,
  // binary mask out (3 clocks after the video in)
  output logic        mask_valid,
  output logic        mask_sof,
  output logic        mask_eol,
  output logic        mask_bin,
  // object records to the processor
  output logic        obj_valid,
  input  logic        obj_ready,
  output obj_t        obj,
  output logic        frame_done,
  output logic [15:0] obj_count,
  output logic        lab_overflow,
  output logic        eq_overflow,
  output logic        frame_dropped,
  output logic        ccl_busy
);
  logic       g_valid, g_sof, g_eol;
  logic [7:0] g_pix;
  logic       b_valid, b_sof, b_eol;
  logic [7:0] b_pix;

  rgb2gray u_gray (
    .clk, .rst_n,
    .in_valid(vid_valid), .in_sof(vid_sof), .in_eol(vid_eol), .in_rgb(vid_rgb),
    .out_valid(g_valid), .out_sof(g_sof), .out_eol(g_eol), .out_gray(g_pix)
  );

  gauss_blur #(.WIDTH(WIDTH), .HEIGHT(HEIGHT)) u_blur (
    .clk, .rst_n,
    .in_valid(g_valid), .in_sof(g_sof), .in_eol(g_eol), .in_pix(g_pix),
    .out_valid(b_valid), .out_sof(b_sof), .out_eol(b_eol), .out_pix(b_pix)
  );

  adaptive_thresh #(.WIDTH(WIDTH), .HEIGHT(HEIGHT), .BLK(BLK), .OFFSET(OFFSET)) u_thr (
    .clk, .rst_n,
    .in_valid(b_valid), .in_sof(b_sof), .in_eol(b_eol), .in_pix(b_pix),
    .out_valid(mask_valid), .out_sof(mask_sof), .out_eol(mask_eol), .out_bin(mask_bin)
  );

  ccl #(.WIDTH(WIDTH), .HEIGHT(HEIGHT), .MAX_LABELS(MAX_LABELS), .EQ_DEPTH(EQ_DEPTH)) u_ccl (
    .clk, .rst_n,
    .in_valid(mask_valid), .in_sof(mask_sof), .in_eol(mask_eol), .in_bin(mask_bin),
    .obj_valid, .obj_ready, .obj,
    .frame_done, .obj_count, .lab_overflow, .eq_overflow, .frame_dropped,
    .busy(ccl_busy)
  );
endmodule
