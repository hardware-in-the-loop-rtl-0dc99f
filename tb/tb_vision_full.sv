// tb_vision_full -- the detector at its default size: 1280 x 720 frames.
//
// Streams two synthetic camera frames with a landing marker (outer ring radius 250
// pixels, off centre) through vision_top with all parameters at their defaults. The first
// frame after reset must give an empty mask and no objects; the second is thresholded
// with the first frame's squares and must give exactly the reference mask and objects
// (area, box, centroid), among them the ring, centred on the marker. With 16 x 16 squares
// the inside of a dark area wider than a square is not darker than its own square's mean,
// so the thick ring and the square come out as outlines (outer and inner edge).
// The clock count from the last pixel to frame_done (the resolution time, which must fit
// in the 30 lines of vertical blanking of a 720p60 stream, 49500 pixel clocks) is checked.
module tb_vision_full;
  import vision_pkg::*;
  import vision_ref_pkg::*;
  localparam int W = 1280, H = 720, BLK = 16, OFF = 8;
  localparam int BLANK_CLOCKS = 30 * 1650;
  logic clk = 0, rst_n = 0;
  logic vid_valid = 0, vid_sof = 0, vid_eol = 0;
  logic [23:0] vid_rgb = '0;
  logic mask_valid, mask_sof, mask_eol, mask_bin;
  logic obj_valid, obj_ready = 1, frame_done, lab_overflow, eq_overflow, frame_dropped, ccl_busy;
  obj_t obj;
  logic [15:0] obj_count;
  int checks = 0, failures = 0;

  vision_top dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (5000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int rgb[], blur[], prev_blur[], bin[];
  obj_t exp[$], got[$];
  int n_mask, mask_err, n_done, cyc, t_last;
  bit check_mask;

  always @(posedge clk) begin
    cyc++;
    if (rst_n) begin
      if (mask_valid && check_mask) begin
        if (n_mask < W * H && int'(mask_bin) != bin[n_mask]) mask_err++;
        n_mask++;
      end
      if (obj_valid && obj_ready) got.push_back(obj);
      if (frame_done) n_done++;
    end
  end

  task automatic frame(bit thr_valid, string name);
    int d0 = n_done;
    make_scene(W, H, 700, 380, 250, 2, rgb);
    ref_pipeline(rgb, prev_blur, thr_valid, W, H, BLK, OFF, blur, bin);
    ref_ccl(bin, W, H, exp);
    got = {}; n_mask = 0; mask_err = 0; check_mask = 1;
    for (int i = 0; i < W * H; i++) begin
      @(negedge clk);
      vid_valid = 1; vid_rgb = 24'(rgb[i]); vid_sof = (i == 0); vid_eol = (i % W == W - 1);
    end
    @(negedge clk); vid_valid = 0; vid_sof = 0; vid_eol = 0;
    t_last = cyc;
    wait (n_done > d0);
    $display("%s: resolved %0d clocks after the last pixel", name, cyc - t_last);
    checks++;
    if (cyc - t_last > BLANK_CLOCKS) begin
      failures++;
      $display("FAIL %s: resolution longer than the vertical blanking", name);
    end
    @(negedge clk);
    check_mask = 0;
    checks++;
    if (mask_err != 0 || n_mask != W * H) begin
      failures++;
      $display("FAIL %s: %0d mask errors, %0d mask pixels", name, mask_err, n_mask);
    end
    checks++;
    if (got.size() != exp.size() || lab_overflow || eq_overflow) begin
      failures++;
      $display("FAIL %s: %0d records, expected %0d", name, got.size(), exp.size());
    end
    for (int i = 0; i < exp.size() && i < got.size(); i++) begin
      checks++;
      if (got[i] != exp[i]) begin failures++; $display("FAIL %s record %0d", name, i); end
    end
    $display("%s: %0d objects", name, got.size());
    foreach (got[i])
      $display("  area %0d box x %0d..%0d y %0d..%0d centroid (%0d, %0d)", got[i].area,
               got[i].xmin, got[i].xmax, got[i].ymin, got[i].ymax, got[i].cx, got[i].cy);
    prev_blur = blur;
  endtask

  initial begin
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    frame(0, "frame0");
    frame(1, "frame1");
    // the ring: one object centred on the marker, as wide as the ring
    checks++;
    begin
      bit found = 0;
      foreach (got[i])
        if (int'(got[i].xmax) - int'(got[i].xmin) >= 2 * 250 - 4 && int'(got[i].xmax) - int'(got[i].xmin) <= 2 * 250 + 4
            && int'(got[i].cx) >= 700 - 10 && int'(got[i].cx) <= 700 + 10) found = 1;
      if (!found) begin failures++; $display("FAIL ring not found"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
