// tb_vision_top -- end-to-end test of the detector at a reduced frame size (160 x 96).
//
// Streams synthetic camera frames of a landing marker through the whole pipeline and
// compares the binary mask (pixel by pixel) and the object records with a reference
// chain of grey conversion, blur, previous-frame thresholding and flood-fill labelling.
// It also makes each mechanism of the design happen and counts it:
//   - first frame after reset gives an empty mask (no thresholds yet)
//   - thresholds carried from one frame to the next
//   - label merges in the labelling stage (the ring is a U shape seen from the top)
//   - back-pressure on the object port
//   - a frame dropped because it starts while the previous frame is being resolved
//   - label-table overflow on a noise frame (small label table in this test)
// A mechanism that never happens counts as a failure.
module tb_vision_top;
  import vision_pkg::*;
  import vision_ref_pkg::*;
  localparam int W = 160, H = 96, BLK = 16, OFF = 8, ML = 64;
  logic clk = 0, rst_n = 0;
  logic vid_valid = 0, vid_sof = 0, vid_eol = 0;
  logic [23:0] vid_rgb = '0;
  logic mask_valid, mask_sof, mask_eol, mask_bin;
  logic obj_valid, obj_ready = 1, frame_done, lab_overflow, eq_overflow, frame_dropped, ccl_busy;
  obj_t obj;
  logic [15:0] obj_count;
  int checks = 0, failures = 0;

  vision_top #(.WIDTH(W), .HEIGHT(H), .BLK(BLK), .OFFSET(OFF), .MAX_LABELS(ML)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int rgb[], blur[], prev_blur[], bin[];
  obj_t exp[$], got[$];
  int n_mask, mask_err, n_done, n_drop, n_merge, n_stall, n_empty_first, n_carry, n_lab_ovf;
  bit check_mask, rand_ready;

  always @(posedge clk) begin
    if (rst_n) begin
      if (mask_valid && check_mask) begin
        if (n_mask < W * H && int'(mask_bin) != bin[n_mask]) mask_err++;
        n_mask++;
      end
      if (obj_valid && obj_ready) got.push_back(obj);
      if (obj_valid && !obj_ready) n_stall++;
      if (frame_done) n_done++;
      if (frame_dropped) n_drop++;
      if (dut.u_ccl.push && dut.u_ccl.state == 0) n_merge++;
    end
    obj_ready <= rand_ready ? (($urandom % 4) != 0) : 1'b1;
  end

  task automatic send(input int img[], input bit gaps);
    for (int i = 0; i < W * H; i++) begin
      @(negedge clk);
      vid_valid = 1; vid_rgb = 24'(img[i]); vid_sof = (i == 0); vid_eol = (i % W == W - 1);
      if (gaps && ($urandom % 8 == 0)) begin @(negedge clk); vid_valid = 0; end
    end
    @(negedge clk); vid_valid = 0; vid_sof = 0; vid_eol = 0;
  endtask

  task automatic frame(int cx, int cy, int r, int noise, bit thr_valid, bit cmp_obj, string name);
    int d0 = n_done;
    make_scene(W, H, cx, cy, r, noise, rgb);
    ref_pipeline(rgb, prev_blur, thr_valid, W, H, BLK, OFF, blur, bin);
    ref_ccl(bin, W, H, exp);
    got = {}; n_mask = 0; mask_err = 0; check_mask = 1;
    send(rgb, 1);
    wait (n_done > d0);
    @(negedge clk);
    check_mask = 0;
    checks++;
    if (mask_err != 0 || n_mask != W * H) begin
      failures++;
      $display("FAIL %s: %0d mask errors, %0d mask pixels", name, mask_err, n_mask);
    end
    if (cmp_obj) checks++;
    if (cmp_obj && (got.size() != exp.size() || obj_count != 16'(exp.size()))) begin
      failures++;
      $display("FAIL %s: %0d records, expected %0d", name, got.size(), exp.size());
    end
    for (int i = 0; cmp_obj && i < exp.size() && i < got.size(); i++) begin
      checks++;
      if (got[i] != exp[i]) begin failures++; $display("FAIL %s record %0d", name, i); end
    end
    if (!thr_valid && exp.size() == 0 && got.size() == 0) n_empty_first++;
    if (thr_valid && exp.size() > 0) n_carry++;
    if (lab_overflow) n_lab_ovf++;
    $display("%s: %0d objects", name, got.size());
    if (cmp_obj) foreach (got[i])
      $display("  area %0d box x %0d..%0d y %0d..%0d centroid (%0d, %0d)", got[i].area,
               got[i].xmin, got[i].xmax, got[i].ymin, got[i].ymax, got[i].cx, got[i].cy);
    prev_blur = blur;
  endtask

  initial begin
    int d0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    frame(80, 48, 40, 2, 0, 1, "frame0");
    frame(80, 48, 40, 2, 1, 1, "frame1");
    rand_ready = 1;
    frame(70, 50, 36, 2, 1, 1, "frame2 (back-pressure)");
    // dropped frame: frame B follows frame A with no blanking, so it reaches the
    // labelling stage while A is being resolved. A is reported, B is dropped there; the
    // thresholding stage still sees B, so B's squares give the next thresholds.
    begin
      int rgb_a[], rgb_b[], blur_a[], blur_b[], bin_b[];
      rand_ready = 0;
      make_scene(W, H, 80, 48, 40, 2, rgb_a);
      make_scene(W, H, 82, 47, 40, 2, rgb_b);
      ref_pipeline(rgb_a, prev_blur, 1, W, H, BLK, OFF, blur_a, bin);
      ref_ccl(bin, W, H, exp);
      ref_pipeline(rgb_b, blur_a, 1, W, H, BLK, OFF, blur_b, bin_b);
      got = {};
      d0 = n_drop;
      send(rgb_a, 0);
      send(rgb_b, 0);
      repeat (5) @(negedge clk);   // let the pipeline drain
      wait (!ccl_busy);
      @(negedge clk);
      checks++;
      if (n_drop != d0 + 1) begin failures++; $display("FAIL %0d frames dropped", n_drop - d0); end
      checks++;
      if (got.size() != exp.size()) begin
        failures++;
        $display("FAIL frame before the dropped one: %0d records, expected %0d", got.size(), exp.size());
      end
      for (int i = 0; i < exp.size() && i < got.size(); i++) begin
        checks++;
        if (got[i] != exp[i]) begin failures++; $display("FAIL record %0d before drop", i); end
      end
      prev_blur = blur_b;
    end
    frame(84, 46, 40, 2, 1, 1, "frame5");
    // noise frame: many small objects overflow the 63-label table; only the mask and the
    // overflow flag are checked
    frame(80, 48, 40, 60, 1, 0, "frame6 (noise)");
    checks++;
    if (!lab_overflow) begin failures++; $display("FAIL noise frame did not overflow"); end

    $display("mechanisms: empty-first=%0d carried-thresholds=%0d merges=%0d stalls=%0d drops=%0d label-overflows=%0d",
             n_empty_first, n_carry, n_merge, n_stall, n_drop, n_lab_ovf);
    checks++; if (n_empty_first == 0) begin failures++; $display("FAIL first frame not empty"); end
    checks++; if (n_carry == 0) begin failures++; $display("FAIL no thresholded frame"); end
    checks++; if (n_merge == 0) begin failures++; $display("FAIL no label merge"); end
    checks++; if (n_stall == 0) begin failures++; $display("FAIL no back-pressure"); end
    checks++; if (n_drop == 0) begin failures++; $display("FAIL no dropped frame"); end
    checks++; if (n_lab_ovf == 0) begin failures++; $display("FAIL no label overflow"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
