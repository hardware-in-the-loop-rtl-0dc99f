// tb_vision_720p60 -- the detector under the real 720p60 video timing.
//
// Each frame is sent as 750 lines of 1650 pixel clocks: 1280 active pixels and 370 idle
// clocks per line, then 30 idle lines of vertical blanking, as a 74.25 MHz HDMI source
// delivers it. Four consecutive frames show the marker while the drone descends and
// drifts (the ring radius grows from 120 to 300 pixels). With all parameters at their
// defaults, every frame must be labelled (no frame dropped), its records must match the
// reference, and frame_done must come before the next frame starts.
module tb_vision_720p60;
  import vision_pkg::*;
  import vision_ref_pkg::*;
  localparam int W = 1280, H = 720, BLK = 16, OFF = 8;
  localparam int HTOTAL = 1650, VTOTAL = 750;
  localparam int NF = 4;
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
    repeat ((NF + 2) * HTOTAL * VTOTAL) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  obj_t got[$];
  int n_done, n_drop;
  always @(posedge clk) begin
    if (rst_n) begin
      if (obj_valid && obj_ready) got.push_back(obj);
      if (frame_done) n_done++;
      if (frame_dropped) n_drop++;
    end
  end

  int rgb[], blur[], prev_blur[], bin[];
  obj_t exp[$];
  int cx[NF] = '{600, 620, 650, 660};
  int cy[NF] = '{340, 350, 360, 365};
  int rr[NF] = '{120, 170, 230, 300};

  initial begin
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    for (int f = 0; f < NF; f++) begin
      int d0;
      d0 = n_done;
      make_scene(W, H, cx[f], cy[f], rr[f], 2, rgb);
      ref_pipeline(rgb, prev_blur, f > 0, W, H, BLK, OFF, blur, bin);
      ref_ccl(bin, W, H, exp);
      got = {};
      for (int ln = 0; ln < VTOTAL; ln++)
        for (int c = 0; c < HTOTAL; c++) begin
          @(negedge clk);
          if (ln < H && c < W) begin
            vid_valid = 1; vid_rgb = 24'(rgb[ln * W + c]);
            vid_sof = (ln == 0 && c == 0); vid_eol = (c == W - 1);
          end else begin
            vid_valid = 0; vid_sof = 0; vid_eol = 0;
          end
        end
      // the next frame starts now: this one must be finished
      checks++;
      if (n_done != d0 + 1 || ccl_busy) begin
        failures++;
        $display("FAIL frame %0d not resolved within its blanking (done %0d, busy %0b)", f, n_done - d0, ccl_busy);
      end
      checks++;
      if (got.size() != exp.size() || obj_count != 16'(exp.size()) || lab_overflow || eq_overflow) begin
        failures++;
        $display("FAIL frame %0d: %0d records, expected %0d", f, got.size(), exp.size());
      end
      for (int i = 0; i < exp.size() && i < got.size(); i++) begin
        checks++;
        if (got[i] != exp[i]) begin failures++; $display("FAIL frame %0d record %0d", f, i); end
      end
      $display("frame %0d: ring radius %0d, %0d objects", f, rr[f], got.size());
      prev_blur = blur;
    end
    checks++;
    if (n_drop != 0) begin failures++; $display("FAIL %0d frames dropped", n_drop); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
