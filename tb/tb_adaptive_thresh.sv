// tb_adaptive_thresh -- self-checking test of the adaptive binarisation.
// Frame geometry 64 x 48 with 16 x 16 squares (4 x 3 thresholds). Streams four frames:
// the first must give an all-zero mask (no thresholds yet); each later frame is compared
// pixel by pixel with the reference computed from the previous frame's square thresholds.
// The frames combine a brightness gradient, dark rectangles and noise, so thresholds
// differ from square to square and the interpolation is exercised. Idle cycles are
// inserted in the last frame.
module tb_adaptive_thresh;
  import vision_ref_pkg::*;
  localparam int W = 64, H = 48, BLK = 16, OFF = 8;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_sof = 0, in_eol = 0;
  logic [7:0] in_pix = '0;
  logic out_valid, out_sof, out_eol, out_bin;
  int checks = 0, failures = 0;
  int img[], prev_img[], thr[], exp_img[];
  int n_out, n_ones;
  bit first;

  adaptive_thresh #(.WIDTH(W), .HEIGHT(H), .BLK(BLK), .OFFSET(OFF)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    if (rst_n && out_valid) begin
      int e;
      e = first ? 0 : exp_img[n_out];
      checks++;
      if (n_out >= W * H || int'(out_bin) != e || out_sof != (n_out == 0)) begin
        failures++;
        if (failures < 10) $display("FAIL pixel %0d: got %0d want %0d", n_out, out_bin, e);
      end
      n_ones += int'(out_bin);
      n_out++;
    end
  end

  task automatic frame(bit gaps, int seed);
    img = new[W * H];
    for (int y = 0; y < H; y++)
      for (int x = 0; x < W; x++) begin
        int v = 40 + 2 * x + y + (($urandom % 21) - 10) + seed;
        if (x > 10 + seed && x < 30 + seed && y > 8 && y < 30) v -= 35;   // dark patch
        if (x > 40 && y > 20 && y < 26) v -= 30;
        img[y * W + x] = clampi(v, 0, 255);
      end
    if (!first) begin
      ref_block_thr(prev_img, W, H, BLK, OFF, thr);
      ref_thresh(img, thr, W, H, BLK, exp_img);
    end
    n_out = 0; n_ones = 0;
    for (int i = 0; i < W * H; i++) begin
      @(negedge clk);
      in_valid = 1; in_pix = 8'(img[i]); in_sof = (i == 0); in_eol = (i % W == W - 1);
      if (gaps && ($urandom % 3 == 0)) begin
        @(negedge clk); in_valid = 0;
      end
    end
    @(negedge clk); in_valid = 0; in_sof = 0; in_eol = 0;
    repeat (3) @(negedge clk);
    checks++;
    if (n_out != W * H) begin failures++; $display("FAIL frame produced %0d pixels", n_out); end
    if (!first) begin
      checks++;
      if (n_ones == 0) begin failures++; $display("FAIL no object pixels"); end
    end
    $display("frame: %0d object pixels", n_ones);
    prev_img = img;
    first = 0;
  endtask

  initial begin
    first = 1;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    frame(0, 0);
    frame(0, 3);
    frame(0, 6);
    frame(1, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
