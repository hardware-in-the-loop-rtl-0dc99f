// tb_gauss_blur -- self-checking test of the 3x3 Gaussian filter.
// Streams three random 24 x 10 frames (the last one with random idle cycles between
// pixels) and compares every output pixel, one clock after its input, with the reference
// filter; also checks that the stream keeps one output per input (rate 1 pixel/clock).
module tb_gauss_blur;
  import vision_ref_pkg::*;
  localparam int W = 24, H = 10;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_sof = 0, in_eol = 0;
  logic [7:0] in_pix = '0;
  logic out_valid, out_sof, out_eol;
  logic [7:0] out_pix;
  int checks = 0, failures = 0;
  int img[], exp_img[];
  int n_out;

  gauss_blur #(.WIDTH(W), .HEIGHT(H)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // output monitor: compares in raster order
  always @(posedge clk) begin
    if (rst_n && out_valid) begin
      checks++;
      if (n_out >= W * H || out_pix != 8'(exp_img[n_out]) || out_sof != (n_out == 0)
          || out_eol != ((n_out % W) == W - 1)) begin
        failures++;
        $display("FAIL pixel %0d: got %0d want %0d", n_out, out_pix, exp_img[n_out]);
      end
      n_out++;
    end
  end

  task automatic frame(bit gaps, int kind);
    img = new[W * H];
    foreach (img[i]) begin
      case (kind)
        0: img[i] = $urandom & 255;
        1: img[i] = ((i % W) < W / 2) ? 20 : 230;  // vertical edge
        default: img[i] = ((i / W) % 3 == 0) ? 255 : 0;
      endcase
    end
    ref_blur(img, W, H, exp_img);
    n_out = 0;
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
    if (n_out != W * H) begin
      failures++;
      $display("FAIL frame produced %0d pixels", n_out);
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    frame(0, 0);
    frame(0, 1);
    frame(0, 2);
    frame(1, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
