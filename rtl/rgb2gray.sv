// rgb2gray -- converts a 24-bit RGB video stream to 8-bit grey, one pixel per clock.
//
// The grey level is the ITU-R BT.601 luma computed with 8-bit fixed-point weights:
//   Y = (77*R + 150*G + 29*B) >> 8
// The weights add up to 256, so pure white maps to 255. The choice of BT.601 weights is
// this design's; the paper only states that the image is converted to greyscale.
// Interface: the input stream (valid, sof, eol, rgb = {R, G, B}) is registered once;
// the output stream appears one clock later with the same framing flags.
module rgb2gray (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,
  input  logic        in_sof,
  input  logic        in_eol,
  input  logic [23:0] in_rgb,
  output logic        out_valid,
  output logic        out_sof,
  output logic        out_eol,
  output logic [7:0]  out_gray
);
  logic [7:0]  r, g, b;
  logic [15:0] acc;
  logic [7:0]  y;

  always_comb begin
    {r, g, b} = in_rgb;
    acc = 16'd77 * 16'(r) + 16'd150 * 16'(g) + 16'd29 * 16'(b);
    y   = 8'(acc >> 8);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_sof   <= 1'b0;
      out_eol   <= 1'b0;
      out_gray  <= '0;
    end else begin
      out_valid <= in_valid;
      out_sof   <= in_valid & in_sof;
      out_eol   <= in_valid & in_eol;
      if (in_valid) out_gray <= y;
    end
  end
endmodule
