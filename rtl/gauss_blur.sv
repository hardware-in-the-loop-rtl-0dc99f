// gauss_blur -- 3x3 Gaussian low-pass filter on an 8-bit grey video stream.
//
// Kernel (sum 16):   1 2 1
//                    2 4 2
//                    1 2 1
// The result is rounded to nearest: (sum + 8) >> 4.
//
// How it works: two line buffers of WIDTH pixels hold the two previous lines. For every
// incoming pixel (x, y) the column {line y-2, line y-1, line y} at x is formed from the
// buffers and the pixel itself, and two column registers keep the columns at x-1 and x-2.
// The 3x3 window therefore covers columns x-2..x and lines y-2..y, and its centre is
// (x-1, y-1): the filtered picture is the input picture shifted by one pixel right and one
// line down, which keeps the stream timing untouched (no extra lines are produced after
// the last input line). Window taps that fall above line 0 or left of column 0 take the
// value of line 0 / column 0 (edge replication), so output (0, 0) equals input (0, 0).
//
// The paper names only "low-pass filtering with a Gauss kernel"; the 3x3 size, the
// weights, the rounding, the one-pixel shift and the edge rule are this design's choices.
//
// Interface: valid/sof/eol grey stream in, same stream out one clock later. No
// back-pressure. WIDTH must match the line length of the stream.
module gauss_blur
  import vision_pkg::*;
#(
  parameter int unsigned WIDTH  = 1280,
  parameter int unsigned HEIGHT = 720
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       in_valid,
  input  logic       in_sof,
  input  logic       in_eol,
  input  logic [7:0] in_pix,
  output logic       out_valid,
  output logic       out_sof,
  output logic       out_eol,
  output logic [7:0] out_pix
);

  logic [7:0] lb1 [WIDTH];  // line y-1
  logic [7:0] lb2 [WIDTH];  // line y-2
  coord_t     x, y;
  logic       last_px;

  pix_counter #(.WIDTH(WIDTH), .HEIGHT(HEIGHT)) u_cnt (
    .clk, .rst_n, .valid(in_valid), .sof(in_sof), .x, .y, .last_px
  );

  logic [7:0] a1, a2;
  logic [7:0] cur [3];
  logic [7:0] s1 [3];   // column x-1
  logic [7:0] s2 [3];   // column x-2
  logic [7:0] cm1 [3];
  logic [7:0] cm2 [3];
  logic [11:0] sum;

  always_comb begin
    a1 = lb1[x[$clog2(WIDTH)-1:0]];
    a2 = lb2[x[$clog2(WIDTH)-1:0]];
    cur[2] = in_pix;
    cur[1] = (y == 0) ? in_pix : a1;
    cur[0] = (y == 0) ? in_pix : ((y == 1) ? a1 : a2);
    for (int r = 0; r < 3; r++) begin
      cm1[r] = (x == 0) ? cur[r] : s1[r];
      cm2[r] = (x == 0) ? cur[r] : ((x == 1) ? s1[r] : s2[r]);
    end
    sum = 12'(cm2[0]) + 12'(cm1[0]) * 2 + 12'(cur[0])
        + 12'(cm2[1]) * 2 + 12'(cm1[1]) * 4 + 12'(cur[1]) * 2
        + 12'(cm2[2]) + 12'(cm1[2]) * 2 + 12'(cur[2]);
  end

  // Line buffers: plain arrays, read asynchronously at the present column.
  always_ff @(posedge clk) begin
    if (in_valid) begin
      lb1[x[$clog2(WIDTH)-1:0]] <= in_pix;
      lb2[x[$clog2(WIDTH)-1:0]] <= a1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_sof   <= 1'b0;
      out_eol   <= 1'b0;
      out_pix   <= '0;
      for (int r = 0; r < 3; r++) begin
        s1[r] <= '0;
        s2[r] <= '0;
      end
    end else begin
      out_valid <= in_valid;
      out_sof   <= in_valid & in_sof;
      out_eol   <= in_valid & in_eol;
      if (in_valid) begin
        out_pix <= 8'((sum + 12'd8) >> 4);
        for (int r = 0; r < 3; r++) begin
          s1[r] <= cur[r];
          s2[r] <= cm1[r];
        end
      end
    end
  end

  // Stream framing: the last pixel of a frame also ends its line.
  a_last_eol: assert property (@(posedge clk) disable iff (!rst_n)
                               in_valid && last_px |-> in_eol);

  initial begin
    assert (WIDTH >= 2 && HEIGHT >= 2) else $error("gauss_blur: frame too small");
  end
endmodule
