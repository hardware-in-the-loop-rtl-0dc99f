// pix_counter -- tracks the raster position of the pixel currently on a video stream.
//
// Every stage of the pipeline needs to know where in the frame the present pixel lies.
// The counter holds the position of the next expected pixel; `sof` on a valid pixel forces
// that pixel to (0, 0). The outputs are combinational and describe the pixel presented
// in this cycle, so a stage can use them in the same clock as the pixel data. After the
// last pixel of a line x wraps to 0 and y advances; after the last line y wraps to 0.
// `last_px` is high on the final pixel of the frame. Reset clears the position.
module pix_counter
  import vision_pkg::*;
#(
  parameter int unsigned WIDTH  = 1280,
  parameter int unsigned HEIGHT = 720
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   valid,
  input  logic   sof,
  output coord_t x,
  output coord_t y,
  output logic   last_px
);
  coord_t x_q, y_q;

  always_comb begin
    x = sof ? '0 : x_q;
    y = sof ? '0 : y_q;
    last_px = (x == coord_t'(WIDTH - 1)) && (y == coord_t'(HEIGHT - 1));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      x_q <= '0;
      y_q <= '0;
    end else if (valid) begin
      if (x == coord_t'(WIDTH - 1)) begin
        x_q <= '0;
        y_q <= (y == coord_t'(HEIGHT - 1)) ? '0 : y + 1'b1;
      end else begin
        x_q <= x + 1'b1;
        y_q <= y;
      end
    end
  end
endmodule
