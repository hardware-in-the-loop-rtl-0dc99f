// adaptive_thresh -- adaptive binarisation of a grey video stream.
//
// The frame is cut into non-overlapping BLK x BLK squares. While a frame streams in, the
// module sums the pixels of each square (one accumulator per square of the current row of
// squares) and, on the last pixel of a square, stores that square's threshold
//     T_blk = max(mean - OFFSET, 0),   mean = sum >> (2*log2(BLK))
// in a threshold memory. Every pixel is compared with its own threshold, obtained by
// bilinear interpolation between the thresholds of the four nearest square centres:
//     fx = x - BLK/2, i = fx / BLK, a = fx mod BLK   (same for y with j, b)
//     T  = ((BLK-a)(BLK-b)T[j][i] + a(BLK-b)T[j][i+1] + (BLK-a)b T[j+1][i] + ab T[j+1][i+1])
//          >> (2*log2(BLK))
// Near the frame border, where a pixel lies outside the grid of square centres, the index
// is clamped to the first/last square and the weight to zero (nearest-square threshold).
// Output bit = 1 (object) when pixel < T, i.e. the marker is dark on a light ground.
//
// The squares of the pixel being classified are not complete until later in the frame, so
// the interpolation uses the thresholds of the previous frame: the memory has two banks
// that swap at every start of frame. Until one complete frame has been seen after reset,
// no threshold exists and every output bit is 0.
//
// From the paper: block means over non-overlapping squares, a threshold derived from each
// mean, bilinear interpolation of the threshold per pixel. This design's own choices:
// BLK = 16, OFFSET, the previous-frame rule, truncating arithmetic, edge clamping and the
// polarity. WIDTH and HEIGHT must be multiples of BLK and BLK a power of two.
//
// Interface: valid/sof/eol grey stream in, valid/sof/eol 1-bit stream out one clock later.
module adaptive_thresh
  import vision_pkg::*;
#(
  parameter int unsigned WIDTH  = 1280,
  parameter int unsigned HEIGHT = 720,
  parameter int unsigned BLK    = 16,
  parameter int unsigned OFFSET = 8
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
  output logic       out_bin
);
  localparam int unsigned LB    = $clog2(BLK);
  localparam int unsigned NBX   = WIDTH / BLK;
  localparam int unsigned NBY   = HEIGHT / BLK;
  localparam int unsigned NB    = NBX * NBY;
  localparam int unsigned AW    = $clog2(NB);
  localparam int unsigned SUMW  = 8 + 2 * LB;
  localparam int unsigned BXW   = $clog2(NBX) + 1;
  localparam int unsigned BYW   = $clog2(NBY) + 1;

  logic [7:0]      thr_mem [2][NB];   // [bank][square index]
  logic [SUMW-1:0] acc [NBX];         // running sums of the present row of squares
  logic            wbank;             // bank written in this frame; the other is read
  logic            have_thr;          // previous-frame thresholds exist

  coord_t x, y;
  logic   last_px;

  pix_counter #(.WIDTH(WIDTH), .HEIGHT(HEIGHT)) u_cnt (
    .clk, .rst_n, .valid(in_valid), .sof(in_sof), .x, .y, .last_px
  );

  // ---------------- accumulation of square sums ----------------
  logic [BXW-1:0]  bx;
  logic [BYW-1:0]  by;
  logic [LB-1:0]   rx, ry;
  logic [SUMW-1:0] acc_new;
  logic [8:0]      mean_off;
  logic [7:0]      thr_new;
  logic            wbank_now;

  always_comb begin
    bx = BXW'(x >> LB);
    by = BYW'(y >> LB);
    rx = x[LB-1:0];
    ry = y[LB-1:0];
    acc_new  = ((rx == 0) && (ry == 0)) ? SUMW'(in_pix) : acc[bx[BXW-2:0]] + SUMW'(in_pix);
    mean_off = 9'(acc_new >> (2 * LB)) - 9'(OFFSET);
    thr_new  = mean_off[8] ? 8'd0 : mean_off[7:0];
    wbank_now = in_sof ? ~wbank : wbank;
  end

  always_ff @(posedge clk) begin
    if (in_valid) begin
      acc[bx[BXW-2:0]] <= acc_new;
      if ((rx == LB'(BLK - 1)) && (ry == LB'(BLK - 1)))
        thr_mem[wbank_now][AW'(by) * AW'(NBX) + AW'(bx)] <= thr_new;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wbank    <= 1'b0;
      have_thr <= 1'b0;
    end else if (in_valid) begin
      wbank <= wbank_now;
      if (last_px) have_thr <= 1'b1;
    end
  end

  // ---------------- bilinear interpolation of the threshold ----------------
  logic signed [COORD_W:0] fx, fy;
  logic [BXW-1:0] i0, i1;
  logic [BYW-1:0] j0, j1;
  logic [LB:0]    a, b;           // weights 0..BLK-1
  logic [LB:0]    wa0, wb0;       // BLK - a, BLK - b
  logic [7:0]     t00, t10, t01, t11;
  logic [8+2*LB+1:0] tsum;
  logic [7:0]     thr_px;
  logic           rbank;

  always_comb begin
    fx = $signed({1'b0, x}) - (COORD_W+1)'(BLK / 2);
    fy = $signed({1'b0, y}) - (COORD_W+1)'(BLK / 2);
    if (fx < 0) begin
      i0 = '0; a = '0;
    end else if ((fx >>> LB) >= (COORD_W+1)'(NBX - 1)) begin
      i0 = BXW'(NBX - 1); a = '0;
    end else begin
      i0 = BXW'(fx >>> LB); a = {1'b0, fx[LB-1:0]};
    end
    if (fy < 0) begin
      j0 = '0; b = '0;
    end else if ((fy >>> LB) >= (COORD_W+1)'(NBY - 1)) begin
      j0 = BYW'(NBY - 1); b = '0;
    end else begin
      j0 = BYW'(fy >>> LB); b = {1'b0, fy[LB-1:0]};
    end
    i1 = (i0 == BXW'(NBX - 1)) ? i0 : i0 + 1'b1;
    j1 = (j0 == BYW'(NBY - 1)) ? j0 : j0 + 1'b1;
    rbank = ~wbank_now;
    t00 = thr_mem[rbank][AW'(j0) * AW'(NBX) + AW'(i0)];
    t10 = thr_mem[rbank][AW'(j0) * AW'(NBX) + AW'(i1)];
    t01 = thr_mem[rbank][AW'(j1) * AW'(NBX) + AW'(i0)];
    t11 = thr_mem[rbank][AW'(j1) * AW'(NBX) + AW'(i1)];
    wa0 = (LB+1)'(BLK) - a;
    wb0 = (LB+1)'(BLK) - b;
    tsum = ($bits(tsum))'(wa0 * wb0) * ($bits(tsum))'(t00)
         + ($bits(tsum))'(a * wb0)   * ($bits(tsum))'(t10)
         + ($bits(tsum))'(wa0 * b)   * ($bits(tsum))'(t01)
         + ($bits(tsum))'(a * b)     * ($bits(tsum))'(t11);
    thr_px = 8'(tsum >> (2 * LB));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_sof   <= 1'b0;
      out_eol   <= 1'b0;
      out_bin   <= 1'b0;
    end else begin
      out_valid <= in_valid;
      out_sof   <= in_valid & in_sof;
      out_eol   <= in_valid & in_eol;
      if (in_valid) out_bin <= have_thr && (in_pix < thr_px);
    end
  end

  initial begin
    assert (WIDTH % BLK == 0 && HEIGHT % BLK == 0 && (1 << LB) == BLK)
      else $error("adaptive_thresh: WIDTH and HEIGHT must be multiples of BLK, BLK a power of two");
  end
endmodule
