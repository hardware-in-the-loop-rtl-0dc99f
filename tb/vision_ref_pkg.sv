// vision_ref_pkg -- reference models of the pipeline stages, for the testbenches.
//
// Each function recomputes, from whole-frame arrays, what one stage of the RTL must put
// out; none of them looks at the RTL. Images are flat arrays indexed y*W + x.
//   ref_gray    BT.601 luma with weights 77/150/29 over 256
//   ref_blur    3x3 Gaussian (1 2 1 / 2 4 2 / 1 2 1, rounded) centred on (x-1, y-1), taps
//               clamped into the frame
//   ref_thresh  block thresholds of the previous frame, bilinearly interpolated
//   ref_ccl     8-connected components found by flood fill, listed in raster order of
//               their first pixel, with area, bounding box and floor centroid
package vision_ref_pkg;
  import vision_pkg::*;

  function automatic int ref_gray(int rgb);
    int r, g, b;
    r = (rgb >> 16) & 255;
    g = (rgb >> 8) & 255;
    b = rgb & 255;
    return (77 * r + 150 * g + 29 * b) >> 8;
  endfunction

  function automatic int clampi(int v, int lo, int hi);
    return (v < lo) ? lo : ((v > hi) ? hi : v);
  endfunction

  function automatic void ref_blur(input int img[], input int w, input int h, ref int res[]);
    int k[3] = '{1, 2, 1};
    res = new[w * h];
    for (int y = 0; y < h; y++)
      for (int x = 0; x < w; x++) begin
        int s = 0;
        for (int dy = -1; dy <= 1; dy++)
          for (int dx = -1; dx <= 1; dx++) begin
            int xx = clampi(x - 1 + dx, 0, w - 1);
            int yy = clampi(y - 1 + dy, 0, h - 1);
            s += k[dx + 1] * k[dy + 1] * img[yy * w + xx];
          end
        res[y * w + x] = (s + 8) >> 4;
      end
  endfunction

  // Threshold of every square of a frame: max(mean - offset, 0).
  function automatic void ref_block_thr(input int img[], input int w, input int h, input int blk,
                                        input int offset, ref int thr[]);
    int nbx = w / blk, nby = h / blk;
    thr = new[nbx * nby];
    for (int j = 0; j < nby; j++)
      for (int i = 0; i < nbx; i++) begin
        int s = 0, m;
        for (int y = 0; y < blk; y++)
          for (int x = 0; x < blk; x++) s += img[(j * blk + y) * w + i * blk + x];
        m = s / (blk * blk) - offset;
        thr[j * nbx + i] = (m < 0) ? 0 : m;
      end
  endfunction

  function automatic void ref_thresh(input int img[], input int thr[], input int w, input int h,
                                     input int blk, ref int res[]);
    int nbx = w / blk, nby = h / blk;
    res = new[w * h];
    for (int y = 0; y < h; y++)
      for (int x = 0; x < w; x++) begin
        int fx = x - blk / 2, fy = y - blk / 2;
        int i0, i1, j0, j1, a, b, t;
        if (fx < 0) begin i0 = 0; a = 0; end
        else if (fx / blk >= nbx - 1) begin i0 = nbx - 1; a = 0; end
        else begin i0 = fx / blk; a = fx % blk; end
        if (fy < 0) begin j0 = 0; b = 0; end
        else if (fy / blk >= nby - 1) begin j0 = nby - 1; b = 0; end
        else begin j0 = fy / blk; b = fy % blk; end
        i1 = (i0 == nbx - 1) ? i0 : i0 + 1;
        j1 = (j0 == nby - 1) ? j0 : j0 + 1;
        t = ((blk - a) * (blk - b) * thr[j0 * nbx + i0] + a * (blk - b) * thr[j0 * nbx + i1]
           + (blk - a) * b * thr[j1 * nbx + i0] + a * b * thr[j1 * nbx + i1]) / (blk * blk);
        res[y * w + x] = (img[y * w + x] < t) ? 1 : 0;
      end
  endfunction

  function automatic void ref_ccl(input int bin[], input int w, input int h, ref obj_t objs[$]);
    int lab[];
    int stack[$];
    lab = new[w * h];
    foreach (lab[i]) lab[i] = 0;
    objs = {};
    for (int p0 = 0; p0 < w * h; p0++) begin
      if (bin[p0] != 0 && lab[p0] == 0) begin
        longint sx = 0, sy = 0;
        int area = 0, xmin = w, xmax = -1, ymin = h, ymax = -1;
        obj_t o;
        lab[p0] = 1;
        stack.push_back(p0);
        while (stack.size() > 0) begin
          int p = stack.pop_back();
          int px = p % w, py = p / w;
          area++; sx += px; sy += py;
          if (px < xmin) xmin = px;
          if (px > xmax) xmax = px;
          if (py < ymin) ymin = py;
          if (py > ymax) ymax = py;
          for (int dy = -1; dy <= 1; dy++)
            for (int dx = -1; dx <= 1; dx++) begin
              int nx = px + dx, ny = py + dy;
              if (nx >= 0 && nx < w && ny >= 0 && ny < h)
                if (bin[ny * w + nx] != 0 && lab[ny * w + nx] == 0) begin
                  lab[ny * w + nx] = 1;
                  stack.push_back(ny * w + nx);
                end
            end
        end
        o.area = area_t'(area);
        o.xmin = coord_t'(xmin); o.xmax = coord_t'(xmax);
        o.ymin = coord_t'(ymin); o.ymax = coord_t'(ymax);
        o.cx = coord_t'(sx / area); o.cy = coord_t'(sy / area);
        objs.push_back(o);
      end
    end
  endfunction
  // Synthetic camera frame: a landing marker (ring, square above the centre, rectangle
  // below it; proportions of the marker used for the tests) drawn dark on a light ground
  // with a horizontal brightness gradient and +-`noise` of random noise per channel.
  // (cx, cy) is the marker centre and r the outer ring radius, in pixels.
  function automatic void make_scene(input int w, input int h, input int cx, input int cy,
                                     input int r, input int noise, ref int rgb[]);
    rgb = new[w * h];
    for (int y = 0; y < h; y++)
      for (int x = 0; x < w; x++) begin
        int dx = x - cx, dy = y - cy;
        int d2 = dx * dx + dy * dy;
        int base = 170 + (60 * x) / w;
        bit dark;
        int c[3];
        dark = (d2 <= r * r && 100 * d2 >= 64 * r * r)                      // ring
            || (5 * dx >= -r && 5 * dx <= r && 50 * dy >= -31 * r && 50 * dy <= -11 * r)
            || (5 * dx >= -2 * r && 5 * dx <= 2 * r && 10 * dy >= 2 * r && 10 * dy <= 6 * r);
        for (int k = 0; k < 3; k++) begin
          int v = (dark ? 25 : base) + ((noise > 0) ? int'($urandom % (2 * noise + 1)) - noise : 0);
          c[k] = clampi(v + 6 * (k - 1), 0, 255);
        end
        rgb[y * w + x] = (c[0] << 16) | (c[1] << 8) | c[2];
      end
  endfunction

  // Whole-pipeline reference for one frame: grey, blur, then threshold against the
  // previous frame's blurred picture (thr_valid = 0 for the first frame after reset).
  function automatic void ref_pipeline(input int rgb[], input int prev_blur[], input bit thr_valid,
                                       input int w, input int h, input int blk, input int offset,
                                       ref int blur[], ref int bin[]);
    int g[], thr[];
    g = new[w * h];
    foreach (g[i]) g[i] = ref_gray(rgb[i]);
    ref_blur(g, w, h, blur);
    if (thr_valid) begin
      ref_block_thr(prev_blur, w, h, blk, offset, thr);
      ref_thresh(blur, thr, w, h, blk, bin);
    end else begin
      bin = new[w * h];
      foreach (bin[i]) bin[i] = 0;
    end
  endfunction
endpackage
