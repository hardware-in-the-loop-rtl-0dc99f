// vision_pkg -- types and constants shared by the landing-marker vision pipeline.
//
// The pipeline carries one pixel per clock on a simple valid-qualified video stream:
// `valid` marks a pixel, `sof` flags the first pixel of a frame and `eol` the last pixel
// of a line. There is no back-pressure: like a camera or HDMI receiver, the source
// cannot be stalled. The widths below are sized for frames up to 4095 x 4095 pixels,
// which covers the 1280 x 720 stream the design is built for.
//
// The object record is what the labelling stage hands to the processor for every
// connected component: its area, its bounding box and its centroid (rounded down).
package vision_pkg;

  localparam int unsigned COORD_W = 12;  // x or y coordinate
  localparam int unsigned AREA_W  = 24;  // pixel count of one object
  localparam int unsigned SUM_W   = 36;  // sum of x (or y) over one object

  typedef logic [COORD_W-1:0] coord_t;
  typedef logic [AREA_W-1:0]  area_t;
  typedef logic [SUM_W-1:0]   sum_t;

  // Descriptor of one connected component, as sent to the processor.
  typedef struct packed {
    area_t  area;
    coord_t xmin;
    coord_t xmax;
    coord_t ymin;
    coord_t ymax;
    coord_t cx;    // floor(sum of x / area)
    coord_t cy;    // floor(sum of y / area)
  } obj_t;

  // Running features of a label while the frame streams in.
  typedef struct packed {
    area_t  area;
    sum_t   sx;
    sum_t   sy;
    coord_t xmin;
    coord_t xmax;
    coord_t ymin;
    coord_t ymax;
  } feat_t;

  // Merge the features of two labels that belong to the same object.
  function automatic feat_t feat_merge(feat_t a, feat_t b);
    feat_t r;
    r.area = a.area + b.area;
    r.sx   = a.sx + b.sx;
    r.sy   = a.sy + b.sy;
    r.xmin = (a.xmin < b.xmin) ? a.xmin : b.xmin;
    r.xmax = (a.xmax > b.xmax) ? a.xmax : b.xmax;
    r.ymin = (a.ymin < b.ymin) ? a.ymin : b.ymin;
    r.ymax = (a.ymax > b.ymax) ? a.ymax : b.ymax;
    return r;
  endfunction

  // Features of a single pixel at (x, y).
  function automatic feat_t feat_pixel(coord_t x, coord_t y);
    feat_t r;
    r.area = area_t'(1);
    r.sx   = sum_t'(x);
    r.sy   = sum_t'(y);
    r.xmin = x;
    r.xmax = x;
    r.ymin = y;
    r.ymax = y;
    return r;
  endfunction

endpackage
