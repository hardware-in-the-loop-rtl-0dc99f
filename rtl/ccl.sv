// ccl -- single-pass connected component labelling of a binary video stream.
//
// Foreground pixels (bit = 1) that touch, including diagonally (8-connectivity), form one
// object. For every object the module reports its area, bounding box and centroid, after
// the last pixel of the frame, as a list of records on a valid/ready port.
//
// How it works. During the frame each foreground pixel gets a provisional label, taken
// from its already-seen neighbours L (left), P, Q, R (upper-left, up, upper-right) in the
// order L, Q, P, R, or a fresh label if none of them is labelled. The labels of the line
// above come from a one-line label buffer. Labels are never rewritten: when a pixel joins
// two different labels, the pair is pushed into an equivalence list instead. One push per
// pixel is enough: if L is labelled, only R can bring a new label (and only when Q is
// background); if L is background and Q is background, P and R can. Each pixel adds its
// coordinates to the feature record (area, sum of x, sum of y, bounding box) of its label
// with a single-cycle read-modify-write, so the stream runs at one pixel per clock.
//
// After the last pixel the module resolves the frame in three sweeps, while the stream is
// in vertical blanking:
//   1. EQ:   for each recorded pair, follow the parent table of both labels to their roots
//            (one step per clock) and link the larger root under the smaller one. Hence
//            parent[l] <= l always, and the root of an object is its first label.
//   2. FLAT: for l = 1 .. last label in increasing order, a non-root l takes
//            root = parent[parent[l]] (its parent is smaller, hence already flattened) and
//            adds its features into the root's record.
//   3. OUT:  for every root in increasing label order (raster order of the object's first
//            pixel) the centroid is computed by two sequential dividers (COORD_W clocks)
//            and the record is offered on obj_valid until obj_ready.
// `frame_done` then pulses with the number of objects and two overflow flags: the label
// table was full (later new objects are lost) or the equivalence list was full (some
// objects may be reported in several pieces).
//
// A frame that starts while the previous one is still being resolved is ignored
// (`frame_dropped` pulses). The paper specifies only the function of this stage (labels
// with area, centroid and bounding box, computed in real time in the programmable
// logic); the single-pass scheme, the deferred equivalence resolution, the table sizes
// and the output port are this design's choices.
module ccl
  import vision_pkg::*;
#(
  parameter int unsigned WIDTH      = 1280,
  parameter int unsigned HEIGHT     = 720,
  parameter int unsigned MAX_LABELS = 512,   // labels 1 .. MAX_LABELS-1; 0 = background
  parameter int unsigned EQ_DEPTH   = 512
) (
  input  logic   clk,
  input  logic   rst_n,
  // binary pixel stream
  input  logic   in_valid,
  input  logic   in_sof,
  input  logic   in_eol,
  input  logic   in_bin,
  // object records
  output logic   obj_valid,
  input  logic   obj_ready,
  output obj_t   obj,
  // end-of-frame status
  output logic   frame_done,
  output logic [15:0] obj_count,
  output logic   lab_overflow,
  output logic   eq_overflow,
  output logic   frame_dropped,
  output logic   busy
);
  localparam int unsigned LW = $clog2(MAX_LABELS);
  localparam int unsigned EW = $clog2(EQ_DEPTH + 1);
  localparam int unsigned XW = $clog2(WIDTH);
  typedef logic [LW-1:0] label_t;
  typedef logic [LW:0]   lcnt_t;    // label count, one bit wider than a label

  typedef enum logic [2:0] {S_STREAM, S_EQ_LOAD, S_EQ_FIND, S_FLAT, S_OUT_SCAN, S_OUT_DIV,
                            S_OUT_EMIT} state_t;

  state_t  state;
  label_t  lab_lb [WIDTH];          // labels of the line above
  label_t  parent [MAX_LABELS];
  feat_t   feat   [MAX_LABELS];
  label_t  eq_a   [EQ_DEPTH];
  label_t  eq_b   [EQ_DEPTH];

  logic    in_frame;
  lcnt_t   next_lab;                // next fresh label
  logic [EW-1:0] eq_cnt;
  label_t  last_a, last_b;          // last pushed pair, to drop repeats
  label_t  l_reg, p_reg;

  coord_t  x, y;
  logic    last_px;

  pix_counter #(.WIDTH(WIDTH), .HEIGHT(HEIGHT)) u_cnt (
    .clk, .rst_n, .valid(in_valid), .sof(in_sof), .x, .y, .last_px
  );

  // ---------------------------------------------------------------- streaming pass
  logic    accept_sof, frame_on, fg;
  label_t  nL, nP, nQ, nR, cur;
  logic    new_lab, push, drop_new;
  label_t  push_a, push_b;
  lcnt_t   next_lab_eff;
  logic [EW-1:0] eq_cnt_eff;
  logic [XW-1:0] xi;

  always_comb begin
    xi         = x[XW-1:0];
    accept_sof = in_valid && in_sof && (state == S_STREAM);
    frame_on   = accept_sof || (in_frame && !(in_valid && in_sof));
    fg         = in_valid && frame_on && in_bin;
    next_lab_eff = accept_sof ? lcnt_t'(1) : next_lab;
    eq_cnt_eff   = accept_sof ? '0 : eq_cnt;

    nL = (x != 0) ? l_reg : '0;
    nP = (x != 0 && y != 0) ? p_reg : '0;
    nQ = (y != 0) ? lab_lb[xi] : '0;
    nR = (y != 0 && x != coord_t'(WIDTH - 1)) ? lab_lb[XW'(xi + 1'b1)] : '0;

    cur = '0; new_lab = 1'b0; drop_new = 1'b0;
    push = 1'b0; push_a = '0; push_b = '0;
    if (fg) begin
      if (nL != 0) begin
        cur = nL;
        if (nQ == 0 && nR != 0 && nR != nL) begin push = 1'b1; push_a = nL; push_b = nR; end
      end else if (nQ != 0) begin
        cur = nQ;
      end else if (nP != 0) begin
        cur = nP;
        if (nR != 0 && nR != nP) begin push = 1'b1; push_a = nP; push_b = nR; end
      end else if (nR != 0) begin
        cur = nR;
      end else if (32'(next_lab_eff) < MAX_LABELS) begin
        cur = label_t'(next_lab_eff);
        new_lab = 1'b1;
      end else begin
        drop_new = 1'b1;
      end
    end
    // a pair equal to the last one pushed (in this frame) is not pushed again
    if (push && !accept_sof && (eq_cnt != 0) &&
        ((push_a == last_a && push_b == last_b) || (push_a == last_b && push_b == last_a)))
      push = 1'b0;
  end

  // ---------------------------------------------------------------- resolution
  logic [EW-1:0] eq_idx;
  label_t  fa, fb;                  // labels being walked to their roots
  lcnt_t   scan;                    // label index of FLAT and OUT sweeps
  label_t  si;
  label_t  pa, pb, pl, ppl;
  feat_t   fl, fr;
  logic    div_start, div_busy_x, div_busy_y, div_done_x, div_done_y;
  coord_t  qx, qy;
  feat_t   fo;

  always_comb begin
    pa  = parent[fa];
    pb  = parent[fb];
    si  = label_t'(scan);
    pl  = parent[si];
    ppl = parent[pl];
    fl  = feat[si];
    fr  = feat[ppl];
    fo  = feat[si];
  end

  // ---------------------------------------------------------------- table writes
  logic   par_we, feat_we;
  label_t par_wa, feat_wa;
  label_t par_wd;
  feat_t  feat_wd;

  always_comb begin
    par_we = 1'b0; par_wa = '0; par_wd = '0;
    feat_we = 1'b0; feat_wa = '0; feat_wd = '0;
    unique case (state)
      S_STREAM: begin
        if (fg && new_lab) begin
          par_we = 1'b1; par_wa = cur; par_wd = cur;
          feat_we = 1'b1; feat_wa = cur; feat_wd = feat_pixel(x, y);
        end else if (fg && cur != 0) begin
          feat_we = 1'b1; feat_wa = cur; feat_wd = feat_merge(feat[cur], feat_pixel(x, y));
        end
      end
      S_EQ_FIND: begin
        if (pa == fa && pb == fb && fa != fb) begin
          par_we = 1'b1;
          par_wa = (fa < fb) ? fb : fa;
          par_wd = (fa < fb) ? fa : fb;
        end
      end
      S_FLAT: begin
        if (scan != next_lab && pl != si) begin
          par_we = 1'b1; par_wa = si; par_wd = ppl;
          feat_we = 1'b1; feat_wa = ppl; feat_wd = feat_merge(fr, fl);
        end
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk) begin
    if (par_we)  parent[par_wa] <= par_wd;
    if (feat_we) feat[feat_wa]  <= feat_wd;
    if (in_valid && frame_on) lab_lb[xi] <= cur;
    if (push && (eq_cnt_eff < EW'(EQ_DEPTH))) begin
      eq_a[eq_cnt_eff[$clog2(EQ_DEPTH)-1:0]] <= push_a;
      eq_b[eq_cnt_eff[$clog2(EQ_DEPTH)-1:0]] <= push_b;
    end
  end

  // ---------------------------------------------------------------- control
  always_comb div_start = (state == S_OUT_SCAN) && (scan != next_lab) && (pl == si);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state         <= S_STREAM;
      in_frame      <= 1'b0;
      next_lab      <= lcnt_t'(1);
      eq_cnt        <= '0;
      last_a        <= '0;
      last_b        <= '0;
      l_reg         <= '0;
      p_reg         <= '0;
      eq_idx        <= '0;
      fa            <= '0;
      fb            <= '0;
      scan          <= '0;
      obj_valid     <= 1'b0;
      obj           <= '0;
      frame_done    <= 1'b0;
      obj_count     <= '0;
      lab_overflow  <= 1'b0;
      eq_overflow   <= 1'b0;
      frame_dropped <= 1'b0;
    end else begin
      frame_done    <= 1'b0;
      frame_dropped <= 1'b0;
      if (in_valid && in_sof && state != S_STREAM) frame_dropped <= 1'b1;
      if (in_valid && in_sof) in_frame <= (state == S_STREAM);

      unique case (state)
        S_STREAM: begin
          if (in_valid && frame_on) begin
            l_reg    <= cur;
            p_reg    <= nQ;
            next_lab <= new_lab ? next_lab_eff + 1'b1 : next_lab_eff;
            if (accept_sof) begin
              lab_overflow <= drop_new;
              eq_overflow  <= 1'b0;
            end else if (drop_new) begin
              lab_overflow <= 1'b1;
            end
            if (push) begin
              last_a <= push_a;
              last_b <= push_b;
              if (eq_cnt_eff < EW'(EQ_DEPTH)) eq_cnt <= eq_cnt_eff + 1'b1;
              else begin
                eq_cnt      <= eq_cnt_eff;
                eq_overflow <= 1'b1;
              end
            end else begin
              eq_cnt <= eq_cnt_eff;
            end
            if (last_px) begin
              in_frame  <= 1'b0;
              eq_idx    <= '0;
              obj_count <= '0;
              state     <= S_EQ_LOAD;
            end
          end
        end
        S_EQ_LOAD: begin
          if (eq_idx == eq_cnt) begin
            scan  <= lcnt_t'(1);
            state <= S_FLAT;
          end else begin
            fa    <= eq_a[eq_idx[$clog2(EQ_DEPTH)-1:0]];
            fb    <= eq_b[eq_idx[$clog2(EQ_DEPTH)-1:0]];
            state <= S_EQ_FIND;
          end
        end
        S_EQ_FIND: begin
          if (pa != fa) fa <= pa;
          if (pb != fb) fb <= pb;
          if (pa == fa && pb == fb) begin
            eq_idx <= eq_idx + 1'b1;
            state  <= S_EQ_LOAD;
          end
        end
        S_FLAT: begin
          if (scan == next_lab) begin
            scan  <= lcnt_t'(1);
            state <= S_OUT_SCAN;
          end else begin
            scan <= scan + 1'b1;
          end
        end
        S_OUT_SCAN: begin
          if (scan == next_lab) begin
            frame_done <= 1'b1;
            state      <= S_STREAM;
          end else if (pl == si) begin
            state <= S_OUT_DIV;
          end else begin
            scan <= scan + 1'b1;
          end
        end
        S_OUT_DIV: begin
          if (div_done_x) begin
            obj_valid <= 1'b1;
            obj.area  <= fo.area;
            obj.xmin  <= fo.xmin;
            obj.xmax  <= fo.xmax;
            obj.ymin  <= fo.ymin;
            obj.ymax  <= fo.ymax;
            obj.cx    <= qx;
            obj.cy    <= qy;
            state     <= S_OUT_EMIT;
          end
        end
        S_OUT_EMIT: begin
          if (obj_ready) begin
            obj_valid <= 1'b0;
            obj_count <= obj_count + 1'b1;
            scan      <= scan + 1'b1;
            state     <= S_OUT_SCAN;
          end
        end
        default: state <= S_STREAM;
      endcase
    end
  end

  always_comb busy = (state != S_STREAM);

  seq_div #(.NW(SUM_W), .DW(AREA_W), .QW(COORD_W)) u_div_x (
    .clk, .rst_n, .start(div_start), .dividend(fo.sx), .divisor(fo.area),
    .busy(div_busy_x), .done(div_done_x), .q(qx)
  );
  seq_div #(.NW(SUM_W), .DW(AREA_W), .QW(COORD_W)) u_div_y (
    .clk, .rst_n, .start(div_start), .dividend(fo.sy), .divisor(fo.area),
    .busy(div_busy_y), .done(div_done_y), .q(qy)
  );

  // A record, once offered, stays stable until it is taken.
  property p_obj_hold;
    @(posedge clk) disable iff (!rst_n) obj_valid && !obj_ready |=> obj_valid && $stable(obj);
  endproperty
  a_obj_hold: assert property (p_obj_hold);

  // The two dividers run in lock step, and only while a record is being prepared.
  a_div_sync: assert property (@(posedge clk) disable iff (!rst_n)
                               (div_busy_x == div_busy_y) && (div_done_x == div_done_y));
  a_div_state: assert property (@(posedge clk) disable iff (!rst_n)
                                div_busy_x |-> state == S_OUT_DIV);
  // Stream framing: end of line only on the last column.
  a_eol: assert property (@(posedge clk) disable iff (!rst_n)
                          in_valid && in_eol |-> x == coord_t'(WIDTH - 1));

  initial begin
    assert (MAX_LABELS >= 2 && (1 << LW) == MAX_LABELS)
      else $error("ccl: MAX_LABELS must be a power of two");
  end
endmodule
