// tb_ccl -- self-checking test of the connected component labelling stage.
//
// dut  (40 x 24, 512 labels): random frames of several densities and hand-made shapes
//      (U shapes, a spiral, a ring, a comb) whose labels must merge, sometimes through
//      chains. Every record (area, bounding box, centroid) and the record order are
//      compared with a flood-fill reference; obj_ready is randomly withheld. A frame sent
//      while the previous one is still being resolved must be dropped.
// dut2 (40 x 24, 16 labels, 4 equivalences): a frame of 20 isolated dots must raise
//      lab_overflow and report the first 15 dots; a frame of 6 V shapes must raise
//      eq_overflow.
module tb_ccl;
  import vision_pkg::*;
  import vision_ref_pkg::*;
  localparam int W = 40, H = 24;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_sof = 0, in_eol = 0, in_bin = 0;
  int checks = 0, failures = 0;

  logic obj_valid, obj_ready, frame_done, lab_overflow, eq_overflow, frame_dropped, busy;
  obj_t obj;
  logic [15:0] obj_count;
  logic obj_valid2, frame_done2, lab_overflow2, eq_overflow2, frame_dropped2, busy2;
  obj_t obj2;
  logic [15:0] obj_count2;

  ccl #(.WIDTH(W), .HEIGHT(H)) dut (
    .clk, .rst_n, .in_valid, .in_sof, .in_eol, .in_bin,
    .obj_valid, .obj_ready, .obj, .frame_done, .obj_count, .lab_overflow, .eq_overflow,
    .frame_dropped, .busy
  );
  ccl #(.WIDTH(W), .HEIGHT(H), .MAX_LABELS(16), .EQ_DEPTH(4)) dut2 (
    .clk, .rst_n, .in_valid, .in_sof, .in_eol, .in_bin,
    .obj_valid(obj_valid2), .obj_ready(1'b1), .obj(obj2), .frame_done(frame_done2),
    .obj_count(obj_count2), .lab_overflow(lab_overflow2), .eq_overflow(eq_overflow2),
    .frame_dropped(frame_dropped2), .busy(busy2)
  );

  always #5 clk = ~clk;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  obj_t got[$], got2[$];
  int   n_dropped = 0, n_done = 0;
  always @(posedge clk) begin
    if (rst_n && frame_done) n_done++;
    obj_ready <= ($urandom % 3) != 0;
    if (rst_n && obj_valid && obj_ready) got.push_back(obj);
    if (rst_n && obj_valid2) got2.push_back(obj2);
    if (rst_n && frame_dropped) n_dropped++;
  end

  int bin[];

  task automatic send_frame();
    for (int i = 0; i < W * H; i++) begin
      @(negedge clk);
      in_valid = 1; in_bin = bin[i] != 0; in_sof = (i == 0); in_eol = (i % W == W - 1);
      if ($urandom % 5 == 0) begin @(negedge clk); in_valid = 0; end
    end
    @(negedge clk); in_valid = 0; in_sof = 0; in_eol = 0; in_bin = 0;
  endtask

  function automatic void put(int x, int y);
    if (x >= 0 && x < W && y >= 0 && y < H) bin[y * W + x] = 1;
  endfunction

  function automatic void make_frame(int kind);
    bin = new[W * H];
    foreach (bin[i]) bin[i] = 0;
    case (kind)
      0, 1, 2: foreach (bin[i]) bin[i] = (($urandom % 100) < 25 + 15 * kind) ? 1 : 0;
      3: begin  // U shapes and a comb: merges where the arms meet
        for (int y = 2; y < 12; y++) begin put(3, y); put(9, y); end
        for (int x = 3; x <= 9; x++) put(x, 12);
        for (int x = 14; x < 38; x += 3) for (int y = 1; y < 10; y++) put(x, y);
        for (int x = 14; x < 38; x++) put(x, 10);
        for (int x = 2; x < 38; x += 4) for (int y = 15; y < 22; y++) put(x + (y % 2), y);
        for (int x = 2; x < 38; x++) put(x, 22);
      end
      4: begin  // square spiral and a ring
        int x0 = 1, y0 = 1, x1 = 22, y1 = 22;
        while (x1 - x0 > 3) begin
          for (int x = x0; x <= x1; x++) put(x, y1);
          for (int y = y0; y <= y1; y++) put(x1, y);
          for (int x = x0; x <= x1; x++) put(x, y0);
          for (int y = y0 + 2; y <= y1; y++) put(x0, y);
          x0 += 2; y0 += 2; x1 -= 2; y1 -= 2;
          for (int y = y0 - 2 + 2; y <= y0; y++) put(x0 - 2, y);
        end
        for (int y = 0; y < H; y++)
          for (int x = 24; x < W; x++) begin
            int d2 = (x - 32) * (x - 32) + (y - 12) * (y - 12);
            if (d2 >= 25 && d2 <= 56) put(x, y);
          end
      end
      5: begin  // anti-diagonal staircases: 8-connected only through P/R
        for (int k = 0; k < 5; k++) for (int y = 0; y < H; y++) put(38 - y - 7 * k + k, y);
        for (int y = 0; y < H; y += 2) put(0, y);
      end
      default: foreach (bin[i]) bin[i] = ($urandom % 2);
    endcase
  endfunction

  task automatic check_frame(string name, ref obj_t exp[$]);
    checks++;
    if (got.size() != exp.size() || obj_count != 16'(exp.size())) begin
      failures++;
      $display("FAIL %s: %0d records (count %0d), expected %0d", name, got.size(), obj_count,
               exp.size());
    end
    for (int i = 0; i < exp.size() && i < got.size(); i++) begin
      checks++;
      if (got[i] != exp[i]) begin
        failures++;
        $display("FAIL %s obj %0d: got area %0d box %0d..%0d,%0d..%0d c %0d,%0d; want area %0d box %0d..%0d,%0d..%0d c %0d,%0d",
                 name, i, got[i].area, got[i].xmin, got[i].xmax, got[i].ymin, got[i].ymax,
                 got[i].cx, got[i].cy, exp[i].area, exp[i].xmin, exp[i].xmax, exp[i].ymin,
                 exp[i].ymax, exp[i].cx, exp[i].cy);
      end
    end
    checks++;
    if (lab_overflow || eq_overflow) begin
      failures++;
      $display("FAIL %s: overflow flags %0b %0b", name, lab_overflow, eq_overflow);
    end
  endtask

  initial begin
    obj_t exp[$];
    int d0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    for (int f = 0; f < 12; f++) begin
      make_frame(f % 7);
      ref_ccl(bin, W, H, exp);
      got = {}; got2 = {};
      send_frame();
      wait (frame_done);
      wait (!busy2);
      @(negedge clk);
      check_frame($sformatf("frame%0d", f), exp);
      $display("frame %0d: %0d objects", f, exp.size());
    end

    // a frame that starts during resolution is dropped; the one after it is processed
    make_frame(2);
    ref_ccl(bin, W, H, exp);
    got = {};
    d0 = n_done;
    send_frame();
    @(negedge clk);
    checks++;
    if (!busy) begin failures++; $display("FAIL not busy after frame"); end
    send_frame();          // arrives while busy
    wait (n_done > d0);
    @(negedge clk);
    check_frame("before-drop", exp);
    checks++;
    if (n_dropped != 1) begin failures++; $display("FAIL dropped %0d frames", n_dropped); end
    wait (!busy2);
    make_frame(4);
    ref_ccl(bin, W, H, exp);
    got = {};
    send_frame();
    wait (frame_done);
    @(negedge clk);
    check_frame("after-drop", exp);

    // label table overflow on dut2: 20 isolated dots, only 15 labels
    wait (!busy2);
    bin = new[W * H];
    foreach (bin[i]) bin[i] = 0;
    for (int k = 0; k < 20; k++) put(2 * (k % 10) * 2, 4 + 6 * (k / 10));
    got2 = {};
    send_frame();
    wait (frame_done2);
    @(negedge clk);
    checks++;
    if (!lab_overflow2 || got2.size() != 15 || eq_overflow2) begin
      failures++;
      $display("FAIL label overflow: flag %0b, %0d records", lab_overflow2, got2.size());
    end
    // equivalence list overflow on dut2: 6 V shapes need 6 merges, the list holds 4
    wait (!busy2);
    bin = new[W * H];
    foreach (bin[i]) bin[i] = 0;
    for (int k = 0; k < 6; k++)
      for (int d = 0; d < 3; d++) begin put(6 * k + d, d); put(6 * k + 4 - d, d); end
    got2 = {};
    send_frame();
    wait (frame_done2);
    @(negedge clk);
    checks++;
    if (!eq_overflow2 || lab_overflow2) begin
      failures++;
      $display("FAIL equivalence overflow: flag %0b", eq_overflow2);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
