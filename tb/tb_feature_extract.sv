// tb_feature_extract -- self-checking test of the component feature table.
//
// The labeler (mcl_labeler, 12 x 9 frames, 128 labels) produces the event
// stream from random multi-class images with rectangles, U shapes (merges)
// and noise. After each frame the records read out by feature_extract must be
// exactly the flood-fill reference components: same number, and for each a
// record with equal class, area and bounding box. frame_done must follow the
// last record, and the read-out must take one cycle per label opened (plus one to start, one for frame_done).
module tb_feature_extract;
  import rsd_ref_pkg::*;
  localparam int unsigned W = 12, H = 9, CLW = 2, LB = 128, LW = 7;

  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_sof = 0;
  logic [CLW-1:0] in_class;
  int checks = 0, failures = 0, merge_frames = 0;

  logic           ev_valid, ev_sof, ev_eof, ev_new, ev_merge, ovf;
  logic [3:0]     ev_x, ev_y;
  logic [CLW-1:0] ev_class;
  logic [LW-1:0]  ev_label, ev_hi;
  logic           comp_valid, frame_done, busy;
  logic [LW-1:0]  comp_label;
  logic [CLW-1:0] comp_class;
  logic [6:0]     comp_area;
  logic [3:0]     comp_x0, comp_x1, comp_y0, comp_y1;

  mcl_labeler #(.W(W), .H(H), .CLW(CLW), .LABELS(LB)) u_lab (
    .clk, .rst_n, .in_valid, .in_sof, .in_class,
    .ev_valid, .ev_sof, .ev_eof, .ev_x, .ev_y, .ev_class, .ev_label,
    .ev_new, .ev_merge, .ev_merge_hi(ev_hi), .overflow(ovf));

  feature_extract #(.W(W), .H(H), .CLW(CLW), .LABELS(LB)) dut (
    .clk, .rst_n, .ev_valid, .ev_sof, .ev_eof, .ev_x, .ev_y, .ev_class,
    .ev_label, .ev_new, .ev_merge, .ev_merge_hi(ev_hi),
    .comp_valid, .comp_label, .comp_class, .comp_area,
    .comp_x0, .comp_x1, .comp_y0, .comp_y1, .frame_done, .busy);

  always #5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  comp_t got[$];
  int    news = 0, merges = 0, done_seen = 0, cyc = 0, eof_cyc = 0, done_cyc = 0;

  always @(posedge clk) cyc++;

  always @(negedge clk) begin
    if (comp_valid) begin
      comp_t c;
      c.cls = comp_class; c.area = comp_area;
      c.x0 = comp_x0; c.x1 = comp_x1; c.y0 = comp_y0; c.y1 = comp_y1;
      got.push_back(c);
    end
    if (ev_valid && ev_new) news++;
    if (ev_valid && ev_merge) merges++;
    if (ev_valid && ev_eof) eof_cyc = cyc;
    if (frame_done) begin
      done_seen++;
      done_cyc = cyc;
    end
  end

  img_t img;

  initial begin
    img = new[W*H];
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int frame = 0; frame < 30; frame++) begin
      img_t comp_of;
      comp_t comps[$];
      bit used[];
      foreach (img[i]) img[i] = 0;
      repeat (4) begin
        automatic int x0 = $urandom % W, y0 = $urandom % H, c = $urandom % 4;
        automatic int ww = 1 + $urandom % 7, hh = 1 + $urandom % 6;
        for (int y = y0; y < y0 + hh && y < H; y++)
          for (int x = x0; x < x0 + ww && x < W; x++) img[y*W+x] = c;
      end
      for (int y = 2; y < 7; y++) begin img[y*W+2] = 3; img[y*W+6] = 3; end
      for (int x = 2; x < 7; x++) img[6*W+x] = 3;
      if (frame % 2) repeat (8) img[$urandom % (W*H)] = $urandom % 4;
      cc_ref(W, H, img, comp_of, comps);
      got.delete(); news = 0; merges = 0; done_seen = 0;
      for (int i = 0; i < W * H; i++) begin
        @(negedge clk);
        in_valid = 1; in_sof = (i == 0); in_class = CLW'(img[i]);
      end
      @(negedge clk);
      in_valid = 0; in_sof = 0;
      repeat (LB + 10) @(negedge clk);
      if (merges > 0) merge_frames++;
      checks++;
      if (got.size() != comps.size() || done_seen != 1) begin
        failures++;
        $display("frame %0d: %0d records, expected %0d; frame_done %0d", frame, got.size(), comps.size(), done_seen);
      end
      checks++;
      if (done_cyc - eof_cyc != news + 2) begin
        failures++;
        $display("frame %0d: read-out took %0d cycles for %0d labels", frame, done_cyc - eof_cyc, news);
      end
      used = new[got.size()];
      foreach (comps[k]) begin
        automatic bit hit = 0;
        foreach (got[g])
          if (!hit && !used[g] && got[g] == comps[k]) begin
            used[g] = 1;
            hit = 1;
          end
        checks++;
        if (!hit) begin
          failures++;
          if (failures < 10) $display("frame %0d: component %0d (class %0d area %0d box %0d..%0d x %0d..%0d) missing",
                                      frame, k, comps[k].cls, comps[k].area, comps[k].x0, comps[k].x1, comps[k].y0, comps[k].y1);
        end
      end
    end
    checks++;
    if (merge_frames == 0) failures++;
    $display("frames with merges %0d", merge_frames);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
