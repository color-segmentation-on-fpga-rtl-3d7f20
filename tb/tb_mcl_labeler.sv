// tb_mcl_labeler -- self-checking test of the multi-class component labeler.
//
// Frames of 12 x 9 pixels with four classes are built from random rectangles,
// U shapes (whose arms meet only further down, forcing label merges) and
// noise, and streamed with random gaps. Instance A (128 labels) is checked
// against a flood-fill reference: replaying its new/merge events in a
// testbench union-find must give exactly the reference 4-connected same-class
// components, the number of labels it opens must equal the count predicted
// from the image, and every event must carry the right position and class.
// Instance B (8 labels) sees the same frames and must raise `overflow`
// exactly on the frames that need more than 8 labels.
module tb_mcl_labeler;
  import rsd_ref_pkg::*;
  localparam int unsigned W = 12, H = 9, CLW = 2;

  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_sof = 0;
  logic [CLW-1:0] in_class;
  int checks = 0, failures = 0;
  int merges = 0, news = 0, ovf_frames = 0, ok_frames = 0;

  logic          a_valid, a_sof, a_eof, a_new, a_merge, a_ovf;
  logic [3:0]    a_x;
  logic [3:0]    a_y;
  logic [CLW-1:0] a_class;
  logic [6:0]    a_label, a_hi;

  logic          b_valid, b_sof, b_eof, b_new, b_merge, b_ovf;
  logic [3:0]    b_x, b_y;
  logic [CLW-1:0] b_class;
  logic [2:0]    b_label, b_hi;

  mcl_labeler #(.W(W), .H(H), .CLW(CLW), .LABELS(128)) dut_a (
    .clk, .rst_n, .in_valid, .in_sof, .in_class,
    .ev_valid(a_valid), .ev_sof(a_sof), .ev_eof(a_eof), .ev_x(a_x), .ev_y(a_y),
    .ev_class(a_class), .ev_label(a_label), .ev_new(a_new), .ev_merge(a_merge),
    .ev_merge_hi(a_hi), .overflow(a_ovf));

  mcl_labeler #(.W(W), .H(H), .CLW(CLW), .LABELS(8)) dut_b (
    .clk, .rst_n, .in_valid, .in_sof, .in_class,
    .ev_valid(b_valid), .ev_sof(b_sof), .ev_eof(b_eof), .ev_x(b_x), .ev_y(b_y),
    .ev_class(b_class), .ev_label(b_label), .ev_new(b_new), .ev_merge(b_merge),
    .ev_merge_hi(b_hi), .overflow(b_ovf));

  always #5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  img_t img;
  int   pix_label[W*H];
  int   uf[128];
  int   evn = 0, frame_news = 0;
  bit   b_ovf_seen = 0;

  function automatic int find(int l);
    while (uf[l] != l) l = uf[l];
    return l;
  endfunction

  always @(negedge clk) begin
    if (a_valid) begin
      checks++;
      if (a_x !== 4'(evn % W) || a_y !== 4'(evn / W) || a_class !== CLW'(img[evn]) ||
          a_sof !== (evn == 0) || a_eof !== (evn == W*H-1)) begin
        failures++;
        if (failures < 10) $display("event %0d: x %0d y %0d class %0d", evn, a_x, a_y, a_class);
      end
      if (a_new) begin
        uf[a_label] = a_label;
        frame_news++;
      end
      if (a_merge) begin
        automatic int r1 = find(a_label), r2 = find(a_hi);
        merges++;
        // a merge must join two distinct components, named by their roots
        checks++;
        if (r1 == r2 || r1 != a_label || r2 != a_hi || a_hi <= a_label) begin
          failures++;
          if (failures < 10) $display("event %0d: bad merge %0d <- %0d", evn, a_label, a_hi);
        end
        uf[r2] = r1;
      end else if (!a_new) begin
        // the label a pixel takes is always the root of its component
        checks++;
        if (find(a_label) != a_label) begin
          failures++;
          if (failures < 10) $display("event %0d: label %0d is not a root", evn, a_label);
        end
      end
      pix_label[evn] = a_label;
      evn++;
    end
    if (b_valid && b_ovf) b_ovf_seen = 1;
  end

  task automatic make_image(int kind);
    foreach (img[i]) img[i] = 0;
    repeat (3 + $urandom % 4) begin
      automatic int x0 = $urandom % W, y0 = $urandom % H, c = $urandom % 4;
      int ww = 1 + $urandom % 6, hh = 1 + $urandom % 5;
      for (int y = y0; y < y0 + hh && y < H; y++)
        for (int x = x0; x < x0 + ww && x < W; x++)
          img[y*W+x] = c;
    end
    // a U shape: two arms joined at the bottom
    begin
      automatic int ux = $urandom % (W - 4), uy = $urandom % (H - 4), c = 1 + $urandom % 3;
      for (int y = uy; y < uy + 4; y++) begin
        img[y*W+ux] = c;
        img[y*W+ux+3] = c;
      end
      for (int x = ux; x < ux + 4; x++) img[(uy+3)*W+x] = c;
    end
    if (kind == 1) repeat (10) img[$urandom % (W*H)] = $urandom % 4;
    if (kind == 2) foreach (img[i]) img[i] = $urandom % 4;
  endtask

  initial begin
    img = new[W*H];
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int frame = 0; frame < 40; frame++) begin
      img_t comp_of;
      comp_t comps[$];
      int root_of_comp[];
      int exp_new;
      make_image(frame % 3);
      cc_ref(W, H, img, comp_of, comps);
      exp_new = new_labels_ref(W, H, img);
      evn = 0; frame_news = 0; b_ovf_seen = 0;
      for (int i = 0; i < W * H; i++) begin
        @(negedge clk);
        while ($urandom % 4 == 0) begin
          in_valid = 0;
          @(negedge clk);
        end
        in_valid = 1; in_sof = (i == 0); in_class = CLW'(img[i]);
      end
      @(negedge clk);
      in_valid = 0; in_sof = 0;
      repeat (4) @(negedge clk);
      // partition check
      root_of_comp = new[comps.size()];
      foreach (root_of_comp[c]) root_of_comp[c] = -1;
      for (int i = 0; i < W * H; i++) begin
        automatic int r = find(pix_label[i]);
        checks++;
        if (root_of_comp[comp_of[i]] == -1) root_of_comp[comp_of[i]] = r;
        else if (root_of_comp[comp_of[i]] != r) begin
          failures++;
          if (failures < 10) $display("frame %0d pixel %0d: split component", frame, i);
        end
      end
      foreach (root_of_comp[c])
        for (int d = c + 1; d < comps.size(); d++) begin
          checks++;
          if (root_of_comp[c] == root_of_comp[d]) begin
            failures++;
            if (failures < 10) $display("frame %0d: components %0d and %0d joined", frame, c, d);
          end
        end
      checks++;
      if (frame_news != exp_new || evn != W * H) begin
        failures++;
        $display("frame %0d: %0d labels opened, expected %0d", frame, frame_news, exp_new);
      end
      checks++;
      if (b_ovf_seen != (exp_new > 8) || a_ovf) begin
        failures++;
        $display("frame %0d: overflow %0d, expected %0d", frame, b_ovf_seen, exp_new > 8);
      end
      if (exp_new > 8) ovf_frames++; else ok_frames++;
      news += frame_news;
    end
    checks++;
    if (merges == 0 || ovf_frames == 0 || ok_frames == 0) failures++;
    $display("labels opened %0d, merges %0d, overflow frames %0d, frames within 8 labels %0d",
             news, merges, ovf_frames, ok_frames);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
