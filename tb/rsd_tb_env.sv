// rsd_tb_env -- stimulus and checker for the whole road sign detector.
//
// Drives the detector's clock, reset, programming port and camera stream and
// checks every output stage against the reference model of rsd_ref_pkg:
//   1. programs the four published class centres through the classifier port;
//   2. streams FRAMES synthetic road scenes: noisy grey background, a yellow
//      square sign inside a red ring, a second-red patch, a long yellow bar and
//      a small yellow patch (both to be rejected by the rule), a yellow U shape
//      (its arms force label merges) and isolated noise pixels of random colour
//      (removed by the median filter). If NOISE_FRAME is set, the last frame is
//      pure colour noise, which must overflow a small label table;
//   3. compares the classifier stream and the median stream pixel by pixel,
//      the component records and the detected signs as sets, the overflow flag
//      and frame_done;
//   4. checks timing on the first frame, sent without gaps. A latency of L
//      cycles means the result is visible right after the L-th clock edge,
//      counting the edge that takes the input. The first class must have a
//      latency of (W+3) + 8 (Gaussian filter, then the classifier's
//      3*2 + log2 4), and the last label must come W*H-1 cycles after the
//      first one's due time, (W+3) + 8 + (W+3) + 1: one pixel per clock;
//   5. counts each mechanism of the design (centre writes, Gaussian changes,
//      every class in the segmentation, median changes, label merges,
//      accepted and rejected components, overflow) and fails on one that
//      never happened.
// Later frames are sent with random idle cycles. Ends with the TB_RESULT line.
module rsd_tb_env #(
  parameter int unsigned W           = 64,
  parameter int unsigned H           = 48,
  parameter int unsigned NL          = 64,
  parameter int unsigned FRAMES      = 3,
  parameter bit          NOISE_FRAME = 1,
  parameter int unsigned CHROMA_NOISE = 3,     // +/- uniform noise on painted regions
  parameter int unsigned MIN_REDUCTION = 0,    // percent; 0: report only
  parameter longint      WATCHDOG    = 10_000_000,
  localparam int unsigned LW = $clog2(NL),
  localparam int unsigned XW = $clog2(W),
  localparam int unsigned YW = $clog2(H),
  localparam int unsigned AW = $clog2(W * H + 1)
) (
  output logic          clk,
  output logic          rst_n,
  output logic          pix_valid,
  output logic          pix_sof,
  output logic [7:0]    pix_cb,
  output logic [7:0]    pix_cr,
  output logic          cfg_wr,
  output logic [2:0]    cfg_addr,
  output logic [7:0]    cfg_data,
  input  logic          seg_valid,
  input  logic [1:0]    seg_class,
  input  logic          med_valid,
  input  logic [1:0]    med_class,
  input  logic          lab_valid,
  input  logic [XW-1:0] lab_x,
  input  logic [YW-1:0] lab_y,
  input  logic [LW-1:0] lab_label,
  input  logic          label_overflow,
  input  logic          comp_valid,
  input  logic [LW-1:0] comp_label,
  input  logic [1:0]    comp_class,
  input  logic [AW-1:0] comp_area,
  input  logic [XW-1:0] comp_x0,
  input  logic [XW-1:0] comp_x1,
  input  logic [YW-1:0] comp_y0,
  input  logic [YW-1:0] comp_y1,
  input  logic          frame_done,
  input  logic          sign_valid,
  input  logic [LW-1:0] sign_label,
  input  logic [AW-1:0] sign_area,
  input  logic [XW-1:0] sign_x0,
  input  logic [XW-1:0] sign_x1,
  input  logic [YW-1:0] sign_y0,
  input  logic [YW-1:0] sign_y1,
  input  logic          merge_pulse    // labeler merge event, observed inside
);
  import rsd_pkg::*;
  import rsd_ref_pkg::*;

  int checks = 0, failures = 0;
  longint cyc = 0;

  // mechanism counters
  int n_cfg = 0, n_gauss_changed = 0, n_median_changed = 0, n_merges = 0;
  int n_accepted = 0, n_rejected = 0, n_overflow = 0, n_class[4] = '{0, 0, 0, 0};

  initial clk = 0;
  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  // watchdog; WATCHDOG = 0 leaves it to the enclosing testbench
  initial if (WATCHDOG > 0) begin
    #(WATCHDOG * 10);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---- output capture -------------------------------------------------------
  int unsigned seg_q[$], med_q[$];
  comp_t       comp_q[$], sign_q[$];
  int          done_cnt = 0, lab_cnt = 0, lab_bad = 0;
  longint      first_seg = -1, last_lab = -1;
  bit          ovf_seen = 0;

  always @(negedge clk) begin
    if (seg_valid) begin
      seg_q.push_back(seg_class);
      if (first_seg < 0) first_seg = cyc;
    end
    if (med_valid) med_q.push_back(med_class);
    if (lab_valid) begin
      if (lab_x != XW'(lab_cnt % W) || lab_y != YW'(lab_cnt / W)) lab_bad++;
      lab_cnt++;
      last_lab = cyc;
      if (label_overflow) ovf_seen = 1;
    end
    if (merge_pulse) n_merges++;
    if (comp_valid) begin
      comp_t c;
      c.cls = comp_class; c.area = comp_area;
      c.x0 = comp_x0; c.x1 = comp_x1; c.y0 = comp_y0; c.y1 = comp_y1;
      comp_q.push_back(c);
    end
    if (sign_valid) begin
      comp_t c;
      c.cls = 1; c.area = sign_area;
      c.x0 = sign_x0; c.x1 = sign_x1; c.y0 = sign_y0; c.y1 = sign_y1;
      sign_q.push_back(c);
    end
    if (frame_done) done_cnt++;
  end

  // ---- scene generation ---------------------------------------------------------
  img_t cb, cr;

  function automatic int clip(int v);
    return (v < 0) ? 0 : (v > 255) ? 255 : v;
  endfunction

  task automatic paint(int x0, int y0, int ww, int hh, int c);
    for (int y = y0; y < y0 + hh && y < int'(H); y++)
      for (int x = x0; x < x0 + ww && x < int'(W); x++)
        if (x >= 0 && y >= 0) begin
          cb[y*W+x] = clip(int'(CLASS_CENTRES[c][0]) + int'($urandom % (2 * CHROMA_NOISE + 1)) - int'(CHROMA_NOISE));
          cr[y*W+x] = clip(int'(CLASS_CENTRES[c][1]) + int'($urandom % (2 * CHROMA_NOISE + 1)) - int'(CHROMA_NOISE));
        end
  endtask

  task automatic make_scene(bit noise_only);
    int s, ring, arm;
    cb = new[W*H]; cr = new[W*H];
    if (noise_only) begin
      foreach (cb[i]) begin
        cb[i] = 80 + $urandom % 60;
        cr[i] = 120 + $urandom % 70;
      end
      return;
    end
    paint(0, 0, W, H, 0);
    s    = H / 2;
    ring = (s / 8 > 2) ? s / 8 : 2;
    arm  = (W / 40 > 3) ? W / 40 : 3;
    // ringed sign, left half
    paint(W / 16, H / 4, s + 2 * ring, s + 2 * ring, 2);
    paint(W / 16 + ring, H / 4 + ring, s, s, 1);
    // second red patch, top right
    paint(W * 3 / 4, 1, W / 8, H / 8 + 2, 3);
    // long yellow bar along the bottom (ratio far above 3)
    paint(W / 2, H - H / 10 - 2, W * 2 / 5, H / 10 > 4 ? H / 10 : 4, 1);
    // small yellow patch (area below the rule)
    paint(W / 2, H / 4, 8, 8, 1);
    // yellow U shape, opening upwards
    paint(W * 3 / 4, H / 3, arm, H / 3, 1);
    paint(W * 3 / 4 + 3 * arm, H / 3, arm, H / 3, 1);
    paint(W * 3 / 4, H / 3 + H / 3 - arm, 4 * arm, arm, 1);
    // isolated noise pixels
    repeat (W * H / 200 + 3) begin
      automatic int p = $urandom % (W * H);
      cb[p] = $urandom % 256;
      cr[p] = $urandom % 256;
    end
  endtask

  // ---- the test -------------------------------------------------------------------
  initial begin
    rst_n = 0; pix_valid = 0; pix_sof = 0; pix_cb = 0; pix_cr = 0;
    cfg_wr = 0; cfg_addr = 0; cfg_data = 0;
    repeat (4) @(negedge clk);
    rst_n = 1;
    // program the class centres: cell class*2 + dimension
    for (int c = 0; c < MDC_C; c++)
      for (int d = 0; d < MDC_D; d++) begin
        @(negedge clk);
        cfg_wr = 1; cfg_addr = 3'(c * MDC_D + d); cfg_data = CLASS_CENTRES[c][d];
        n_cfg++;
      end
    @(negedge clk);
    cfg_wr = 0;
    repeat (20) @(negedge clk);

    for (int frame = 0; frame < int'(FRAMES); frame++) begin
      automatic bit noise = NOISE_FRAME && (frame == int'(FRAMES) - 1) && (frame > 0);
      img_t gcb, gcr, seg, med, comp_of, raw;
      comp_t comps[$], raw_comps[$];
      int exp_new, nsigns;
      bit exp_ovf;
      longint first_pix;
      int unsigned centres[][];

      make_scene(noise);
      // reference model
      gauss_ref(W, H, cb, gcb);
      gauss_ref(W, H, cr, gcr);
      centres = new[MDC_C];
      foreach (centres[c]) begin
        centres[c] = new[MDC_D];
        foreach (centres[c][d]) centres[c][d] = CLASS_CENTRES[c][d];
      end
      seg = new[W*H];
      foreach (seg[i]) begin
        int unsigned v[];
        v = new[2];
        v[0] = gcb[i]; v[1] = gcr[i];
        seg[i] = nearest_ref(v, centres);
        if (gcb[i] != cb[i] || gcr[i] != cr[i]) n_gauss_changed++;
        n_class[seg[i]]++;
      end
      // the same scene classified without either filter
      raw = new[W*H];
      foreach (raw[i]) begin
        int unsigned v[];
        v = new[2];
        v[0] = cb[i]; v[1] = cr[i];
        raw[i] = nearest_ref(v, centres);
      end
      cc_ref(W, H, raw, comp_of, raw_comps);
      median_ref(W, H, seg, med);
      foreach (med[i]) if (med[i] != seg[i]) n_median_changed++;
      cc_ref(W, H, med, comp_of, comps);
      exp_new = new_labels_ref(W, H, med);
      exp_ovf = exp_new > int'(NL);
      if (exp_ovf) n_overflow++;

      seg_q.delete(); med_q.delete(); comp_q.delete(); sign_q.delete();
      done_cnt = 0; lab_cnt = 0; lab_bad = 0; first_seg = -1; last_lab = -1; ovf_seen = 0;

      // stream the frame
      first_pix = -1;
      for (int i = 0; i < int'(W * H); i++) begin
        @(negedge clk);
        while (frame > 0 && ($urandom % 8 == 0)) begin
          pix_valid = 0;
          @(negedge clk);
        end
        pix_valid = 1; pix_sof = (i == 0);
        pix_cb = 8'(cb[i]); pix_cr = 8'(cr[i]);
        if (i == 0) first_pix = cyc + 1;
      end
      @(negedge clk);
      pix_valid = 0; pix_sof = 0;
      // blanking: two filter flushes, classifier, read-out
      repeat (2 * (W + 1) + 8 + NL + 40) @(negedge clk);

      // streams
      checks++;
      if (seg_q.size() != W * H || med_q.size() != W * H || lab_cnt != W * H || lab_bad != 0) begin
        failures++;
        $display("frame %0d: %0d classes, %0d medians, %0d labels (%0d misplaced)",
                 frame, seg_q.size(), med_q.size(), lab_cnt, lab_bad);
      end else begin
        automatic int bad_seg = 0, bad_med = 0;
        foreach (seg[i]) begin
          checks += 2;
          if (seg_q[i] != seg[i]) bad_seg++;
          if (med_q[i] != med[i]) bad_med++;
        end
        failures += bad_seg + bad_med;
        if (bad_seg + bad_med > 0) $display("frame %0d: %0d class and %0d median mismatches", frame, bad_seg, bad_med);
      end
      checks++;
      if (done_cnt != 1) begin
        failures++;
        $display("frame %0d: frame_done seen %0d times", frame, done_cnt);
      end
      checks++;
      if (ovf_seen != exp_ovf) begin
        failures++;
        $display("frame %0d: overflow %0d, expected %0d (%0d labels needed)", frame, ovf_seen, exp_ovf, exp_new);
      end
      if (frame == 0) begin
        checks += 2;
        if (first_seg - first_pix + 1 != (W + 3) + 8) begin
          failures++;
          $display("classifier latency %0d, expected %0d", first_seg - first_pix + 1, (W + 3) + 8);
        end
        if (last_lab - first_pix + 1 != (W * H - 1) + 2 * (W + 3) + 8 + 1) begin
          failures++;
          $display("last label after %0d cycles, expected %0d", last_lab - first_pix + 1, (W * H - 1) + 2 * (W + 3) + 8 + 1);
        end
      end
      // components and signs (meaningless after an overflow)
      nsigns = 0;
      if (!exp_ovf) begin
        bit used[];
        checks++;
        if (comp_q.size() != comps.size()) begin
          failures++;
          $display("frame %0d: %0d components, expected %0d", frame, comp_q.size(), comps.size());
        end
        used = new[comp_q.size()];
        foreach (comps[k]) begin
          automatic bit hit = 0;
          foreach (comp_q[g])
            if (!hit && !used[g] && comp_q[g] == comps[k]) begin
              used[g] = 1;
              hit = 1;
            end
          checks++;
          if (!hit) begin
            failures++;
            if (failures < 10) $display("frame %0d: component class %0d area %0d missing", frame, comps[k].cls, comps[k].area);
          end
          if (is_sign_ref(comps[k], CLASS_YELLOW)) begin
            automatic bit found = 0;
            nsigns++;
            foreach (sign_q[g]) if (sign_q[g] == comps[k]) found = 1;
            checks++;
            if (!found) begin
              failures++;
              $display("frame %0d: sign at %0d,%0d not reported", frame, comps[k].x0, comps[k].y0);
            end else begin
              n_accepted++;
              $display("frame %0d: sign detected, box x %0d..%0d y %0d..%0d, area %0d",
                       frame, comps[k].x0, comps[k].x1, comps[k].y0, comps[k].y1, comps[k].area);
            end
          end else if (comps[k].cls == CLASS_YELLOW) n_rejected++;
        end
        checks++;
        if (sign_q.size() != nsigns) begin
          failures++;
          $display("frame %0d: %0d signs reported, expected %0d", frame, sign_q.size(), nsigns);
        end
      end
      $display("frame %0d: %0d components, %0d labels opened, %0d signs", frame, comps.size(), exp_new, nsigns);
      if (!exp_ovf) begin
        automatic int red = 100 - (100 * comps.size() + raw_comps.size() - 1) / raw_comps.size();
        $display("frame %0d: %0d components without the filters, %0d with them: %0d%% fewer",
                 frame, raw_comps.size(), comps.size(), red);
        if (MIN_REDUCTION > 0) begin
          checks++;
          if (red < int'(MIN_REDUCTION)) begin
            failures++;
            $display("frame %0d: reduction below %0d%%", frame, MIN_REDUCTION);
          end
        end
      end
    end

    // every mechanism must have happened
    begin
      int mech[string];
      mech["centre writes"]       = n_cfg;
      mech["gaussian changes"]    = n_gauss_changed;
      mech["class background"]    = n_class[0];
      mech["class yellow"]        = n_class[1];
      mech["class red"]           = n_class[2];
      mech["class red 2"]         = n_class[3];
      mech["median changes"]      = n_median_changed;
      mech["label merges"]        = n_merges;
      mech["signs accepted"]      = n_accepted;
      mech["yellow rejected"]     = n_rejected;
      if (NOISE_FRAME) mech["label overflow"] = n_overflow;
      foreach (mech[m]) begin
        $display("mechanism %-18s %0d", m, mech[m]);
        checks++;
        if (mech[m] == 0) begin
          failures++;
          $display("mechanism %s never happened", m);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
