// mcl_labeler -- single-pass multi-class connected component labeling.
//
// Input is the segmented image as a raster stream of class indices. Two pixels
// belong to the same component when they are 4-connected and carry the same
// class, so every class (background included) is split into components of its
// own. For the current pixel P3 the kernel looks at P1 (the pixel above) and
// P2 (the pixel to the left):
//   neither has P3's class     -> P3 opens a new label (ev_new)
//   one of them has it         -> P3 takes that neighbour's label
//   both have it, same label   -> P3 takes that label
//   both have it, two labels   -> the two components merge: P3 takes the lower
//                                 label and the higher one is retired (ev_merge)
// P1 comes from two line buffers of W entries, one for the class (pixel) and
// one for the label; P2 from one register each. This is the published buffer
// structure, in which the pixel line buffer beside the label line buffer is
// what makes the labeler multi-class.
//
// Merges are resolved with an equivalence table parent[] that is kept flat:
// every allocated label points straight at the root of its component. A
// merge of hi into lo rewrites, in the same cycle, every entry that points at
// hi, so one table lookup always yields the root of a label read back from the
// line buffer. Labels are handed out in order and not reused within a frame;
// when all LABELS are taken, further new components get the last label and
// `overflow` stays high until the next frame.
//
// Timing: one pixel per cycle, no stall. Each input pixel produces one
// registered event on the next cycle: ev_valid with the pixel's position,
// class and label, plus ev_new / ev_merge (ev_merge_hi = the retired label,
// ev_label = the surviving one). ev_sof/ev_eof mark the first/last pixel.
//
// Only the buffer structure and the 4-neighbourhood are published;
// the labeling kernel itself comes from earlier work, so the decision rules
// above, the flat equivalence table and the overflow rule are this design's
// own.
module mcl_labeler #(
  parameter int unsigned W      = rsd_pkg::IMG_W,
  parameter int unsigned H      = rsd_pkg::IMG_H,
  parameter int unsigned CLW    = $clog2(rsd_pkg::MDC_C),
  parameter int unsigned LABELS = rsd_pkg::LABELS,
  parameter int unsigned LW     = $clog2(LABELS),
  parameter int unsigned XW     = $clog2(W),
  parameter int unsigned YW     = $clog2(H)
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           in_valid,
  input  logic           in_sof,
  input  logic [CLW-1:0] in_class,
  output logic           ev_valid,
  output logic           ev_sof,
  output logic           ev_eof,
  output logic [XW-1:0]  ev_x,
  output logic [YW-1:0]  ev_y,
  output logic [CLW-1:0] ev_class,
  output logic [LW-1:0]  ev_label,
  output logic           ev_new,
  output logic           ev_merge,
  output logic [LW-1:0]  ev_merge_hi,
  output logic           overflow
);

  logic [CLW-1:0] cls_lb [W];      // pixel (class) line buffer: P1 pixel
  logic [LW-1:0]  lab_lb [W];      // label line buffer: P1 label
  logic [CLW-1:0] p2_cls;          // P2 pixel register
  logic [LW-1:0]  p2_lab;          // P2 label register
  logic [LW-1:0]  parent [LABELS]; // flat equivalence table
  logic [LW:0]    next_label;
  logic [XW-1:0]  x;
  logic [YW-1:0]  y;

  // Combinational kernel.
  logic [XW-1:0] xx;
  logic [YW-1:0] yy;
  logic [LW:0]   nl;
  logic [LW-1:0] l1, l2, lab, hi;
  logic          m1, m2, is_new, is_merge, is_ovf;

  always_comb begin
    xx = in_sof ? '0 : x;
    yy = in_sof ? '0 : y;
    nl = in_sof ? '0 : next_label;
    l1 = parent[lab_lb[xx]];
    l2 = parent[p2_lab];
    m1 = (yy != '0) && (cls_lb[xx] == in_class);
    m2 = (xx != '0) && (p2_cls == in_class);
    is_new   = 1'b0;
    is_merge = 1'b0;
    is_ovf   = 1'b0;
    hi       = '0;
    if (m1 && m2) begin
      if (l1 == l2) begin
        lab = l1;
      end else begin
        is_merge = 1'b1;
        lab      = (l1 < l2) ? l1 : l2;
        hi       = (l1 < l2) ? l2 : l1;
      end
    end else if (m1) begin
      lab = l1;
    end else if (m2) begin
      lab = l2;
    end else if (nl < (LW+1)'(LABELS)) begin
      lab    = nl[LW-1:0];
      is_new = 1'b1;
    end else begin
      lab    = LW'(LABELS - 1);
      is_ovf = 1'b1;
    end
  end

  // Buffers and equivalence table.
  always_ff @(posedge clk) begin
    if (in_valid) begin
      cls_lb[xx] <= in_class;
      lab_lb[xx] <= lab;
      p2_cls     <= in_class;
      p2_lab     <= lab;
      if (is_new)
        parent[lab] <= lab;
      if (is_merge)
        for (int i = 0; i < LABELS; i++)
          if (parent[i] == hi) parent[i] <= lab;
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      x          <= '0;
      y          <= '0;
      next_label <= '0;
      overflow   <= 1'b0;
      ev_valid   <= 1'b0;
      ev_new     <= 1'b0;
      ev_merge   <= 1'b0;
      ev_sof     <= 1'b0;
      ev_eof     <= 1'b0;
    end else begin
      ev_valid <= in_valid;
      ev_new   <= in_valid && is_new;
      ev_merge <= in_valid && is_merge;
      ev_sof   <= in_valid && in_sof;
      ev_eof   <= in_valid && (xx == XW'(W - 1)) && (yy == YW'(H - 1));
      if (in_valid) begin
        next_label <= nl + (LW+1)'(is_new);
        overflow   <= (in_sof ? 1'b0 : overflow) | is_ovf;
        if (xx == XW'(W - 1)) begin
          x <= '0;
          y <= yy + 1'b1;
        end else begin
          x <= xx + 1'b1;
          y <= yy;
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    if (in_valid) begin
      ev_x        <= xx;
      ev_y        <= yy;
      ev_class    <= in_class;
      ev_label    <= lab;
      ev_merge_hi <= hi;
    end
  end

endmodule
