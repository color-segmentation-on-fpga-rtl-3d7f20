// road_sign_detector -- colour-segmentation road sign detector, whole pipeline.
//
// A camera's Cb/Cr pixel stream (luma is not used, which decouples the
// segmentation from lighting) passes through
//   gauss3x3           3x3 Gaussian smoothing of Cb and Cr
//   mdc                minimum distance classifier: nearest of C class centres
//                      under the L1 distance, one pixel per cycle
//   median3x3          3x3 median filter on the class image
//   mcl_labeler        single-pass multi-class 4-connected component labeling
//   feature_extract    class, area and bounding box per component
//   sign_detector      yellow, area > 200, 0.7 < width/height < 3
// in the order of the published system. Every stage accepts one pixel per
// clock, so a 1000 x 630 frame takes 630 000 cycles plus blanking.
//
// Interface
//   pix_valid/pix_sof/pix_cb/pix_cr   input raster stream, pix_sof on the
//                                     first pixel of a frame
//   cfg_wr/cfg_addr/cfg_data          class-centre programming port of the
//                                     classifier: cell class*D + dim (dim 0 =
//                                     Cb, dim 1 = Cr); write all C*D cells
//                                     while no frame is in flight
//   seg_*                             classifier output (segmented image)
//   med_*                             median-filtered class image
//   lab_*                             label of every pixel (labeled image)
//   comp_*                            component records after each frame
//   sign_*                            components that pass the sign rule
//   frame_done                        pulse after the last component record
//   label_overflow                    more components than LABELS this frame
//
// Timing. A latency of L cycles means the result is visible right after the
// L-th clock edge, counting the edge that takes the input. A pixel's class
// leaves the classifier W+3 + 3*D+ceil(log2 C) cycles after the pixel entered
// (Gaussian window, then classifier); its median value W+3 cycles after that
// and its label one cycle later still. Between frames the source must stay
// idle while the filters flush (W+1 cycles each) and the feature table is
// read out (up to LABELS+2 cycles); a gap of 2*(W+1) + 3*D + ceil(log2 C) +
// LABELS + 8 idle cycles always suffices. The filters and the feature table
// assert that no pixel arrives too early.
//
// The stage order, the classifier and the sign rule follow the published
// design; the framing, the blanking rule and the output ports are this
// design's own. The classifier's enable is tied high: the stream has no stall.
module road_sign_detector
  import rsd_pkg::*;
#(
  parameter int unsigned W       = IMG_W,
  parameter int unsigned H       = IMG_H,
  parameter int unsigned R       = PIX_R,
  parameter int unsigned C       = MDC_C,
  parameter int unsigned NLABELS = LABELS,
  localparam int unsigned D      = 2,                 // Cb and Cr
  localparam int unsigned CW     = R + 2,
  localparam int unsigned CAW    = $clog2(C * D),
  localparam int unsigned CLW    = $clog2(C),
  localparam int unsigned LW     = $clog2(NLABELS),
  localparam int unsigned XW     = $clog2(W),
  localparam int unsigned YW     = $clog2(H),
  localparam int unsigned AW     = $clog2(W * H + 1)
) (
  input  logic           clk,
  input  logic           rst_n,
  // camera stream
  input  logic           pix_valid,
  input  logic           pix_sof,
  input  logic [R-1:0]   pix_cb,
  input  logic [R-1:0]   pix_cr,
  // classifier programming
  input  logic           cfg_wr,
  input  logic [CAW-1:0] cfg_addr,
  input  logic [R-1:0]   cfg_data,
  // segmented image
  output logic           seg_valid,
  output logic [CLW-1:0] seg_class,
  output logic           med_valid,
  output logic [CLW-1:0] med_class,
  // labeled image
  output logic           lab_valid,
  output logic [XW-1:0]  lab_x,
  output logic [YW-1:0]  lab_y,
  output logic [LW-1:0]  lab_label,
  output logic           label_overflow,
  // component features
  output logic           comp_valid,
  output logic [LW-1:0]  comp_label,
  output logic [CLW-1:0] comp_class,
  output logic [AW-1:0]  comp_area,
  output logic [XW-1:0]  comp_x0,
  output logic [XW-1:0]  comp_x1,
  output logic [YW-1:0]  comp_y0,
  output logic [YW-1:0]  comp_y1,
  output logic           frame_done,
  // detected signs
  output logic           sign_valid,
  output logic [LW-1:0]  sign_label,
  output logic [AW-1:0]  sign_area,
  output logic [XW-1:0]  sign_x0,
  output logic [XW-1:0]  sign_x1,
  output logic [YW-1:0]  sign_y0,
  output logic [YW-1:0]  sign_y1
);

  localparam int unsigned MDC_LAT = 3 * D + $clog2(C);

  // ---- 3x3 Gaussian filter on Cb, Cr ---------------------------------------
  logic         g_valid, g_sof, g_eof, g_flush;
  logic [R-1:0] g_cb, g_cr;

  gauss3x3 #(.W(W), .H(H), .R(R)) u_gauss (
    .clk, .rst_n, .in_valid(pix_valid), .in_sof(pix_sof),
    .in_cb(pix_cb), .in_cr(pix_cr),
    .out_valid(g_valid), .out_sof(g_sof), .out_eof(g_eof),
    .out_cb(g_cb), .out_cr(g_cr), .flushing(g_flush)
  );

  // ---- minimum distance classifier ------------------------------------------
  logic [CW*D-1:0] mdc_in;
  logic [2:0]      seg_flags;
  logic            seg_sof, seg_eof;

  assign mdc_in = cfg_wr ? (CW*D)'(cfg_data)
                         : {CW'(g_cr), CW'(g_cb)};

  mdc #(.R(R), .D(D), .C(C)) u_mdc (
    .clk, .en(1'b1), .wr(cfg_wr), .addr(cfg_addr),
    .data_in(mdc_in), .label_out(seg_class)
  );

  delay_line #(.N(MDC_LAT), .DW(3)) u_mdc_flags (
    .clk, .rst_n, .din({g_eof, g_sof, g_valid && !cfg_wr}),
    .dout(seg_flags)
  );
  assign seg_valid = seg_flags[0];
  assign seg_sof   = seg_flags[1];
  assign seg_eof   = seg_flags[2];

  // ---- 3x3 median filter on the class image ---------------------------------
  logic m_sof, m_eof, m_flush;

  median3x3 #(.W(W), .H(H), .PW(CLW)) u_median (
    .clk, .rst_n, .in_valid(seg_valid), .in_sof(seg_sof), .in_pix(seg_class),
    .out_valid(med_valid), .out_sof(m_sof), .out_eof(m_eof),
    .out_pix(med_class), .flushing(m_flush)
  );

  // ---- multi-class component labeling ----------------------------------------
  logic           ev_sof, ev_eof, ev_new, ev_merge;
  logic [CLW-1:0] ev_class;
  logic [LW-1:0]  ev_hi;

  mcl_labeler #(.W(W), .H(H), .CLW(CLW), .LABELS(NLABELS)) u_label (
    .clk, .rst_n, .in_valid(med_valid), .in_sof(m_sof), .in_class(med_class),
    .ev_valid(lab_valid), .ev_sof, .ev_eof, .ev_x(lab_x), .ev_y(lab_y),
    .ev_class, .ev_label(lab_label), .ev_new, .ev_merge, .ev_merge_hi(ev_hi),
    .overflow(label_overflow)
  );

  // ---- feature extraction ------------------------------------------------------
  logic fe_busy;

  feature_extract #(.W(W), .H(H), .CLW(CLW), .LABELS(NLABELS)) u_feat (
    .clk, .rst_n, .ev_valid(lab_valid), .ev_sof, .ev_eof, .ev_x(lab_x), .ev_y(lab_y),
    .ev_class, .ev_label(lab_label), .ev_new, .ev_merge, .ev_merge_hi(ev_hi),
    .comp_valid, .comp_label, .comp_class, .comp_area,
    .comp_x0, .comp_x1, .comp_y0, .comp_y1, .frame_done, .busy(fe_busy)
  );

  // ---- rule-based detection ------------------------------------------------------
  sign_detector #(.XW(XW), .YW(YW), .AW(AW), .CLW(CLW), .LW(LW)) u_detect (
    .clk, .rst_n, .comp_valid, .comp_label, .comp_class, .comp_area,
    .comp_x0, .comp_x1, .comp_y0, .comp_y1,
    .sign_valid, .sign_label, .sign_area,
    .sign_x0, .sign_x1, .sign_y0, .sign_y1
  );

  // Flags used only by the assertions inside the stages.
  logic unused_flags;
  assign unused_flags = ^{g_flush, m_flush, m_eof, seg_eof, fe_busy};

endmodule
