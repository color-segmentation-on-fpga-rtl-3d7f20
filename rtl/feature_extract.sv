// feature_extract -- per-component features of the labeled image.
//
// Consumes the event stream of mcl_labeler and keeps, for every label, the
// class, the area (pixel count) and the bounding box (x0, x1, y0, y1) of its
// component. A new label starts a record from its first pixel; a pixel joins
// the record of its label; a merge folds the retired label's record into the
// surviving one (areas add, boxes unite) and marks the retired record dead.
// One event is handled per cycle.
//
// After the frame's last pixel (ev_eof) the table is read out: for as many
// cycles as labels were used in the frame, every live record is presented
// on comp_* with comp_valid high, in label order, and frame_done pulses after
// the last one. No event may arrive during this read-out (`busy`), so the
// frame blanking must cover it: at most LABELS+2 cycles after ev_eof.
//
// The published design measures the area and the extent (width and height) of
// every labeled colour component and their colour; this record layout and the
// end-of-frame read-out are this design's own.
module feature_extract #(
  parameter int unsigned W      = rsd_pkg::IMG_W,
  parameter int unsigned H      = rsd_pkg::IMG_H,
  parameter int unsigned CLW    = $clog2(rsd_pkg::MDC_C),
  parameter int unsigned LABELS = rsd_pkg::LABELS,
  parameter int unsigned LW     = $clog2(LABELS),
  parameter int unsigned XW     = $clog2(W),
  parameter int unsigned YW     = $clog2(H),
  parameter int unsigned AW     = $clog2(W * H + 1)
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           ev_valid,
  input  logic           ev_sof,
  input  logic           ev_eof,
  input  logic [XW-1:0]  ev_x,
  input  logic [YW-1:0]  ev_y,
  input  logic [CLW-1:0] ev_class,
  input  logic [LW-1:0]  ev_label,
  input  logic           ev_new,
  input  logic           ev_merge,
  input  logic [LW-1:0]  ev_merge_hi,
  output logic           comp_valid,
  output logic [LW-1:0]  comp_label,
  output logic [CLW-1:0] comp_class,
  output logic [AW-1:0]  comp_area,
  output logic [XW-1:0]  comp_x0,
  output logic [XW-1:0]  comp_x1,
  output logic [YW-1:0]  comp_y0,
  output logic [YW-1:0]  comp_y1,
  output logic           frame_done,
  output logic           busy
);

  logic [CLW-1:0] f_cls  [LABELS];
  logic [AW-1:0]  f_area [LABELS];
  logic [XW-1:0]  f_x0   [LABELS];
  logic [XW-1:0]  f_x1   [LABELS];
  logic [YW-1:0]  f_y0   [LABELS];
  logic [YW-1:0]  f_y1   [LABELS];
  logic           alive  [LABELS];

  logic [LW:0]    count;       // labels used in the current frame
  logic [LW:0]    scan_idx;
  logic [LW:0]    scan_n;

  function automatic logic [XW-1:0] xmin(logic [XW-1:0] a, logic [XW-1:0] b);
    return (a < b) ? a : b;
  endfunction
  function automatic logic [XW-1:0] xmax(logic [XW-1:0] a, logic [XW-1:0] b);
    return (a > b) ? a : b;
  endfunction
  function automatic logic [YW-1:0] ymin(logic [YW-1:0] a, logic [YW-1:0] b);
    return (a < b) ? a : b;
  endfunction
  function automatic logic [YW-1:0] ymax(logic [YW-1:0] a, logic [YW-1:0] b);
    return (a > b) ? a : b;
  endfunction

  // Feature table updates.
  always_ff @(posedge clk) begin
    if (ev_valid) begin
      if (ev_new) begin
        f_cls[ev_label]  <= ev_class;
        f_area[ev_label] <= AW'(1);
        f_x0[ev_label]   <= ev_x;
        f_x1[ev_label]   <= ev_x;
        f_y0[ev_label]   <= ev_y;
        f_y1[ev_label]   <= ev_y;
        alive[ev_label]  <= 1'b1;
      end else if (ev_merge) begin
        f_area[ev_label] <= f_area[ev_label] + f_area[ev_merge_hi] + 1'b1;
        f_x0[ev_label]   <= xmin(xmin(f_x0[ev_label], f_x0[ev_merge_hi]), ev_x);
        f_x1[ev_label]   <= xmax(xmax(f_x1[ev_label], f_x1[ev_merge_hi]), ev_x);
        f_y0[ev_label]   <= ymin(ymin(f_y0[ev_label], f_y0[ev_merge_hi]), ev_y);
        f_y1[ev_label]   <= ymax(ymax(f_y1[ev_label], f_y1[ev_merge_hi]), ev_y);
        alive[ev_merge_hi] <= 1'b0;
      end else begin
        f_area[ev_label] <= f_area[ev_label] + 1'b1;
        f_x0[ev_label]   <= xmin(f_x0[ev_label], ev_x);
        f_x1[ev_label]   <= xmax(f_x1[ev_label], ev_x);
        f_y0[ev_label]   <= ymin(f_y0[ev_label], ev_y);
        f_y1[ev_label]   <= ymax(f_y1[ev_label], ev_y);
      end
    end
  end

  // Label count and end-of-frame read-out.
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      count      <= '0;
      scan_idx   <= '0;
      scan_n     <= '0;
      busy       <= 1'b0;
      comp_valid <= 1'b0;
      frame_done <= 1'b0;
    end else begin
      comp_valid <= 1'b0;
      frame_done <= 1'b0;
      if (ev_valid) begin
        if (ev_new)      count <= (LW+1)'(ev_label) + 1'b1;
        else if (ev_sof) count <= '0;
        if (ev_eof) begin
          busy     <= 1'b1;
          scan_idx <= '0;
          scan_n   <= ev_new ? (LW+1)'(ev_label) + 1'b1 : count;
        end
      end else if (busy) begin
        if (scan_idx == scan_n) begin
          busy       <= 1'b0;
          frame_done <= 1'b1;
        end else begin
          comp_valid <= alive[scan_idx[LW-1:0]];
          scan_idx   <= scan_idx + 1'b1;
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    if (busy && !ev_valid && scan_idx != scan_n) begin
      comp_label <= scan_idx[LW-1:0];
      comp_class <= f_cls[scan_idx[LW-1:0]];
      comp_area  <= f_area[scan_idx[LW-1:0]];
      comp_x0    <= f_x0[scan_idx[LW-1:0]];
      comp_x1    <= f_x1[scan_idx[LW-1:0]];
      comp_y0    <= f_y0[scan_idx[LW-1:0]];
      comp_y1    <= f_y1[scan_idx[LW-1:0]];
    end
  end

  // The read-out needs frame blanking: no pixel event while it runs.
  a_no_event_in_readout: assert property (@(posedge clk) disable iff (!rst_n) busy |-> !ev_valid)
    else $error("feature_extract: pixel event during read-out");

endmodule
