// sign_detector -- rule-based road sign detection on component features.
//
// A component is reported as a road sign when
//   its class is the yellow class,
//   its area is larger than MIN_AREA pixels, and
//   its bounding-box width w and height h satisfy 0.7 < w/h < 3,
// which is evaluated without division as 10*w > 7*h and w < 3*h (constant
// multiplications, i.e. shifts and adds). The rule and its three thresholds
// are the published ones; the lower ratio bound keeps the inside of a yellow
// "0" digit from counting as a sign.
//
// Timing: one component per cycle; a component that passes the rule appears on
// sign_* one cycle after it was presented on comp_*.
module sign_detector #(
  parameter int unsigned XW           = $clog2(rsd_pkg::IMG_W),
  parameter int unsigned YW           = $clog2(rsd_pkg::IMG_H),
  parameter int unsigned AW           = $clog2(rsd_pkg::IMG_W * rsd_pkg::IMG_H + 1),
  parameter int unsigned CLW          = $clog2(rsd_pkg::MDC_C),
  parameter int unsigned LW           = $clog2(rsd_pkg::LABELS),
  parameter int unsigned SIGN_CLASS   = rsd_pkg::CLASS_YELLOW,
  parameter int unsigned MIN_AREA     = rsd_pkg::MIN_AREA,
  parameter int unsigned RATIO_LO_NUM = rsd_pkg::RATIO_LO_NUM,
  parameter int unsigned RATIO_LO_DEN = rsd_pkg::RATIO_LO_DEN,
  parameter int unsigned RATIO_HI     = rsd_pkg::RATIO_HI
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           comp_valid,
  input  logic [LW-1:0]  comp_label,
  input  logic [CLW-1:0] comp_class,
  input  logic [AW-1:0]  comp_area,
  input  logic [XW-1:0]  comp_x0,
  input  logic [XW-1:0]  comp_x1,
  input  logic [YW-1:0]  comp_y0,
  input  logic [YW-1:0]  comp_y1,
  output logic           sign_valid,
  output logic [LW-1:0]  sign_label,
  output logic [AW-1:0]  sign_area,
  output logic [XW-1:0]  sign_x0,
  output logic [XW-1:0]  sign_x1,
  output logic [YW-1:0]  sign_y0,
  output logic [YW-1:0]  sign_y1
);

  logic [31:0] w, h;
  logic        is_sign;

  always_comb begin
    w = 32'(comp_x1) - 32'(comp_x0) + 32'd1;
    h = 32'(comp_y1) - 32'(comp_y0) + 32'd1;
    is_sign = (comp_class == CLW'(SIGN_CLASS))
           && (32'(comp_area) > MIN_AREA)
           && (w * RATIO_LO_DEN > h * RATIO_LO_NUM)
           && (w < h * RATIO_HI);
  end

  always_ff @(posedge clk) begin
    if (!rst_n) sign_valid <= 1'b0;
    else        sign_valid <= comp_valid && is_sign;
  end

  always_ff @(posedge clk) begin
    if (comp_valid) begin
      sign_label <= comp_label;
      sign_area  <= comp_area;
      sign_x0    <= comp_x0;
      sign_x1    <= comp_x1;
      sign_y0    <= comp_y0;
      sign_y1    <= comp_y1;
    end
  end

endmodule
