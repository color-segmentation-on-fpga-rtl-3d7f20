// tb_sign_detector -- self-checking test of the rule-based sign detector.
//
// Directed records sit on every edge of the rule (area 200 and 201, width/
// height exactly 0.7 and 3, just inside both, wrong class), followed by
// random records. Each record's expected verdict comes from the rule evaluated
// in real arithmetic; a passing record must appear on sign_* one cycle later
// with its box, area and label unchanged, a failing one must not appear.
module tb_sign_detector;
  import rsd_ref_pkg::*;
  localparam int unsigned XW = 10, YW = 10, AW = 20, CLW = 2, LW = 10;

  logic clk = 0, rst_n = 0;
  logic comp_valid = 0;
  logic [LW-1:0] comp_label;
  logic [CLW-1:0] comp_class;
  logic [AW-1:0] comp_area;
  logic [XW-1:0] comp_x0, comp_x1;
  logic [YW-1:0] comp_y0, comp_y1;
  logic sign_valid;
  logic [LW-1:0] sign_label;
  logic [AW-1:0] sign_area;
  logic [XW-1:0] sign_x0, sign_x1;
  logic [YW-1:0] sign_y0, sign_y1;
  int checks = 0, failures = 0, accepted = 0, rejected = 0;

  sign_detector dut (.*);

  always #5 clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic apply(int cls, int area, int w, int h);
    comp_t c;
    bit exp;
    c.cls = cls; c.area = area;
    c.x0 = $urandom % 100; c.x1 = c.x0 + w - 1;
    c.y0 = $urandom % 100; c.y1 = c.y0 + h - 1;
    exp = is_sign_ref(c, 1);
    @(negedge clk);
    comp_valid = 1; comp_label = LW'($urandom); comp_class = CLW'(cls); comp_area = AW'(area);
    comp_x0 = XW'(c.x0); comp_x1 = XW'(c.x1); comp_y0 = YW'(c.y0); comp_y1 = YW'(c.y1);
    @(negedge clk);
    comp_valid = 0;
    checks++;
    if (sign_valid !== exp) begin
      failures++;
      $display("class %0d area %0d w %0d h %0d: verdict %0d expected %0d", cls, area, w, h, sign_valid, exp);
    end
    if (exp) begin
      accepted++;
      checks++;
      if (sign_x0 !== comp_x0 || sign_x1 !== comp_x1 || sign_y0 !== comp_y0 ||
          sign_y1 !== comp_y1 || sign_area !== comp_area || sign_label !== comp_label)
        failures++;
    end else rejected++;
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    apply(1, 200, 20, 20);   // area on the bound
    apply(1, 201, 20, 20);
    apply(1, 500, 7, 10);    // ratio exactly 0.7
    apply(1, 500, 71, 100);  // just above 0.7
    apply(1, 500, 30, 10);   // ratio exactly 3
    apply(1, 500, 29, 10);   // just below 3
    apply(0, 500, 20, 20);   // background
    apply(2, 500, 20, 20);   // red
    apply(3, 500, 20, 20);
    apply(1, 300, 1, 300);   // thin vertical
    for (int n = 0; n < 3000; n++)
      apply($urandom % 4, $urandom % 2000, 1 + $urandom % 120, 1 + $urandom % 120);
    $display("accepted %0d rejected %0d", accepted, rejected);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
