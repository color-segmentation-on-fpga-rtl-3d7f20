// tb_mdc_distance_pipe -- self-checking test of one distance pipeline.
//
// Two instances: the default (D = 2) and D = 4, the largest number of
// dimensions whose sum the R+2-bit cells hold exactly. Random 8-bit vectors are
// fed while en toggles at random; the testbench records the expected L1
// distance of every vector accepted with en high and checks that it appears on
// the output after exactly 3*D enabled cycles.
module tb_mdc_distance_pipe;
  localparam int unsigned CW = 10;

  logic clk = 0, en;
  int checks = 0, failures = 0;
  int stalls = 0;

  logic [1:0][CW-1:0] x2, u2;
  logic [3:0][CW-1:0] x4, u4;
  logic [CW-1:0]      d2, d4;

  mdc_distance_pipe #(.D(2), .CW(CW)) dut2 (.clk, .en, .x(x2), .centre(u2), .l1_dist(d2));
  mdc_distance_pipe #(.D(4), .CW(CW)) dut4 (.clk, .en, .x(x4), .centre(u4), .l1_dist(d4));

  always #5 clk = ~clk;

  initial begin
    #500000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int unsigned l1(logic [3:0][CW-1:0] x, logic [3:0][CW-1:0] u, int d);
    int unsigned s = 0;
    for (int k = 0; k < d; k++) s += (x[k] > u[k]) ? x[k] - u[k] : u[k] - x[k];
    return s;
  endfunction

  int unsigned h2[$], h4[$];

  always @(posedge clk) begin
    if (en) begin
      h2.push_back(l1({20'b0, x2}, {20'b0, u2}, 2));
      h4.push_back(l1(x4, u4, 4));
    end
  end

  initial begin
    for (int k = 0; k < 4; k++) begin
      u4[k] = CW'($urandom % 256);
      if (k < 2) u2[k] = CW'($urandom % 256);
    end
    en = 0;
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      if (h2.size() >= 6) begin
        checks++;
        if (d2 !== CW'(h2[h2.size() - 6])) begin
          failures++;
          if (failures < 10) $display("D=2 mismatch: %0d vs %0d", d2, h2[h2.size()-6]);
        end
      end
      if (h4.size() >= 12) begin
        checks++;
        if (d4 !== CW'(h4[h4.size() - 12])) begin
          failures++;
          if (failures < 10) $display("D=4 mismatch: %0d vs %0d", d4, h4[h4.size()-12]);
        end
      end
      en = (n < 100) ? 1'b1 : (($urandom % 5) != 0);
      if (!en) stalls++;
      for (int k = 0; k < 4; k++) begin
        x4[k] = CW'($urandom % 256);
        if (k < 2) x2[k] = CW'($urandom % 256);
      end
      // extreme values now and then
      if (n % 50 == 7) begin x2 = '0; x4 = '0; end
      if (n % 50 == 9) begin x2 = {2{CW'(255)}}; x4 = {4{CW'(255)}}; end
    end
    checks++;
    if (stalls == 0) failures++;
    $display("stall cycles %0d", stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
