// tb_mdc_min_select -- self-checking test of the pairwise minimum tree.
//
// Two instances: C = 4 (the default, two levels) and C = 5 (three levels, with
// one distance delayed by a pass-through buffer on each level). Random
// distances from a small range produce many ties. Each result must appear
// ceil(log2 C) cycles after its inputs and name the smallest distance, the
// lowest class index on a tie.
module tb_mdc_min_select;
  localparam int unsigned CW = 10;

  logic clk = 0, en = 1;
  int checks = 0, failures = 0, ties = 0;

  logic [3:0][CW-1:0] d4;
  logic [4:0][CW-1:0] d5;
  logic [1:0] l4;
  logic [2:0] l5;
  logic [CW-1:0] m4, m5;

  mdc_min_select #(.C(4), .CW(CW)) dut4 (.clk, .en, .l1_dist(d4), .label(l4), .min_dist(m4));
  mdc_min_select #(.C(5), .CW(CW)) dut5 (.clk, .en, .l1_dist(d5), .label(l5), .min_dist(m5));

  always #5 clk = ~clk;

  initial begin
    #500000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int unsigned e4[$], e5[$], v4[$], v5[$];

  function automatic void ref_min(int unsigned d[], output int unsigned idx, output int unsigned val);
    idx = 0; val = d[0];
    for (int i = 1; i < d.size(); i++) if (d[i] < val) begin idx = i; val = d[i]; end
  endfunction

  always @(posedge clk) begin
    int unsigned a[], b[], i4, i5, mv4, mv5;
    a = new[4]; b = new[5];
    for (int i = 0; i < 4; i++) a[i] = d4[i];
    for (int i = 0; i < 5; i++) b[i] = d5[i];
    ref_min(a, i4, mv4);
    ref_min(b, i5, mv5);
    e4.push_back(i4); v4.push_back(mv4);
    e5.push_back(i5); v5.push_back(mv5);
  end

  initial begin
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      if (e4.size() >= 2) begin
        checks += 2;
        if (l4 !== 2'(e4[e4.size()-2]) || m4 !== CW'(v4[v4.size()-2])) begin
          failures++;
          if (failures < 10) $display("C=4: label %0d dist %0d, expected %0d %0d", l4, m4, e4[e4.size()-2], v4[v4.size()-2]);
        end
      end
      if (e5.size() >= 3) begin
        checks += 2;
        if (l5 !== 3'(e5[e5.size()-3]) || m5 !== CW'(v5[v5.size()-3])) begin
          failures++;
          if (failures < 10) $display("C=5: label %0d dist %0d, expected %0d %0d", l5, m5, e5[e5.size()-3], v5[v5.size()-3]);
        end
      end
      for (int i = 0; i < 5; i++) begin
        d5[i] = CW'((n % 3 == 0) ? $urandom % 4 : $urandom % 1024);
        if (i < 4) d4[i] = CW'((n % 3 == 0) ? $urandom % 4 : $urandom % 1024);
      end
      if (n % 3 == 0) ties++;
    end
    $display("tie-prone vectors %0d", ties);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
