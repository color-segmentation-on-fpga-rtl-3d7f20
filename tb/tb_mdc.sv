// tb_mdc -- self-checking test of the minimum distance classifier.
//
// Instance A has the default configuration (R = 8, D = 2 for Cb/Cr, C = 4) and
// is programmed through its memory-like port with the four class centres of
// the published colour classes. Instance B is regenerated with R = 6, D = 3,
// C = 5 and random centres, to exercise the generic dimension and class count
// (three processes per pipeline, an odd class count in the minimum tree).
// Random vectors, vectors near a centre and exact centres are classified while
// en is dropped at random; each class index must appear exactly
// 3*D + ceil(log2 C) enabled cycles after its vector (8 for A, 12 for B) and
// equal the nearest centre under L1, lowest index on ties.
module tb_mdc;
  import rsd_pkg::*;
  import rsd_ref_pkg::*;

  localparam int unsigned RB = 6, DB = 3, CB = 5;

  logic clk = 0, en, wr;
  int checks = 0, failures = 0, stalls = 0;

  // instance A
  logic [2:0]  addr_a;
  logic [19:0] in_a;
  logic [1:0]  lab_a;
  // instance B
  logic [3:0]  addr_b;
  logic [23:0] in_b;
  logic [2:0]  lab_b;

  mdc dut_a (.clk, .en, .wr, .addr(addr_a), .data_in(in_a), .label_out(lab_a));
  mdc #(.R(RB), .D(DB), .C(CB)) dut_b (.clk, .en, .wr, .addr(addr_b), .data_in(in_b), .label_out(lab_b));

  always #5 clk = ~clk;

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int unsigned cen_a[][], cen_b[][];
  int unsigned exp_a[$], exp_b[$];
  bit          classifying = 0;

  always @(posedge clk) begin
    if (en && classifying) begin
      int unsigned va[], vb[];
      va = new[2]; vb = new[DB];
      for (int k = 0; k < 2; k++)  va[k] = in_a[k*10 +: 10];
      for (int k = 0; k < DB; k++) vb[k] = in_b[k*8 +: 8];
      exp_a.push_back(nearest_ref(va, cen_a));
      exp_b.push_back(nearest_ref(vb, cen_b));
    end
  end

  initial begin
    cen_a = new[MDC_C];
    foreach (cen_a[c]) begin
      cen_a[c] = new[MDC_D];
      foreach (cen_a[c][k]) cen_a[c][k] = CLASS_CENTRES[c][k];
    end
    cen_b = new[CB];
    foreach (cen_b[c]) begin
      cen_b[c] = new[DB];
      foreach (cen_b[c][k]) cen_b[c][k] = $urandom % (1 << RB);
    end

    // programming phase: cell index = class*D + dimension
    en = 1; wr = 1;
    for (int i = 0; i < CB * DB; i++) begin
      @(negedge clk);
      addr_a = 3'(i % 8);
      in_a   = 20'(cen_a[(i % 8) / 2][(i % 8) % 2]);
      addr_b = 4'(i);
      in_b   = 24'(cen_b[i / DB][i % DB]);
    end
    @(negedge clk);
    wr = 0;
    classifying = 1;

    for (int n = 0; n < 4000; n++) begin
      int mode;
      @(negedge clk);
      classifying = 1;
      if (exp_a.size() >= 8 && exp_a.size() >= 12) begin
        checks += 2;
        if (lab_a !== 2'(exp_a[exp_a.size()-8])) begin
          failures++;
          if (failures < 10) $display("A: label %0d, expected %0d", lab_a, exp_a[exp_a.size()-8]);
        end
        if (lab_b !== 3'(exp_b[exp_b.size()-12])) begin
          failures++;
          if (failures < 10) $display("B: label %0d, expected %0d", lab_b, exp_b[exp_b.size()-12]);
        end
      end
      en = (n < 50) ? 1'b1 : (($urandom % 6) != 0);
      if (!en) stalls++;
      mode = $urandom % 3;
      in_a = '0;
      in_b = '0;
      for (int k = 0; k < 2; k++) begin
        int v;
        if (mode == 0)      v = $urandom % 256;
        else if (mode == 1) v = int'(cen_a[n % MDC_C][k]) + int'($urandom % 21) - 10;
        else                v = cen_a[n % MDC_C][k];
        if (v < 0) v = 0;
        if (v > 255) v = 255;
        in_a[k*10 +: 10] = 10'(v);
      end
      for (int k = 0; k < DB; k++)
        in_b[k*8 +: 8] = (mode == 2) ? 8'(cen_b[n % CB][k]) : 8'($urandom % (1 << RB));
    end
    checks++;
    if (stalls == 0) failures++;
    $display("stall cycles %0d, vectors classified %0d", stalls, exp_a.size());
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
