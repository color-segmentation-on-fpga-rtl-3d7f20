// tb_mdc_regfile -- self-checking test of the class-centre register file.
//
// Uses C = 3 classes of D = 2 dimensions (6 cells, 3-bit address, so addresses
// 6 and 7 are out of range). Random writes are mirrored in a testbench array;
// after every cycle all parallel outputs are compared with it. Writes with en
// low, with wr low or to an out-of-range address must leave the cells alone.
module tb_mdc_regfile;
  localparam int unsigned C = 3, D = 2, CW = 10, AW = 3;

  logic clk = 0, en, wr;
  logic [AW-1:0] addr;
  logic [CW-1:0] wdata;
  logic [C-1:0][D-1:0][CW-1:0] centres;
  int checks = 0, failures = 0;
  logic [CW-1:0] model [C*D];
  int writes_done = 0, blocked = 0;

  mdc_regfile #(.C(C), .D(D), .CW(CW), .AW(AW)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    en = 1; wr = 1;
    // fill every cell in order first
    for (int i = 0; i < C * D; i++) begin
      @(negedge clk);
      addr = AW'(i); wdata = CW'($urandom); model[i] = wdata;
    end
    @(negedge clk); wr = 0;
    for (int n = 0; n < 2000; n++) begin
      @(negedge clk);
      // check the previous cycle's effect
      for (int c = 0; c < C; c++)
        for (int d = 0; d < D; d++) begin
          checks++;
          if (centres[c][d] !== model[c*D+d]) begin
            failures++;
            if (failures < 10) $display("mismatch class %0d dim %0d: %0d vs %0d", c, d, centres[c][d], model[c*D+d]);
          end
        end
      en    = ($urandom % 4) != 0;
      wr    = ($urandom % 2) != 0;
      addr  = AW'($urandom);
      wdata = CW'($urandom);
      if (en && wr && addr < C * D) begin
        model[addr] = wdata;
        writes_done++;
      end else if (wr) begin
        blocked++;
      end
    end
    checks++;
    if (writes_done == 0 || blocked == 0) failures++;
    $display("writes %0d, blocked writes %0d", writes_done, blocked);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
