// tb_gauss3x3 -- self-checking test of the 3x3 Gaussian filter.
//
// A 9 x 7 frame of random Cb/Cr values is streamed twice: first without gaps,
// then with random idle cycles, each time followed by the flush blanking. The
// output stream must reproduce the reference smoothing (binomial kernel /16,
// rounded, border pixels copied) pixel by pixel, with out_sof on the first and
// out_eof on the last pixel. On the gap-free frame the filter latency must be
// W+3 cycles: the first output is visible right after the (W+3)-th clock edge,
// counting the edge that takes the first pixel.
module tb_gauss3x3;
  import rsd_ref_pkg::*;
  localparam int unsigned W = 9, H = 7, R = 8;

  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_sof = 0;
  logic [R-1:0] in_cb, in_cr;
  logic out_valid, out_sof, out_eof, flushing;
  logic [R-1:0] out_cb, out_cr;
  int checks = 0, failures = 0;

  gauss3x3 #(.W(W), .H(H), .R(R)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  img_t cb, cr, ecb, ecr;
  int   outn = 0;
  int   cyc = 0, first_in = -1, first_out = -1;

  always @(posedge clk) cyc++;

  always @(negedge clk) begin
    if (out_valid) begin
      if (first_out < 0) first_out = cyc;
      checks++;
      if (out_cb !== R'(ecb[outn]) || out_cr !== R'(ecr[outn])) begin
        failures++;
        if (failures < 10) $display("pixel %0d: %0d/%0d expected %0d/%0d", outn, out_cb, out_cr, ecb[outn], ecr[outn]);
      end
      checks++;
      if (out_sof !== (outn == 0) || out_eof !== (outn == W*H-1)) failures++;
      outn++;
    end
  end

  task automatic send_frame(bit gaps);
    for (int i = 0; i < W * H; i++) begin
      @(negedge clk);
      while (gaps && ($urandom % 3 == 0)) begin
        in_valid = 0;
        @(negedge clk);
      end
      in_valid = 1; in_sof = (i == 0);
      in_cb = R'(cb[i]); in_cr = R'(cr[i]);
      if (i == 0 && first_in < 0) first_in = cyc + 1;  // edge that takes the pixel
    end
    @(negedge clk);
    in_valid = 0; in_sof = 0;
    repeat (W + 8) @(negedge clk);
  endtask

  initial begin
    cb = new[W*H]; cr = new[W*H];
    for (int frame = 0; frame < 2; frame++) begin
      foreach (cb[i]) begin cb[i] = $urandom % 256; cr[i] = $urandom % 256; end
      gauss_ref(W, H, cb, ecb);
      gauss_ref(W, H, cr, ecr);
      if (frame == 0) begin
        repeat (3) @(negedge clk);
        rst_n = 1;
      end
      outn = 0;
      send_frame(frame == 1);
      checks++;
      if (outn != W * H) begin
        failures++;
        $display("frame %0d: %0d pixels out, expected %0d", frame, outn, W*H);
      end
      if (frame == 0) begin
        checks++;
        if (first_out - first_in + 1 != W + 3) begin
          failures++;
          $display("latency %0d, expected %0d", first_out - first_in + 1, W + 3);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
