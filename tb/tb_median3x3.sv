// tb_median3x3 -- self-checking test of the 3x3 median filter.
//
// Frames of 2-bit class indices (8 x 6) are built from a few large blocks
// sprinkled with isolated noise pixels, streamed (second frame with random
// gaps) and flushed. Every output pixel must equal the reference median (5th
// of the 9 sorted neighbourhood values; border pixels copied), and the filter
// must actually change some pixels (removed noise), which is counted.
module tb_median3x3;
  import rsd_ref_pkg::*;
  localparam int unsigned W = 8, H = 6, PW = 2;

  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_sof = 0;
  logic [PW-1:0] in_pix, out_pix;
  logic out_valid, out_sof, out_eof, flushing;
  int checks = 0, failures = 0, changed = 0;

  median3x3 #(.W(W), .H(H), .PW(PW)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  img_t img, exp_img;
  int   outn = 0;

  always @(negedge clk) begin
    if (out_valid) begin
      checks++;
      if (out_pix !== PW'(exp_img[outn])) begin
        failures++;
        if (failures < 10) $display("pixel %0d: %0d expected %0d", outn, out_pix, exp_img[outn]);
      end
      checks++;
      if (out_sof !== (outn == 0) || out_eof !== (outn == W*H-1)) failures++;
      outn++;
    end
  end

  initial begin
    img = new[W*H];
    for (int frame = 0; frame < 4; frame++) begin
      for (int y = 0; y < H; y++)
        for (int x = 0; x < W; x++)
          img[y*W+x] = (x < W/2) ? ((y < H/2) ? 0 : 1) : ((y < 2) ? 2 : 3);
      for (int i = 0; i < 8; i++) img[$urandom % (W*H)] = $urandom % 4;
      if (frame == 3) foreach (img[i]) img[i] = $urandom % 4;
      median_ref(W, H, img, exp_img);
      foreach (img[i]) if (img[i] != exp_img[i]) changed++;
      if (frame == 0) begin
        repeat (3) @(negedge clk);
        rst_n = 1;
      end
      outn = 0;
      for (int i = 0; i < W * H; i++) begin
        @(negedge clk);
        while (frame > 0 && ($urandom % 3 == 0)) begin
          in_valid = 0;
          @(negedge clk);
        end
        in_valid = 1; in_sof = (i == 0); in_pix = PW'(img[i]);
      end
      @(negedge clk);
      in_valid = 0; in_sof = 0;
      repeat (W + 8) @(negedge clk);
      checks++;
      if (outn != W * H) failures++;
    end
    checks++;
    if (changed == 0) failures++;
    $display("pixels changed by the median %0d", changed);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
