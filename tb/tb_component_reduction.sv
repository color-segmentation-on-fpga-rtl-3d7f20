// tb_component_reduction -- small-component reduction by the two filters, at
// the default configuration (1000 x 630, 1024 labels).
//
// Streams one full-size road scene whose colour regions carry strong chroma
// noise (uniform, +/-12 on Cb and Cr) besides isolated pixels of
// random colour. rsd_tb_env checks every stage against the reference model as
// in the other end-to-end tests, and also counts the 4-connected components
// the same scene would give if it were classified without the Gaussian and
// median filters. The filtered count must be at least 90% smaller; about 95%
// is the reduction reported for real road images. This scene gives about
// 15000 components unfiltered and under 300 filtered. The environment prints
// the result line and ends the run; the watchdog here ends a run that hangs.
module tb_component_reduction;
  logic clk, rst_n, pix_valid, pix_sof, cfg_wr;
  logic [7:0] pix_cb, pix_cr, cfg_data;
  logic [2:0] cfg_addr;
  logic seg_valid, med_valid, lab_valid, label_overflow, comp_valid, frame_done, sign_valid;
  logic [1:0] seg_class, med_class, comp_class;
  logic [9:0] lab_x, comp_x0, comp_x1, sign_x0, sign_x1;
  logic [9:0] lab_y, comp_y0, comp_y1, sign_y0, sign_y1;
  logic [9:0] lab_label, comp_label, sign_label;
  logic [19:0] comp_area, sign_area;

  road_sign_detector dut (.*);

  rsd_tb_env #(.W(1000), .H(630), .NL(1024), .FRAMES(1), .NOISE_FRAME(0),
               .CHROMA_NOISE(12), .MIN_REDUCTION(90), .WATCHDOG(0)) env (
    .*, .merge_pulse(dut.u_label.ev_merge && dut.u_label.ev_valid));

  // watchdog: about 2.5 frame times
  initial begin
    repeat (1_600_000) @(posedge clk);
    env.failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", env.checks, env.failures);
    $finish;
  end
endmodule
