// tb_road_sign_full -- two complete 1000 x 630 frames (the second with idle gaps) through the road sign
// detector at its default configuration (1024 labels), checked stage by stage
// by rsd_tb_env against the reference model.
module tb_road_sign_full;
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

  rsd_tb_env #(.W(1000), .H(630), .NL(1024), .FRAMES(2), .NOISE_FRAME(0),
               .WATCHDOG(5_000_000)) env (
    .*, .merge_pulse(dut.u_label.ev_merge && dut.u_label.ev_valid));
endmodule
