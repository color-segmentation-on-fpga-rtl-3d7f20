// tb_road_sign_detector -- end-to-end test of the road sign detector at a
// reduced size: 64 x 48 frames and a 64-entry label table, three frames (the
// last one pure colour noise that overflows the label table). The checks are
// those of rsd_tb_env.
module tb_road_sign_detector;
  localparam int unsigned W = 64, H = 48, NL = 64;

  logic clk, rst_n, pix_valid, pix_sof, cfg_wr;
  logic [7:0] pix_cb, pix_cr, cfg_data;
  logic [2:0] cfg_addr;
  logic seg_valid, med_valid, lab_valid, label_overflow, comp_valid, frame_done, sign_valid;
  logic [1:0] seg_class, med_class, comp_class;
  logic [5:0] lab_x, comp_x0, comp_x1, sign_x0, sign_x1;
  logic [5:0] lab_y, comp_y0, comp_y1, sign_y0, sign_y1;
  logic [5:0] lab_label, comp_label, sign_label;
  logic [11:0] comp_area, sign_area;

  road_sign_detector #(.W(W), .H(H), .NLABELS(NL)) dut (.*);

  rsd_tb_env #(.W(W), .H(H), .NL(NL), .FRAMES(3), .NOISE_FRAME(1)) env (
    .*, .merge_pulse(dut.u_label.ev_merge && dut.u_label.ev_valid));
endmodule
