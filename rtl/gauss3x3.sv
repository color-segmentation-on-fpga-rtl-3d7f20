// gauss3x3 -- 3x3 Gaussian smoothing of the Cb and Cr channels.
//
// Each chroma channel is convolved with the binomial kernel
//     1 2 1
//     2 4 2   / 16
//     1 2 1
// and rounded to nearest ((sum + 8) >> 4), using only shifts and adds. The
// window comes from window3x3, so the output is a raster stream of the same
// size: out_valid/out_sof/out_eof frame it and the pixel at (x, y) leaves
// W+3 cycles after it entered when the input has no gaps (one cycle for this
// stage's output register). After the last input pixel the filter needs W+1
// idle cycles to flush its last row. Pixels on the image border pass through
// unfiltered.
//
// The published design asks for a 3x3 Gaussian filter on Cb and Cr to suppress
// pixel noise before classification; the kernel weights, the rounding and the
// border rule are this design's own choices.
module gauss3x3 #(
  parameter int unsigned W = rsd_pkg::IMG_W,
  parameter int unsigned H = rsd_pkg::IMG_H,
  parameter int unsigned R = rsd_pkg::PIX_R
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         in_valid,
  input  logic         in_sof,
  input  logic [R-1:0] in_cb,
  input  logic [R-1:0] in_cr,
  output logic         out_valid,
  output logic         out_sof,
  output logic         out_eof,
  output logic [R-1:0] out_cb,
  output logic [R-1:0] out_cr,
  output logic         flushing
);

  logic                      wv, wsof, weof, wborder;
  logic [2:0][2:0][2*R-1:0]  win;

  window3x3 #(.W(W), .H(H), .PW(2 * R)) u_win (
    .clk, .rst_n, .in_valid, .in_sof, .in_pix({in_cr, in_cb}),
    .win_valid(wv), .win_sof(wsof), .win_eof(weof), .win_border(wborder),
    .win, .flushing
  );

  // Weighted 3x3 sum of one channel (ch = 0: Cb, ch = 1: Cr), rounded /16.
  function automatic logic [R-1:0] smooth(logic [2:0][2:0][2*R-1:0] w, int ch);
    logic [R+3:0] s;
    s = '0;
    for (int r = 0; r < 3; r++)
      for (int c = 0; c < 3; c++) begin
        logic [R+3:0] p;
        p = (R+4)'(w[r][c][ch*R +: R]);
        s = s + (p << ((r == 1 ? 1 : 0) + (c == 1 ? 1 : 0)));
      end
    s = s + (R+4)'(8);
    return s[R+3:4];
  endfunction

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_sof   <= 1'b0;
      out_eof   <= 1'b0;
    end else begin
      out_valid <= wv;
      out_sof   <= wsof;
      out_eof   <= weof;
    end
  end

  always_ff @(posedge clk) begin
    if (wv) begin
      if (wborder) begin
        out_cb <= win[1][1][R-1:0];
        out_cr <= win[1][1][2*R-1:R];
      end else begin
        out_cb <= smooth(win, 0);
        out_cr <= smooth(win, 1);
      end
    end
  end

endmodule
