// window3x3 -- 3x3 neighbourhood generator for a raster pixel stream.
//
// Pixels arrive in raster order, one per cycle at most, marked by in_valid;
// in_sof marks the first pixel of a frame and restarts the frame counters.
// Two line buffers of W pixels hold the two previous rows. Every accepted
// pixel shifts one column {row y-2, row y-1, row y} into a 3x3 register
// window, so after step k (pixel index k of the frame) the window is centred
// on pixel k-(W+1). win[r][c] holds row r (0 = top) and column c (0 = left);
// the centre is win[1][1].
//
// After the last pixel of a frame the generator flushes itself: for W+1 more
// cycles it steps on its own, feeding don't-care pixels, so that the last row
// of centres also comes out. in_valid must stay low during those W+1 cycles
// (frame blanking); `flushing` shows them. win_valid marks a valid centre,
// win_sof/win_eof its first and last centre of the frame and win_border a
// centre on the image border, whose window reaches outside the image (the
// filters pass such centres through unchanged). The window and win_valid are
// registered together by the step that completes the window, W+2 cycles
// after the centre pixel itself when the stream has no gaps.
//
// This helper is this design's own: the published design names 3x3 filters
// but not how their windows are formed.
module window3x3 #(
  parameter int unsigned W  = rsd_pkg::IMG_W,
  parameter int unsigned H  = rsd_pkg::IMG_H,
  parameter int unsigned PW = 16
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      in_valid,
  input  logic                      in_sof,
  input  logic [PW-1:0]             in_pix,
  output logic                      win_valid,
  output logic                      win_sof,
  output logic                      win_eof,
  output logic                      win_border,
  output logic [2:0][2:0][PW-1:0]   win,
  output logic                      flushing
);

  localparam int unsigned N    = W * H;
  localparam int unsigned KMAX = N + W + 1;            // idle value of k
  localparam int unsigned KW   = $clog2(KMAX + 1);
  localparam int unsigned XW   = $clog2(W);
  localparam int unsigned YW   = $clog2(H);

  logic [KW-1:0] k;          // index of the next step
  logic [XW-1:0] ix;         // column of the next step
  logic [XW-1:0] cx;         // centre column
  logic [YW-1:0] cy;         // centre row
  logic [PW-1:0] lb0 [W];    // row y-1
  logic [PW-1:0] lb1 [W];    // row y-2

  logic          restart, step;
  logic [KW-1:0] kk;
  logic [XW-1:0] xx;
  logic [PW-1:0] newpix;

  assign flushing = (k >= KW'(N)) && (k < KW'(KMAX));
  assign restart  = in_valid && in_sof;
  assign step     = restart || (in_valid && (k < KW'(N))) || flushing;
  assign kk       = restart ? '0 : k;
  assign xx       = restart ? '0 : ix;
  assign newpix   = flushing ? '0 : in_pix;

  always_ff @(posedge clk) begin
    if (step) begin
      lb0[xx] <= newpix;
      lb1[xx] <= lb0[xx];
      for (int r = 0; r < 3; r++) begin
        win[r][0] <= win[r][1];
        win[r][1] <= win[r][2];
      end
      win[0][2] <= lb1[xx];
      win[1][2] <= lb0[xx];
      win[2][2] <= newpix;
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      k         <= KW'(KMAX);
      ix        <= '0;
      cx        <= '0;
      cy        <= '0;
      win_valid <= 1'b0;
    end else begin
      win_valid <= step && (kk >= KW'(W + 1));
      if (step) begin
        k  <= kk + 1'b1;
        ix <= (xx == XW'(W - 1)) ? '0 : xx + 1'b1;
        if (kk == KW'(W + 1)) begin
          cx <= '0;
          cy <= '0;
        end else if (kk > KW'(W + 1)) begin
          if (cx == XW'(W - 1)) begin
            cx <= '0;
            cy <= cy + 1'b1;
          end else begin
            cx <= cx + 1'b1;
          end
        end
      end
    end
  end

  assign win_sof    = win_valid && (cx == '0) && (cy == '0);
  assign win_eof    = win_valid && (cx == XW'(W - 1)) && (cy == YW'(H - 1));
  assign win_border = (cx == '0) || (cx == XW'(W - 1)) || (cy == '0) || (cy == YW'(H - 1));

  // A new pixel must not arrive while the previous frame is being flushed.
  a_no_pixel_in_flush: assert property (@(posedge clk) disable iff (!rst_n) flushing |-> !in_valid)
    else $error("window3x3: pixel received during frame flush");

endmodule
