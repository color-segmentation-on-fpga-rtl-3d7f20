// median3x3 -- 3x3 median filter on the segmented (class index) image.
//
// For every pixel the nine class indices of its 3x3 neighbourhood are ranked
// and the middle one (the 5th smallest) is output. The median is found without
// sorting: element i is the median when fewer than five elements are smaller
// than it and at least five are smaller or equal; the first such element is
// taken. That is 81 comparators of PW bits and one cycle. Framing, latency
// (W+3 cycles) and the W+1 idle cycles needed to flush the last row are those
// of window3x3 plus one output register. Border pixels pass through unchanged.
//
// The published design places a 3x3 median filter after colour segmentation
// to remove small components; how the median is computed and the border rule
// are this design's own choices.
module median3x3 #(
  parameter int unsigned W  = rsd_pkg::IMG_W,
  parameter int unsigned H  = rsd_pkg::IMG_H,
  parameter int unsigned PW = $clog2(rsd_pkg::MDC_C)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  input  logic          in_sof,
  input  logic [PW-1:0] in_pix,
  output logic          out_valid,
  output logic          out_sof,
  output logic          out_eof,
  output logic [PW-1:0] out_pix,
  output logic          flushing
);

  logic                    wv, wsof, weof, wborder;
  logic [2:0][2:0][PW-1:0] win;

  window3x3 #(.W(W), .H(H), .PW(PW)) u_win (
    .clk, .rst_n, .in_valid, .in_sof, .in_pix,
    .win_valid(wv), .win_sof(wsof), .win_eof(weof), .win_border(wborder),
    .win, .flushing
  );

  function automatic logic [PW-1:0] median9(logic [2:0][2:0][PW-1:0] w);
    logic [8:0][PW-1:0] v;
    logic [PW-1:0]      m;
    logic               found;
    v     = w;
    m     = v[4];
    found = 1'b0;
    for (int i = 0; i < 9; i++) begin
      int lt, le;
      lt = 0;
      le = 0;
      for (int j = 0; j < 9; j++) begin
        if (v[j] <  v[i]) lt++;
        if (v[j] <= v[i]) le++;
      end
      if (!found && lt < 5 && le >= 5) begin
        m     = v[i];
        found = 1'b1;
      end
    end
    return m;
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
    if (wv)
      out_pix <= wborder ? win[1][1] : median9(win);
  end

endmodule
