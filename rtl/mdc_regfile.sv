// mdc_regfile -- class-centre register file of the minimum distance classifier.
//
// The C class centres of D dimensions each are kept in one flat array of C*D
// cells. Cell index = class*D + dimension (both counted from 0), so the
// dimensions of class 0 come first, then those of class 1, and so on; this is
// the arrangement of the published design. A write happens on a rising clock
// edge when en and wr are both high: cell[addr] <= wdata. Every cell is also
// presented in parallel on `centres`, because each of the C distance pipelines
// needs its own centre at all times.
//
// Choices of this design: writes are gated by en as well as wr; an address of
// C*D or above is ignored; the cells have no reset (they are programmed before
// use, as in the published flow).
module mdc_regfile #(
  parameter int unsigned C  = rsd_pkg::MDC_C,
  parameter int unsigned D  = rsd_pkg::MDC_D,
  parameter int unsigned CW = rsd_pkg::PIX_R + 2,          // width of one cell
  parameter int unsigned AW = $clog2(C * D)                // address width
) (
  input  logic                      clk,
  input  logic                      en,
  input  logic                      wr,
  input  logic [AW-1:0]             addr,
  input  logic [CW-1:0]             wdata,
  output logic [C-1:0][D-1:0][CW-1:0] centres
);

  logic [CW-1:0] cells [C*D];

  always_ff @(posedge clk) begin
    if (en && wr && (int'(addr) < C * D))
      cells[addr] <= wdata;
  end

  always_comb begin
    for (int c = 0; c < C; c++)
      for (int d = 0; d < D; d++)
        centres[c][d] = cells[c * D + d];
  end

endmodule
