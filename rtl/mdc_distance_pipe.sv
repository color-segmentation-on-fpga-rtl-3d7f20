// mdc_distance_pipe -- Manhattan distance of one input vector to one class
// centre, as a chain of D processes of three clock cycles each.
//
// The input vector travels through the chain in a buffer of D cells. Process k
// (k = 0 .. D-1) works on dimension k of the buffer:
//   cycle 1: diff  = cell[k] - centre[k]      (two's complement, CW bits)
//   cycle 2: mag   = |diff|
//   cycle 3: cell[0] = mag (process 0) or cell[0] + mag (process k > 0)
// so that after the last process the first cell holds
//   sum_k |x_k - u_k|,
// the L1 distance. Only that first cell leaves the pipeline on `l1_dist`. A new
// vector may enter every clock cycle; the latency is exactly 3*D cycles of en.
//
// The buffer, the split into three cycles per process and the accumulation into
// the first dimension follow the published design. Which operation falls in
// which of the three cycles is this design's own choice (the published text only
// says each process takes three cycles). Cells are CW = R+2 bits wide as in the
// published interface: the sum is exact for D <= 4 with R-bit inputs (the
// published "two extra bits" for overflow); for larger D it wraps. en high
// advances every register; en low freezes the whole pipeline.
module mdc_distance_pipe #(
  parameter int unsigned D  = rsd_pkg::MDC_D,
  parameter int unsigned CW = rsd_pkg::PIX_R + 2
) (
  input  logic                 clk,
  input  logic                 en,
  input  logic [D-1:0][CW-1:0] x,        // input vector, zero-extended dimensions
  input  logic [D-1:0][CW-1:0] centre,   // class centre
  output logic [CW-1:0]        l1_dist      // L1 distance, 3*D cycles after x
);

  // Per-process stage registers.
  logic [D-1:0][CW-1:0] buf1 [D];   // buffer after cycle 1
  logic [D-1:0][CW-1:0] buf2 [D];   // buffer after cycle 2
  logic [D-1:0][CW-1:0] buf3 [D];   // buffer after cycle 3 (process output)
  logic signed [CW-1:0] diff [D];
  logic        [CW-1:0] mag  [D];

  for (genvar k = 0; k < D; k++) begin : g_proc
    logic [D-1:0][CW-1:0] vin;
    if (k == 0) begin : g_first
      assign vin = x;
    end else begin : g_next
      assign vin = buf3[k-1];
    end

    always_ff @(posedge clk) begin
      if (en) begin
        // cycle 1: subtract the centre
        buf1[k] <= vin;
        diff[k] <= $signed(vin[k]) - $signed(centre[k]);
        // cycle 2: magnitude
        buf2[k] <= buf1[k];
        mag[k]  <= (diff[k] < 0) ? CW'(-diff[k]) : CW'(diff[k]);
        // cycle 3: accumulate into the first dimension
        buf3[k] <= buf2[k];
        if (k == 0) buf3[k][0] <= mag[k];
        else        buf3[k][0] <= buf2[k][0] + mag[k];
      end
    end
  end

  assign l1_dist = buf3[D-1][0];

endmodule
