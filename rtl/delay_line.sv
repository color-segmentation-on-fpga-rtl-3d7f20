// delay_line -- N-cycle shift register with reset, for side-band signals.
//
// out equals in delayed by exactly N clock cycles (N >= 1). All stages reset
// to zero, so a delayed valid flag is low until real data has travelled the
// whole line. Used to carry the frame flags alongside the minimum distance
// classifier, whose published interface has no valid signal.
module delay_line #(
  parameter int unsigned N  = 8,
  parameter int unsigned DW = 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [DW-1:0] din,
  output logic [DW-1:0] dout
);

  logic [DW-1:0] stage [N];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int i = 0; i < N; i++) stage[i] <= '0;
    end else begin
      stage[0] <= din;
      for (int i = 1; i < N; i++) stage[i] <= stage[i-1];
    end
  end

  assign dout = stage[N-1];

endmodule
