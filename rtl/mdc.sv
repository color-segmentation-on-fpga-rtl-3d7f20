// mdc -- minimum distance classifier with a memory-like interface.
//
// Classifies a D-dimensional feature vector into the nearest of C class
// centres under the L1 (Manhattan) distance, so no multiplier is needed.
// The module works in two phases, like a small memory:
//   programming   wr = 1: data_in[CW-1:0] (the first dimension slot) is written
//                 to register-file cell addr = class*D + dimension;
//   classifying   wr = 0: a vector on data_in is classified every clock cycle,
//                 and its class index appears on label_out exactly
//                 3*D + ceil(log2 C) enabled cycles later.
// Inside, C distance pipelines (one per class, mdc_distance_pipe) run in
// parallel so their results reach the pairwise minimum tree (mdc_min_select)
// together.
//
// Ports follow the published interface (clk, en, wr, addr, input, classified
// output), with these widths: data_in is (R+2)*D bits, each dimension zero-
// extended by two bits against overflow, dimension 0 in the low bits; addr is
// ceil(log2(C*D)) bits; label_out is ceil(log2 C) bits. Choices of this design:
// en is a clock enable for every register (en low stalls the whole classifier
// and blocks writes); the pipeline keeps running while wr is high, so
// label_out is meaningful only for vectors entered with wr low; there is no
// reset, since nothing inside holds control state.
module mdc #(
  parameter int unsigned R  = rsd_pkg::PIX_R,
  parameter int unsigned D  = rsd_pkg::MDC_D,
  parameter int unsigned C  = rsd_pkg::MDC_C,
  parameter int unsigned CW = R + 2,
  parameter int unsigned AW = $clog2(C * D),
  parameter int unsigned LW = (C > 1) ? $clog2(C) : 1
) (
  input  logic              clk,
  input  logic              en,
  input  logic              wr,
  input  logic [AW-1:0]     addr,
  input  logic [CW*D-1:0]   data_in,
  output logic [LW-1:0]     label_out
);

  logic [C-1:0][D-1:0][CW-1:0] centres;
  logic [C-1:0][CW-1:0]        dists;
  logic [D-1:0][CW-1:0]        x;
  logic [CW-1:0]               min_dist;

  assign x = data_in;

  mdc_regfile #(.C(C), .D(D), .CW(CW), .AW(AW)) u_regfile (
    .clk, .en, .wr, .addr, .wdata(data_in[CW-1:0]), .centres
  );

  for (genvar c = 0; c < C; c++) begin : g_class
    mdc_distance_pipe #(.D(D), .CW(CW)) u_pipe (
      .clk, .en, .x, .centre(centres[c]), .l1_dist(dists[c])
    );
  end

  mdc_min_select #(.C(C), .CW(CW), .LW(LW)) u_min (
    .clk, .en, .l1_dist(dists), .label(label_out), .min_dist
  );

  // min_dist is kept for observation in simulation only.
  logic unused_min;
  assign unused_min = ^min_dist;

endmodule
