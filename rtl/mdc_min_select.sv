// mdc_min_select -- pairwise minimum tree of the minimum distance classifier.
//
// The C distances enter together. Each tree level compares neighbours in pairs
// (0 with 1, 2 with 3, ...) and registers the smaller distance together with
// the index of its class; a node left without a partner is registered
// unchanged (the "buffer" that delays the odd distance in the published
// design). After ceil(log2 C) levels, one register per level, `label` holds the
// index of the nearest class centre. The latency is ceil(log2 C) cycles of en;
// a new set of distances may enter every cycle.
//
// On equal distances the lower class index wins: a choice of this design.
module mdc_min_select #(
  parameter int unsigned C  = rsd_pkg::MDC_C,
  parameter int unsigned CW = rsd_pkg::PIX_R + 2,
  parameter int unsigned LW = (C > 1) ? $clog2(C) : 1
) (
  input  logic                 clk,
  input  logic                 en,
  input  logic [C-1:0][CW-1:0] l1_dist,
  output logic [LW-1:0]        label,
  output logic [CW-1:0]        min_dist
);

  localparam int unsigned LEVELS = $clog2(C);

  // Number of nodes on tree level l.
  function automatic int unsigned nodes(int unsigned l);
    int unsigned n = C;
    for (int unsigned i = 0; i < l; i++) n = (n + 1) / 2;
    return n;
  endfunction

  logic [CW-1:0] nd [LEVELS+1][C];
  logic [LW-1:0] ni [LEVELS+1][C];

  for (genvar i = 0; i < C; i++) begin : g_leaf
    assign nd[0][i] = l1_dist[i];
    assign ni[0][i] = LW'(i);
  end

  for (genvar l = 0; l < LEVELS; l++) begin : g_level
    for (genvar i = 0; i < C; i++) begin : g_node
      always_ff @(posedge clk) begin
        if (en) begin
          if (i >= nodes(l + 1)) begin
            nd[l+1][i] <= '0;
            ni[l+1][i] <= '0;
          end else if (2 * i + 1 < nodes(l)) begin
            if (nd[l][2*i] <= nd[l][2*i+1]) begin
              nd[l+1][i] <= nd[l][2*i];
              ni[l+1][i] <= ni[l][2*i];
            end else begin
              nd[l+1][i] <= nd[l][2*i+1];
              ni[l+1][i] <= ni[l][2*i+1];
            end
          end else begin
            nd[l+1][i] <= nd[l][2*i];
            ni[l+1][i] <= ni[l][2*i];
          end
        end
      end
    end
  end

  assign label    = ni[LEVELS][0];
  assign min_dist = nd[LEVELS][0];

endmodule
