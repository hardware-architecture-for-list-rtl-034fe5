// lsc_metric_sorter: path-metric register and radix-2L metric sorter.
//
// The 2L path metrics of the current bit (candidate c = 2l+u: path l
// extended with u_i = u; metric = stage-0 LL of path l for u) are captured
// into a register at the end of the stage-0 cycle (capture = 1). This
// register cuts the critical path between the decoder cores and the sorter
// and costs one idle cycle per selection. In that next cycle the sorter
// picks the L best candidates combinationally: one comparator "A <= B?" per
// pair of candidates, 2L(2L-1)/2 in all, and the rank of a candidate is the
// number of candidates that beat it. Output slot r (r < L) receives the
// candidate of rank r, so slot 0 is always the best path. Per slot the
// sorter gives the parent path (parent), the decision (bit), the metric and
// whether the parent path was a live path (out_valid).
//
// Ordering key: live paths before dead ones, then smaller metric (metrics
// are negative log-likelihoods), then lower candidate index. The live mask
// (valid) starts with only path 0 live (init), because decoding begins with
// a single path; commit loads out_valid into it. The tie rule and the live
// mask are this design's choices; the comparator count and the register
// follow the reference design.
module lsc_metric_sorter
  import lsc_pkg::*;
#(
  parameter int unsigned L = 2,
  parameter int unsigned W = 13,
  localparam int unsigned LW = idx_w(L),
  localparam int unsigned C  = 2 * L
) (
  input  logic                      clk,
  input  logic                      init,
  input  logic                      capture,
  input  logic [L-1:0][1:0][W-1:0]  metrics_in,
  input  logic                      commit,
  output logic [L-1:0][LW-1:0]      parent,
  output logic [L-1:0]              bits,
  output logic [L-1:0][W-1:0]       out_metric,
  output logic [L-1:0]              out_valid,
  output logic [L-1:0]              valid
);

  localparam int unsigned RKW = $clog2(C + 1);

  logic [L-1:0][1:0][W-1:0] mreg;
  logic [W:0]               key  [C];
  logic                     le   [C][C];   // le[c][d], c < d: c beats d
  logic [RKW-1:0]           rank [C];

  always_ff @(posedge clk) begin
    if (capture) mreg <= metrics_in;
    if (init)        valid <= L'(1);
    else if (commit) valid <= out_valid;
  end

  always_comb begin
    for (int c = 0; c < int'(C); c++)
      key[c] = {~valid[c/2], mreg[c/2][c%2]};
    for (int c = 0; c < int'(C); c++)
      for (int d = 0; d < int'(C); d++)
        le[c][d] = 1'b0;
    for (int c = 0; c < int'(C); c++)
      for (int d = c + 1; d < int'(C); d++)
        le[c][d] = (key[c] <= key[d]);
    for (int c = 0; c < int'(C); c++) begin
      rank[c] = '0;
      for (int d = 0; d < int'(C); d++) begin
        if (d < c && le[d][c])  rank[c] = rank[c] + 1'b1;
        if (d > c && !le[c][d]) rank[c] = rank[c] + 1'b1;
      end
    end
    parent     = '0;
    bits       = '0;
    out_metric = '0;
    out_valid  = '0;
    for (int r = 0; r < int'(L); r++)
      for (int c = 0; c < int'(C); c++)
        if (rank[c] == RKW'(r)) begin
          parent[r]     = LW'(c / 2);
          bits[r]       = 1'(c % 2);
          out_metric[r] = mreg[c/2][c%2];
          out_valid[r]  = valid[c/2];
        end
  end

endmodule
