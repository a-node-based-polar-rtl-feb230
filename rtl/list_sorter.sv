// list_sorter: M-to-L path selection (the paper's 2L-to-L sorter and the
// |S|L-to-L sorting of the repetition sequence unit).
//
// Each of the M candidates has a path metric and a valid bit.  Valid
// candidates rank before invalid ones, then smaller PMs first, and equal keys
// by the lower candidate index, so every candidate has a distinct rank.  Output
// m names the candidate of rank m (sel[m]) and whether it is valid.  The rank
// of each candidate is the number of candidates that beat it, found with
// M*(M-1) comparators in parallel (a rank-based selection; the paper does not
// give the sorter's insides).  Purely combinational.
module list_sorter
  import polar_pkg::*;
#(
  parameter int M = 16,
  parameter int L = 8,
  parameter int SW = $clog2(M)
) (
  input  logic [PMW-1:0] pm    [M],
  input  logic [M-1:0]   valid,
  output logic [SW-1:0]  sel   [L],
  output logic [L-1:0]   sel_valid,
  output logic [PMW-1:0] sel_pm [L]
);

  int unsigned rank [M];

  always_comb begin
    logic [PMW:0] ki, kj;
    ki = '0;
    kj = '0;
    for (int i = 0; i < M; i++) begin
      rank[i] = 0;
      for (int j = 0; j < M; j++) begin
        if (j != i) begin
          ki = {~valid[i], pm[i]};
          kj = {~valid[j], pm[j]};
          if (kj < ki || (kj == ki && j < i)) rank[i] = rank[i] + 1;
        end
      end
    end
    for (int m = 0; m < L; m++) begin
      sel[m]       = '0;
      sel_valid[m] = 1'b0;
      sel_pm[m]    = PM_MAX;
      for (int i = 0; i < M; i++) begin
        if (rank[i] == m) begin
          sel[m]       = SW'(i);
          sel_valid[m] = valid[i];
          sel_pm[m]    = pm[i];
        end
      end
    end
  end

endmodule
