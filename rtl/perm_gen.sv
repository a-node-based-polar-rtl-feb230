// perm_gen: factor-graph permutation generator for graph ensemble decoding,
// serving both frame slots.
//
// Permuting the stages of the polar factor graph is the same as permuting the
// bits of the leaf index (x' = P x and u' = P u with the same index-bit
// permutation, because G = F^{(x)n} is invariant under it).  Following the
// paper's partially ordered permutation, the FIX lowest index bits (the bottom
// stages of the tree) stay in place, so nodes of up to 2^FIX leaves keep their
// structure and only whole 2^FIX-leaf groups move.  The upper U = n - FIX index
// bits are permuted by sigma_g, where g is the graph number of the attempt:
//   g = 0            identity (the original factor graph)
//   1 <= g < U       upper bit b moves to position (b + g) mod U
//   U <= g < 2U      upper bit b moves to position (U-1-b + g-U) mod U
// which gives 2U-1 distinct graphs (11 for n = 10), enough for |P| = 8.
//
// Outputs, per slot s, for the graph graph[s]:
//   chan_p[s][sigma(i)] = chan[s][i]   permuted channel LLRs for the SCU
//   info_p[s][sigma(i)] = info[s][i]   permuted information set A'
//   u_nat[s][l][i] = u[s][l][sigma(i)] decoded bits back in natural order
// All combinational (index wiring selected by the graph number).
//
// Paper: a flexible on-the-fly permutation generator shuffles the input LLRs
// and A, and reverses the permutation on the decoded bits; bottom stages fixed
// (4 in its example).  The set of permutations sigma_g is this design's choice.
module perm_gen
  import polar_pkg::*;
#(
  parameter int N    = 1024,
  parameter int L    = 8,
  parameter int FIX  = 4,
  parameter int LOGN = $clog2(N)
) (
  input  logic [3:0]   graph  [2],
  input  llr_t         chan   [2][N],
  input  logic [N-1:0] info   [2],
  input  logic [N-1:0] u      [2][L],
  output llr_t         chan_p [2][N],
  output logic [N-1:0] info_p [2],
  output logic [N-1:0] u_nat  [2][L]
);
  localparam int U = LOGN - FIX;

  function automatic int sigma(int i, int g);
    int r, nb;
    r = i & ((1 << FIX) - 1);
    for (int b = 0; b < U; b++) begin
      if (((i >> (FIX + b)) & 1) != 0) begin
        if (g == 0 || U < 2)  nb = b;
        else if (g < U)       nb = (b + g) % U;
        else                  nb = (U - 1 - b + (g - U)) % U;
        r = r | (1 << (FIX + nb));
      end
    end
    return r;
  endfunction

  // inverse of sigma: rotations turn back, reflected rotations are involutions
  function automatic int sigma_inv(int k, int g);
    int r, b;
    r = k & ((1 << FIX) - 1);
    for (int nb = 0; nb < U; nb++) begin
      if (((k >> (FIX + nb)) & 1) != 0) begin
        if (g == 0 || U < 2)  b = nb;
        else if (g < U)       b = (nb - g + U) % U;
        else                  b = (U - 1 - nb + (g - U)) % U;
        r = r | (1 << (FIX + b));
      end
    end
    return r;
  endfunction

  always_comb begin
    for (int s = 0; s < 2; s++) begin
      for (int i = 0; i < N; i++) begin
        chan_p[s][i] = chan[s][sigma_inv(i, int'(graph[s])) % N];
        info_p[s][i] = info[s][sigma_inv(i, int'(graph[s])) % N];
        for (int l = 0; l < L; l++) u_nat[s][l][i] = u[s][l][sigma(i, int'(graph[s])) % N];
      end
    end
  end

endmodule
