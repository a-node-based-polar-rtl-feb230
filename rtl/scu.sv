// scu: successive-cancellation unit, the multi-stage PE array that computes
// internal LLRs of the decoding tree for all L paths of one frame.
//
// One command computes the LLR vector of stage k (length 2^k) from the stored
// vector of stage k+1 (the permuted channel LLRs when k+1 = n), with either the
// f function (left child) or the g function (right child, using the stored
// partial sums of the left sibling).  PE processing elements work in the first
// PE column, so a vector longer than PE takes several commands (chunk = 0,1,..).
// When the first result fits into the first column, up to NST-1 further
// columns of PE/2, PE/4, ... elements apply f to it in the same cycle, so
// several stages of the tree are descended per cycle.  Every stage produced is
// returned for write-back.
//
// Interface: chan, llr and beta are the selected frame's memories (stage s of a
// path is stored at indices 2^s .. 2^(s+1)-1).  The command (valid, stage, op_g,
// chunk, nchain) is served combinationally; the results wr_* are written by the
// memory unit at the next clock edge, so one command takes one cycle.
//
// Paper: #SCU = 3 stages, #PE = 64, f/g per Eqs. (1)-(2), several stages per
// cycle.  This design's choice: all intermediate stages are kept in the
// internal LLR memory instead of being recomputed.
module scu
  import polar_pkg::*;
#(
  parameter int N   = 1024,
  parameter int L   = 8,
  parameter int PE  = 64,
  parameter int NST = 3,
  parameter int LOGN = $clog2(N)
) (
  input  llr_t         chan [N],
  input  llr_t         llr  [L][N],
  input  logic [N-1:0] beta [L],
  input  logic         valid,
  input  logic [3:0]   stage,   // k, output stage of the first column
  input  logic         op_g,    // first column applies g (else f)
  input  logic [LOGN-1:0] chunk,
  input  logic [1:0]   nchain,  // stages computed this cycle (1..NST)
  output logic [NST-1:0] wr_en,
  output logic [3:0]   wr_stage [NST],
  output logic [LOGN-1:0] wr_base [NST],
  output logic [LOGN:0] wr_len  [NST],
  output llr_t         wr_data [NST][L][PE]
);

  always_comb begin
    int k, len1, base, idx;
    llr_t a, b;
    idx = 0;
    a = '0;
    b = '0;
    k    = int'(stage);
    len1 = 1 << k;
    base = int'(chunk) * PE;
    for (int t = 0; t < NST; t++) begin
      wr_en[t]    = 1'b0;
      wr_stage[t] = 4'(k - t);
      wr_base[t]  = (t == 0) ? LOGN'(base) : '0;
      wr_len[t]   = (LOGN+1)'(((len1 >> t) < PE) ? (len1 >> t) : PE);
      for (int l = 0; l < L; l++)
        for (int j = 0; j < PE; j++) wr_data[t][l][j] = '0;
    end
    if (valid) begin
      wr_en[0] = 1'b1;
      for (int l = 0; l < L; l++) begin
        for (int j = 0; j < PE; j++) begin
          idx = base + j;
          a = '0;
          b = '0;
          if (idx < len1) begin
            if (k + 1 >= LOGN) begin
              a = chan[idx % N];
              b = chan[(idx + len1) % N];
            end else begin
              a = llr[l][(2*len1 + idx) % N];
              b = llr[l][(3*len1 + idx) % N];
            end
            wr_data[0][l][j] = op_g ? g_fn(a, b, beta[l][(len1 + idx) % N]) : f_fn(a, b);
          end
        end
      end
      // further columns: f descends towards the node
      for (int t = 1; t < NST; t++) begin
        if (t < int'(nchain) && len1 <= PE && (k - t) >= 0) begin
          wr_en[t] = 1'b1;
          for (int l = 0; l < L; l++)
            for (int j = 0; j < (PE >> t); j++)
              if (j < (len1 >> t))
                wr_data[t][l][j] = f_fn(wr_data[t-1][l][j], wr_data[t-1][l][j + (len1 >> t)]);
        end
      end
    end
  end

endmodule
