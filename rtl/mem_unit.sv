// mem_unit: memory of one frame slot, holding the channel LLRs, the info-set
// vector of the frame, the internal LLRs and the decoded u bits of all L
// paths.  The decoder has two instances, one per interleaved frame.
//
// Channel LLRs are written IN_PAR per cycle in their natural order (ch_we,
// ch_addr = chunk index); the permutation generator reorders them on the way to
// the SCU.  Internal LLRs of stage s of path l live at llr[l][2^s .. 2^(s+1)-1]
// and are written by the SCU, up to NST stages per cycle.  On commit (end of a
// node in the NPU) every path l first becomes a copy of its origin path
// ptr[l] (the list "pointer" step: internal LLRs and u bits follow the path),
// then the u bits of the node range are written from the node codeword by the
// polar transform.  Everything is in registers and read combinationally.
//
// Paper: channel LLRs, internal LLRs and u bits, duplicated per frame, L lists.
// This design's choices: register arrays, full-stage LLR storage and a one-cycle
// copy by pointer instead of lazy copying.
module mem_unit
  import polar_pkg::*;
#(
  parameter int N      = 1024,
  parameter int L      = 8,
  parameter int PE     = 64,
  parameter int NST    = 3,
  parameter int IN_PAR = 16,
  parameter int LOGN   = $clog2(N),
  parameter int LW     = $clog2(L)
) (
  input  logic            clk,
  input  logic            rst_n,
  // channel input
  input  logic            ch_we,
  input  logic [LOGN-1:0] ch_addr,
  input  llr_t            ch_data [IN_PAR],
  input  logic            a_we,
  input  logic [N-1:0]    a_in,
  // SCU write-back
  input  logic [NST-1:0]  scu_we,
  input  logic [3:0]      scu_stage [NST],
  input  logic [LOGN-1:0] scu_base  [NST],
  input  logic [LOGN:0]   scu_len   [NST],
  input  llr_t            scu_data  [NST][L][PE],
  // node commit
  input  logic            commit,
  input  logic [LW-1:0]   ptr       [L],
  input  logic [NSMAX-1:0] node_x   [L],
  input  logic [3:0]      node_stage,
  input  logic [POSW-1:0] node_pos,
  // contents
  output llr_t            chan [N],
  output logic [N-1:0]    info_set,
  output llr_t            llr  [L][N],
  output logic [N-1:0]    u    [L]
);

  // next internal LLR contents: whole-row copy on commit, SCU writes otherwise
  llr_t llr_d [L][N];

  always_comb begin
    llr_d = llr;
    if (commit) begin
      for (int l = 0; l < L; l++) llr_d[l] = llr[ptr[l]];
    end else begin
      for (int t = 0; t < NST; t++)
        if (scu_we[t])
          for (int l = 0; l < L; l++)
            for (int j = 0; j < PE; j++)
              if (j < int'(scu_len[t]))
                llr_d[l][((1 << scu_stage[t]) + int'(scu_base[t]) + j) % N] = scu_data[t][l][j];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int l = 0; l < L; l++)
        for (int i = 0; i < N; i++) llr[l][i] <= '0;
    end else begin
      llr <= llr_d;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      info_set <= '0;
      for (int i = 0; i < N; i++) chan[i] <= '0;
      for (int l = 0; l < L; l++) u[l] <= '0;
    end else begin
      if (ch_we)
        for (int j = 0; j < IN_PAR; j++)
          chan[(int'(ch_addr) * IN_PAR + j) % N] <= ch_data[j];
      if (a_we) info_set <= a_in;
      if (commit) begin
        for (int l = 0; l < L; l++) begin
          logic [NSMAX-1:0] ub;
          ub = polar_xform(node_x[l], int'(node_stage));
          for (int i = 0; i < N; i++) begin
            if (i >= int'(node_pos) && i < int'(node_pos) + (1 << node_stage))
              u[l][i] <= ub[(i - int'(node_pos)) % NSMAX];
            else
              u[l][i] <= u[ptr[l]][i];
          end
        end
      end
    end
  end

endmodule
