// rsu: repetition sequence unit of the NPU, which decodes the low-rate part of
// a sequence-repetition (SR) node for all L paths.
//
// An SR node of length 2^s has W (1..WMAX) R0/REP left descendants at stages
// s-1 .. s-W and a source node of length 2^r, r = s-W.  Its codeword is made
// of 2^W blocks of the source codeword c, block t inverted by
//   b_t = XOR over w < W of  v_w & (bit W-1-w of t is 0),
// where v_w is the bit of the w-th left node (always 0 for an R0 node).  For
// each path and each allowed repetition sequence S = (v_0, .., v_{W-1}) the
// unit forms the source LLRs
//   lam_c[j] = sum over t of (-1)^b_t * lam[t*2^r + j]
// and the PM of the sequence, PM + sum of |lam| over the bits that disagree
// with HD(lam_c[j]) XOR b_t.  It then keeps the L best of the |S|*L candidates.
// Cycle 1 computes all candidates and registers them, cycle 2 sorts and
// registers the survivors, which wait in the output register (the pipeline
// stage between RSU and BNU) until the BNU takes them.
//
// Paper: |S|L-to-L sorting in a fixed two cycles, SR nodes up to 16 bits,
// W <= 2.  The closed-form candidate PM is this design's formulation.
// Interface: start samples the inputs (only when !busy); out_valid stays high
// until take.  The output tag of a path is {origin path, S}.
module rsu
  import polar_pkg::*;
#(
  parameter int L    = 8,
  parameter int LW   = $clog2(L),
  parameter int TAGW = LW + WMAX
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start,
  input  logic [2:0]      lg_s,       // SR node stage s (length <= RSUMAX)
  input  logic [1:0]      w,          // number of left nodes
  input  logic [1:0]      left_rep,   // bit w: left node w is REP
  input  llr_t            lam_in [L][RSUMAX],
  input  logic [PMW-1:0]  pm_in  [L],
  input  logic [L-1:0]    valid_in,
  input  logic            take,
  output logic            busy,
  output logic            out_valid,
  output illr_t           lam_out [L][NSMAX],
  output logic [PMW-1:0]  pm_out  [L],
  output logic [L-1:0]    valid_out,
  output logic [TAGW-1:0] tag_out [L],
  output logic [2:0]      lg_r        // source node stage r
);
  localparam int NS = 1 << WMAX;      // sequences per path
  localparam int M  = L * NS;

  illr_t          c_lam   [M][RSUMAX/2];
  logic [PMW-1:0] c_pm    [M];
  logic [M-1:0]   c_valid;
  illr_t          q_lam   [M][RSUMAX/2];
  logic [PMW-1:0] q_pm    [M];
  logic [M-1:0]   q_valid;
  logic [2:0]     q_lgr;
  logic           st1_q;

  // cycle 1: candidates
  always_comb begin
    int r, nw, c, pmv, sum;
    logic hd, bt;
    llr_t x;
    c = 0; pmv = 0; sum = 0; hd = 1'b0; bt = 1'b0; x = '0;
    c_lam   = '{default: '0};
    c_pm    = '{default: '0};
    c_valid = '0;
    r  = int'(lg_s) - int'(w);
    nw = int'(w);
    for (int l = 0; l < L; l++) begin
      for (int sq = 0; sq < NS; sq++) begin
        c   = l * NS + sq;
        pmv = int'(pm_in[l]);
        c_valid[c] = valid_in[l];
        for (int v = 0; v < WMAX; v++)
          if (((sq >> v) & 1) != 0 && (v >= nw || !left_rep[v])) c_valid[c] = 1'b0;
        for (int j = 0; j < RSUMAX/2; j++) begin
          sum = 0;
          for (int t = 0; t < NS; t++) begin
            if (t < (1 << nw) && j < (1 << r)) begin
              bt = 1'b0;
              for (int v = 0; v < WMAX; v++)
                if (v < nw && ((sq >> v) & 1) != 0 && ((t >> (nw - 1 - v)) & 1) == 0) bt = ~bt;
              x = lam_in[l][(t * (1 << r) + j) % RSUMAX];
              sum = sum + (((x.s ^ bt) != 0) ? -int'(x.m) : int'(x.m));
            end
          end
          hd = (sum < 0);
          c_lam[c][j].s = hd;
          c_lam[c][j].m = IMAGW'((sum < 0) ? -sum : sum);
          for (int t = 0; t < NS; t++) begin
            if (t < (1 << nw) && j < (1 << r)) begin
              bt = 1'b0;
              for (int v = 0; v < WMAX; v++)
                if (v < nw && ((sq >> v) & 1) != 0 && ((t >> (nw - 1 - v)) & 1) == 0) bt = ~bt;
              x = lam_in[l][(t * (1 << r) + j) % RSUMAX];
              if (x.s != (hd ^ bt)) pmv = pmv + int'(x.m);
            end
          end
        end
        c_pm[c] = (pmv > int'(PM_MAX)) ? PM_MAX : PMW'(pmv);
      end
    end
  end

  // cycle 2: |S|L -> L selection
  logic [$clog2(M)-1:0] s_sel   [L];
  logic [L-1:0]         s_valid;
  logic [PMW-1:0]       s_pm    [L];

  list_sorter #(.M(M), .L(L)) u_sort (
    .pm(q_pm), .valid(q_valid), .sel(s_sel), .sel_valid(s_valid), .sel_pm(s_pm)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st1_q     <= 1'b0;
      out_valid <= 1'b0;
      q_lgr     <= '0;
      lg_r      <= '0;
      q_valid   <= '0;
      valid_out <= '0;
      for (int c = 0; c < M; c++) q_pm[c] <= '0;
      for (int l = 0; l < L; l++) begin
        pm_out[l]  <= '0;
        tag_out[l] <= '0;
        for (int j = 0; j < NSMAX; j++) lam_out[l][j] <= '0;
      end
    end else begin
      st1_q <= start;
      if (start) begin
        q_lam   <= c_lam;
        q_pm    <= c_pm;
        q_valid <= c_valid;
        q_lgr   <= 3'(int'(lg_s) - int'(w));
      end
      if (take) out_valid <= 1'b0;
      if (st1_q) begin
        out_valid <= 1'b1;
        lg_r      <= q_lgr;
        for (int m = 0; m < L; m++) begin
          valid_out[m] <= s_valid[m];
          // normalise: best survivor gets PM 0
          pm_out[m]    <= s_valid[0] ? s_pm[m] - s_pm[0] : s_pm[m];
          tag_out[m]   <= TAGW'(s_sel[m]);
          for (int j = 0; j < NSMAX; j++)
            lam_out[m][j] <= (j < RSUMAX/2) ? q_lam[s_sel[m]][j % (RSUMAX/2)] : '0;
        end
      end
    end
  end

  assign busy = st1_q || start;

  a_no_overrun: assert property (@(posedge clk) disable iff (!rst_n) st1_q |-> !out_valid || take);

endmodule
