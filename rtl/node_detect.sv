// node_detect: identifies the special node that starts at the head of the
// instruction generator's sliding window.
//
// Input is the window A_sub of NSMAX information-set bits (bit i = 1 means leaf
// i of the window is an information bit) and max_lg, the largest node stage the
// window position allows (alignment and code end).  The output is one node:
// its type, stage, and for an SR node the number W of R0/REP left descendants,
// which of them are REP, and the source-node type.  Purely combinational.
//
// How it works, following the paper's online generator:
//  * Basic nodes are grown recursively from length 2 (R0, REP, R1, SPC) and
//    length 4 (TYPE-III): a length-2^(k+1) node of a type exists if the
//    length-2^k head is of the matching type and the new half is all zeros
//    (R0/REP groups, shared term xi) or all ones (R1/SPC/TYPE-III group,
//    shared term zeta).
//  * SR nodes use the 2-D arrays M_X[i][j] (i = number of left nodes - 1,
//    j = log2(SR length) - 2).  Left segments L[i][j] are tested for R0/REP and
//    right segments R[i][j] for R1/SPC/TYPE-III.  Cells with i >= j (source
//    shorter than 4) are forced to 0.  Regrouping: M_SR-L[0] = R0|REP,
//    M_SR-L[1] = (R0|REP) & M_SR-L[0]; M_SR-R = R1|SPC|TYPE-III;
//    M_SR[0] = L&R, M_SR[1] = L&R&~M_SR[0] so a shorter source is used only if
//    no longer one exists.  The longest SR node wins.
//  * The final choice is the longest node; at equal length an SR node is
//    preferred over a basic one, as the paper considers basic types only when
//    no SR structure exists.  A lone leaf is an R0 or R1 node of length 1.
//
// Design choices beyond the paper: the REP recursion grows from an R0 head
// (the REP pattern is 0...01); SR nodes longer than RSUMAX are not formed,
// matching the paper's RSU size limit of 16.
module node_detect
  import polar_pkg::*;
(
  input  logic [NSMAX-1:0] win,      // A_sub, bit i = leaf i of the window
  input  logic [3:0]       max_lg,   // largest allowed node stage (<= LNSMAX)
  output node_e            typ,
  output logic [3:0]       stage,
  output logic [1:0]       w,
  output logic [1:0]       left_rep,
  output node_e            src
);

  // ---------------------------------------------------------------- basic
  // flags of a segment of length 2^lg starting at bit off, by the recursion
  typedef struct packed {
    logic r0, rep, r1, spc, t3;
  } bflags_t;

  function automatic bflags_t seg_flags(logic [NSMAX-1:0] a, int off, int lg);
    bflags_t f;
    logic xi, zeta;
    f = '0;
    if (lg == 0) begin
      f.r0 = ~a[off];
      f.r1 = a[off];
      return f;
    end
    // preconditions, length 2 (and 4 for TYPE-III)
    f.r0  = (a[off] == 1'b0) && (a[off+1] == 1'b0);
    f.rep = (a[off] == 1'b0) && (a[off+1] == 1'b1);
    f.r1  = (a[off] == 1'b1) && (a[off+1] == 1'b1);
    f.spc = (a[off] == 1'b0) && (a[off+1] == 1'b1);
    f.t3  = 1'b0;
    for (int k = 1; k < LNSMAX; k++) begin
      if (k < lg) begin
        xi = 1'b1; zeta = 1'b1;
        for (int b = 0; b < NSMAX; b++) begin
          if (b >= (1 << k) && b <= (1 << (k+1)) - 2 && a[off+b]) xi = 1'b0;
          if (b >= (1 << k) && b <= (1 << (k+1)) - 1 && !a[off+b]) zeta = 1'b0;
        end
        f.rep = f.r0 && xi && a[off + (1 << (k+1)) - 1];
        f.r0  = f.r0 && xi && !a[off + (1 << (k+1)) - 1];
        f.r1  = f.r1 && zeta;
        f.spc = f.spc && zeta;
        if (k == 1) f.t3 = (a[off+0] == 1'b0) && (a[off+1] == 1'b0) &&
                           (a[off+2] == 1'b1) && (a[off+3] == 1'b1);
        else        f.t3 = f.t3 && zeta;
      end
    end
    return f;
  endfunction

  localparam int NJ = LNSMAX - 1; // columns j of the M arrays

  bflags_t bf [LNSMAX+1];
  logic [WMAX-1:0][NJ-1:0] m_r0, m_rep, m_r1, m_spc, m_t3;
  logic [WMAX-1:0][NJ-1:0] m_srl, m_srr, m_sr;

  always_comb begin
    for (int k = 0; k <= LNSMAX; k++) bf[k] = seg_flags(win, 0, k);

    // phases 1 and 2: fill the M arrays from the L and R segments
    for (int i = 0; i < WMAX; i++) begin
      for (int j = 0; j < NJ; j++) begin
        bflags_t lf, rf;
        int lo, ro, lg;
        lg = j + 1 - i;                        // left node and source length 2^lg
        lo = (1 << (j+2)) - (1 << (j+2-i));    // start of L[i][j]
        ro = (1 << (j+2)) - (1 << lg);         // start of R[i][j]
        if (i < j && (j + 2) <= int'(max_lg) && (1 << (j+2)) <= RSUMAX) begin
          lf = seg_flags(win, lo, lg);
          rf = seg_flags(win, ro, lg);
        end else begin
          lf = '0;
          rf = '0;
        end
        m_r0[i][j]  = lf.r0;
        m_rep[i][j] = lf.rep;
        m_r1[i][j]  = rf.r1;
        m_spc[i][j] = rf.spc;
        m_t3[i][j]  = rf.t3;
      end
    end

    // phase 3: regrouping
    for (int i = 0; i < WMAX; i++) begin
      m_srl[i] = m_r0[i] | m_rep[i];
      if (i > 0) m_srl[i] = m_srl[i] & m_srl[i-1];
      m_srr[i] = m_r1[i] | m_spc[i] | m_t3[i];
      m_sr[i]  = m_srl[i] & m_srr[i];
      for (int p = 0; p < i; p++) m_sr[i] = m_sr[i] & ~m_sr[p];
    end
  end

  always_comb begin
    int  sr_j, sr_i, b_lg;
    node_e b_typ;
    sr_j = -1; sr_i = 0;
    for (int j = 0; j < NJ; j++)
      for (int i = WMAX-1; i >= 0; i--)
        if (m_sr[i][j]) begin sr_j = j; sr_i = i; end
    b_lg = 0;
    b_typ = win[0] ? NT_R1 : NT_R0;
    for (int k = 1; k <= LNSMAX; k++) begin
      if (k <= int'(max_lg)) begin
        if      (bf[k].r0)  begin b_lg = k; b_typ = NT_R0;  end
        else if (bf[k].rep) begin b_lg = k; b_typ = NT_REP; end
        else if (bf[k].r1)  begin b_lg = k; b_typ = NT_R1;  end
        else if (bf[k].spc) begin b_lg = k; b_typ = NT_SPC; end
        else if (bf[k].t3)  begin b_lg = k; b_typ = NT_T3;  end
      end
    end
    w = '0; left_rep = '0; src = NT_R1;
    if (sr_j >= 0 && sr_j + 2 >= b_lg) begin
      typ   = NT_SR;
      stage = 4'(sr_j + 2);
      w     = 2'(sr_i + 1);
      for (int i = 0; i < WMAX; i++)
        if (i <= sr_i) left_rep[i] = m_rep[i][sr_j];
      if      (m_r1[sr_i][sr_j])  src = NT_R1;
      else if (m_spc[sr_i][sr_j]) src = NT_SPC;
      else                        src = NT_T3;
    end else begin
      typ   = b_typ;
      stage = 4'(b_lg);
    end
  end

endmodule
