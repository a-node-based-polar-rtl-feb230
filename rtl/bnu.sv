// bnu: basic node unit of the NPU.  Decodes one R0, REP, R1, SPC or TYPE-III
// node (or the high-rate source node of an SR node) for all L paths of a frame
// and returns the surviving paths.
//
// Every path p carries its node LLRs, its current node codeword x (starting at
// the hard decisions), its PM, a valid bit and a tag (origin path and SR
// repetition sequence) that follows the path through forks.  The node is
// decoded by a sequence of one-cycle operations, as in the paper's cycle
// analysis:
//   ADD   adder tree: PM increments of the all-0 and all-1 words   (R0, REP)
//   PFREP 2L->L selection between the all-0 and all-1 words        (REP)
//   WG    Wagner decoding: if a parity is odd, flip the least reliable bit
//         (SPC: one global parity; TYPE-III: even and odd positions)
//   CAS   compare-and-select: order the fork candidates by reliability
//   PF    one path fork: every path proposes itself unchanged and with the
//         next-least-reliable bit flipped (plus the Wagner bit of its parity
//         class, so parities hold), then 2L->L selection
// Cycle counts: R0 1, REP 2, R1 1+T, SPC/TYPE-III 2+T.  For an SR source node
// (merged = 1) the RSU already did the CAS of R1 or the Wagner step of
// SPC/TYPE-III, so those take T and 1+T cycles here.
//
// Fork count: T_max (R1, SPC, TYPE-III) = 2, 3, 3 forks, never more than the
// node's free bits.  With strategy S2 enabled the unit stops after the lower
// bound T_min = 1, 1, 2 forks as soon as the other frame is waiting for the
// NPU, and otherwise continues up to T_max.  PM update: PM' = PM + sum of
// |LLR| over bits whose value now differs from the hard decision, minus that
// sum before the flip; after each selection the PMs are normalised so the best
// survivor has PM 0 (a choice of this design for the 7-bit PMs).
//
// Interface: start with typ/lg/merged and the per-path inputs; busy while
// working; done pulses for one cycle with the outputs valid; remaining gives an
// upper bound of the cycles still needed (used by strategy S1).
module bnu
  import polar_pkg::*;
#(
  parameter int L        = 8,
  parameter int TAGW     = 5,
  parameter int TMAX_R1  = 2,
  parameter int TMAX_SPC = 3,
  parameter int TMAX_T3  = 3,
  parameter int TMIN_R1  = 1,
  parameter int TMIN_SPC = 1,
  parameter int TMIN_T3  = 2
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start,
  input  node_e           typ,       // R0, REP, R1, SPC or T3
  input  logic [2:0]      lg,        // node length 2^lg (<= NSMAX)
  input  logic            merged,    // SR source node after the RSU
  input  illr_t           lam_in   [L][NSMAX],
  input  logic [PMW-1:0]  pm_in    [L],
  input  logic [L-1:0]    valid_in,
  input  logic [TAGW-1:0] tag_in   [L],
  input  logic            s2_en,
  input  logic            other_waiting,
  output logic            busy,
  output logic [3:0]      remaining,
  output logic            done,
  output logic [NSMAX-1:0] x_out   [L],
  output logic [PMW-1:0]  pm_out   [L],
  output logic [L-1:0]    valid_out,
  output logic [TAGW-1:0] tag_out  [L],
  output logic [2:0]      forks,    // forks performed on the last node
  output logic            s2_cut    // pulse with done: S2 ended the node early
);

  typedef enum logic [2:0] {OP_IDLE, OP_ADD, OP_PFREP, OP_WG, OP_CAS, OP_PF} op_e;

  typedef struct packed {
    illr_t [NSMAX-1:0]      lam;
    logic  [NSMAX-1:0]      x;
    logic  [PMW-1:0]        pm;
    logic  [PMW-1:0]        pm1;   // REP: PM of the all-1 word
    logic                   valid;
    logic  [TAGW-1:0]       tag;
    logic  [TFMAX-1:0][4:0] q;     // fork positions, least reliable first
    logic  [4:0]            wg0;   // Wagner bit (SPC, even class of TYPE-III)
    logic  [4:0]            wg1;   // Wagner bit of the odd class (TYPE-III)
  } path_t;

  path_t       p_q   [L];
  path_t       src   [L];
  path_t       nxt   [L];
  op_e         op_q, op_c, op_n;
  node_e       typ_q, typ_c;
  logic [2:0]  lg_q, lg_c;
  logic [2:0]  k_q, k_n;          // forks done
  logic [2:0]  nfmax_q, nfmin_q, nfmax_c, nfmin_c;
  logic        done_q, cut_q;
  logic        fin, cut;
  logic [2:0]  k_e;               // forks done before this cycle's operation

  assign k_e = start ? 3'd0 : k_q;

  // ---------------------------------------------------------------- helpers
  function automatic int cost(illr_t a, logic v);
    return (v != a.s) ? int'(a.m) : 0;
  endfunction

  function automatic logic [4:0] argmin(path_t p, int lg, int cls);
    int best, bm;
    best = 0; bm = 1 << 30;
    for (int i = 0; i < NSMAX; i++)
      if (i < (1 << lg) && (cls < 0 || (i % 2) == cls) && int'(p.lam[i].m) < bm) begin
        bm = int'(p.lam[i].m);
        best = i;
      end
    return 5'(best);
  endfunction

  function automatic path_t do_wg(path_t p, node_e t, int lg);
    path_t r;
    logic par0, par1;
    r = p;
    par0 = 1'b0; par1 = 1'b0;
    for (int i = 0; i < NSMAX; i++)
      if (i < (1 << lg)) begin
        if (t == NT_T3 && (i % 2) == 1) par1 ^= p.x[i];
        else                            par0 ^= p.x[i];
      end
    r.wg0 = argmin(p, lg, (t == NT_T3) ? 0 : -1);
    r.wg1 = argmin(p, lg, 1);
    if (par0) begin
      r.x[r.wg0] = ~r.x[r.wg0];
      r.pm = pm_add(r.pm, int'(p.lam[r.wg0].m));
    end
    if (t == NT_T3 && par1) begin
      r.x[r.wg1] = ~r.x[r.wg1];
      r.pm = pm_add(r.pm, int'(p.lam[r.wg1].m));
    end
    return r;
  endfunction

  function automatic logic eligible(logic [4:0] w0, logic [4:0] w1, node_e t, int lg, int i);
    if (i >= (1 << lg)) return 1'b0;
    if (t == NT_SPC && i == int'(w0)) return 1'b0;
    if (t == NT_T3 && (i == int'(w0) || i == int'(w1))) return 1'b0;
    return 1'b1;
  endfunction

  function automatic path_t do_cas(path_t p, node_e t, int lg);
    path_t r;
    logic [NSMAX-1:0]       el;
    logic [IMAGW-1:0]       mg [NSMAX];
    int rk;
    r = p;
    r.q = '0;
    rk = 0;
    for (int i = 0; i < NSMAX; i++) begin
      el[i] = eligible(p.wg0, p.wg1, t, lg, i);
      mg[i] = p.lam[i].m;
    end
    for (int i = 0; i < NSMAX; i++) begin
      if (el[i]) begin
        rk = 0;
        for (int j = 0; j < NSMAX; j++)
          if (el[j] && (mg[j] < mg[i] || (mg[j] == mg[i] && j < i)))
            rk++;
        if (rk < TFMAX) r.q[rk] = 5'(i);
      end
    end
    return r;
  endfunction

  function automatic logic [4:0] partner(path_t p, node_e t, logic [4:0] pos);
    if (t == NT_T3) return pos[0] ? p.wg1 : p.wg0;
    return p.wg0;
  endfunction

  // PM of path p after flipping fork position q[k] (and its Wagner partner)
  function automatic logic [PMW-1:0] flip_pm(path_t p, node_e t, int k);
    int v;
    logic [4:0] a, b;
    a = p.q[k];
    v = int'(p.pm) + cost(p.lam[a], ~p.x[a]) - cost(p.lam[a], p.x[a]);
    if (t != NT_R1) begin
      b = partner(p, t, a);
      v = v + cost(p.lam[b], ~p.x[b]) - cost(p.lam[b], p.x[b]);
    end
    if (v < 0) v = 0;
    return (v > int'(PM_MAX)) ? PM_MAX : PMW'(v);
  endfunction

  function automatic path_t flip(path_t p, node_e t, int k);
    path_t r;
    logic [4:0] a;
    r = p;
    a = p.q[k];
    r.pm = flip_pm(p, t, k);
    r.x[a] = ~r.x[a];
    if (t != NT_R1) r.x[partner(p, t, a)] = ~r.x[partner(p, t, a)];
    return r;
  endfunction

  function automatic int tmax_of(node_e t);
    case (t)
      NT_R1:   return TMAX_R1;
      NT_SPC:  return TMAX_SPC;
      default: return TMAX_T3;
    endcase
  endfunction

  function automatic int tmin_of(node_e t);
    case (t)
      NT_R1:   return TMIN_R1;
      NT_SPC:  return TMIN_SPC;
      default: return TMIN_T3;
    endcase
  endfunction

  // ------------------------------------------------------ operation select
  always_comb begin
    int kfree;
    typ_c = start ? typ : typ_q;
    lg_c  = start ? lg  : lg_q;
    kfree = (typ == NT_R1) ? (1 << lg) : (typ == NT_SPC) ? (1 << lg) - 1 : (1 << lg) - 2;
    nfmax_c = start ? 3'((tmax_of(typ) < kfree) ? tmax_of(typ) : kfree) : nfmax_q;
    nfmin_c = start ? 3'((tmin_of(typ) < kfree) ? tmin_of(typ) : kfree) : nfmin_q;
    if (start) begin
      case (typ)
        NT_R0, NT_REP: op_c = OP_ADD;
        NT_R1:         op_c = merged ? OP_PF  : OP_CAS;
        default:       op_c = merged ? OP_CAS : OP_WG;
      endcase
      for (int l = 0; l < L; l++) begin
        src[l]       = '0;
        src[l].valid = valid_in[l];
        src[l].pm    = pm_in[l];
        src[l].tag   = tag_in[l];
        for (int i = 0; i < NSMAX; i++) begin
          src[l].lam[i] = (i < (1 << lg)) ? lam_in[l][i] : '0;
          src[l].x[i]   = (i < (1 << lg)) ? lam_in[l][i].s : 1'b0;
        end
        if (merged && typ == NT_R1) src[l] = do_cas(src[l], typ, int'(lg));
        if (merged && typ != NT_R1) src[l] = do_wg(src[l], typ, int'(lg));
      end
    end else begin
      op_c = op_q;
      src  = p_q;
    end
  end

  // ------------------------------------------------------------ datapath
  logic [PMW-1:0] c_pm [2*L];
  logic [2*L-1:0] c_valid;
  logic [$clog2(2*L)-1:0] s_sel [L];
  logic [L-1:0]   s_valid;
  logic [PMW-1:0] s_pm [L];

  always_comb begin
    for (int l = 0; l < L; l++) begin
      c_valid[2*l]   = src[l].valid;
      c_valid[2*l+1] = src[l].valid;
      if (op_c == OP_PFREP) begin
        c_pm[2*l]   = src[l].pm;
        c_pm[2*l+1] = src[l].pm1;
      end else begin
        c_pm[2*l]   = src[l].pm;
        c_pm[2*l+1] = flip_pm(src[l], typ_c, int'(k_e));
      end
    end
  end


  list_sorter #(.M(2*L), .L(L)) u_sort (
    .pm(c_pm), .valid(c_valid), .sel(s_sel), .sel_valid(s_valid), .sel_pm(s_pm)
  );

  always_comb begin
    int k, c0, c1;
    logic more;
    path_t par;
    more = 1'b0;
    c0   = 0;
    c1   = 0;
    par  = '0;
    k    = int'(k_e);
    nxt  = src;
    k_n  = 3'(k);
    fin  = 1'b0;
    cut  = 1'b0;
    op_n = op_c;
    case (op_c)
      OP_ADD: begin
        for (int l = 0; l < L; l++) begin
          c0 = 0; c1 = 0;
          for (int i = 0; i < NSMAX; i++)
            if (i < (1 << lg_c)) begin
              c0 += cost(src[l].lam[i], 1'b0);
              c1 += cost(src[l].lam[i], 1'b1);
            end
          nxt[l].pm  = pm_add(src[l].pm, c0);
          nxt[l].pm1 = pm_add(src[l].pm, c1);
          nxt[l].x   = '0;
        end
        if (typ_c == NT_REP) op_n = OP_PFREP;
        else fin = 1'b1;
      end
      OP_PFREP, OP_PF: begin
        for (int m = 0; m < L; m++) begin
          par = src[3'(s_sel[m] >> 1)];
          if (op_c == OP_PFREP) begin
            nxt[m] = par;
            nxt[m].pm = s_sel[m][0] ? par.pm1 : par.pm;
            for (int i = 0; i < NSMAX; i++) nxt[m].x[i] = s_sel[m][0] && (i < (1 << lg_c));
          end else begin
            nxt[m] = s_sel[m][0] ? flip(par, typ_c, k) : par;
          end
          nxt[m].valid = s_valid[m];
          // normalise: best survivor gets PM 0
          nxt[m].pm = (s_valid[0] && nxt[m].pm >= s_pm[0]) ? nxt[m].pm - s_pm[0] : nxt[m].pm;
        end
        if (op_c == OP_PFREP) fin = 1'b1;
        else begin
          k_n  = 3'(k + 1);
          more = (k + 1 < int'(nfmax_c)) &&
                 ((k + 1 < int'(nfmin_c)) || !(s2_en && other_waiting));
          if (!more) fin = 1'b1;
          cut = !more && (k + 1 < int'(nfmax_c));
        end
      end
      OP_WG: begin
        for (int l = 0; l < L; l++) nxt[l] = do_wg(src[l], typ_c, int'(lg_c));
        op_n = OP_CAS;
      end
      OP_CAS: begin
        for (int l = 0; l < L; l++) nxt[l] = do_cas(src[l], typ_c, int'(lg_c));
        op_n = OP_PF;
      end
      default: ;
    endcase
    if (fin) op_n = OP_IDLE;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      op_q    <= OP_IDLE;
      typ_q   <= NT_R0;
      lg_q    <= '0;
      k_q     <= '0;
      nfmax_q <= '0;
      nfmin_q <= '0;
      done_q  <= 1'b0;
      cut_q   <= 1'b0;
      for (int l = 0; l < L; l++) p_q[l] <= '0;
    end else begin
      done_q <= 1'b0;
      cut_q  <= 1'b0;
      if (start || op_q != OP_IDLE) begin
        p_q     <= nxt;
        op_q    <= op_n;
        typ_q   <= typ_c;
        lg_q    <= lg_c;
        k_q     <= k_n;
        nfmax_q <= nfmax_c;
        nfmin_q <= nfmin_c;
        done_q  <= fin;
        cut_q   <= cut;
      end
    end
  end

  assign busy = (op_q != OP_IDLE);
  assign done = done_q;
  assign forks = k_q;
  assign s2_cut = cut_q;

  always_comb begin
    int r;
    case (op_q)
      OP_ADD:   r = (typ_q == NT_REP) ? 2 : 1;
      OP_PFREP: r = 1;
      OP_WG:    r = 2 + int'(nfmax_q);
      OP_CAS:   r = 1 + int'(nfmax_q);
      OP_PF:    r = int'(nfmax_q) - int'(k_q);
      default:  r = 0;
    endcase
    remaining = 4'(r);
  end

  always_comb begin
    for (int l = 0; l < L; l++) begin
      x_out[l]     = p_q[l].x;
      pm_out[l]    = p_q[l].pm;
      valid_out[l] = p_q[l].valid;
      tag_out[l]   = p_q[l].tag;
    end
  end

  a_no_start_when_busy: assert property (@(posedge clk) disable iff (!rst_n) start |-> !busy);

endmodule
