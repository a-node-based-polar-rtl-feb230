// npu: node-processing unit, shared by the two interleaved frames.  It holds
// the repetition sequence unit (RSU) for the low-rate part of SR nodes and the
// basic node unit (BNU) for basic nodes and SR source nodes, separated by the
// RSU output register.
//
// A request carries a node instruction, the frame slot it belongs to, the
// node LLRs of all paths (read from that slot's internal LLR memory) and the
// slot's PMs.  Basic nodes go straight to the BNU; SR nodes first spend two
// cycles in the RSU, then the BNU decodes their source node on the RSU's
// output.  When the BNU finishes, done pulses with the slot, the node, the
// origin path (pointer) of each surviving path, the new PMs and the node
// codeword of each path (for an SR node the source codeword expanded by the
// chosen repetition sequence).
//
// Strategy S1 (s1_en): an SR node of one frame may enter the RSU while the BNU
// still works on the other frame, provided the BNU needs at least 2 more
// cycles, so the RSU work overlaps the other frame's path forking.  Without S1
// the whole NPU serves one node at a time.  Strategy S2 (s2_en): the BNU cuts
// its path forking to the lower bound when the frame that does not own the
// BNU is waiting for the NPU (req_pending of that slot).
//
// Interface: ready_basic / ready_sr tell the controller which kind of request
// can be accepted this cycle; accept is implied by req_valid with the matching
// ready.  ev_s1 and ev_s2 pulse when S1 overlapped an RSU run and when S2 cut
// a node short.
module npu
  import polar_pkg::*;
#(
  parameter int L        = 8,
  parameter int LW       = $clog2(L),
  parameter int TMAX_R1  = 2,
  parameter int TMAX_SPC = 3,
  parameter int TMAX_T3  = 3,
  parameter int TMIN_R1  = 1,
  parameter int TMIN_SPC = 1,
  parameter int TMIN_T3  = 2
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            s1_en,
  input  logic            s2_en,
  input  logic [1:0]      req_pending,   // slots waiting for the NPU
  input  logic            req_valid,
  input  logic            req_slot,
  input  instr_t          req_instr,
  input  llr_t            req_lam [L][NSMAX],
  input  logic [PMW-1:0]  req_pm  [L],
  input  logic [L-1:0]    req_pvalid,
  output logic            ready_basic,
  output logic            ready_sr,
  output logic            done,
  output logic            done_slot,
  output instr_t          done_instr,
  output logic [LW-1:0]   ptr     [L],
  output logic [NSMAX-1:0] beta   [L],
  output logic [PMW-1:0]  pm_out  [L],
  output logic [L-1:0]    valid_out,
  output logic [1:0]      bnu_owner,     // bit s: BNU or RSU holds slot s
  output logic            ev_s1,
  output logic            ev_s2
);
  localparam int TAGW = LW + WMAX;

  // RSU side
  logic            rsu_start, rsu_busy, rsu_ov, rsu_take;
  illr_t           rsu_lam [L][NSMAX];
  logic [PMW-1:0]  rsu_pm  [L];
  logic [L-1:0]    rsu_valid;
  logic [TAGW-1:0] rsu_tag [L];
  logic [2:0]      rsu_lgr;
  llr_t            rsu_in  [L][RSUMAX];
  instr_t          rsu_instr_q;
  logic            rsu_slot_q, rsu_act_q;

  // BNU side
  logic            bnu_start, bnu_busy, bnu_done, bnu_cut;
  node_e           bnu_typ;
  logic [2:0]      bnu_lg;
  logic            bnu_merged;
  illr_t           bnu_lam [L][NSMAX];
  logic [PMW-1:0]  bnu_pm  [L];
  logic [L-1:0]    bnu_vin;
  logic [TAGW-1:0] bnu_tag [L];
  logic [3:0]      bnu_rem;
  logic [NSMAX-1:0] bx     [L];
  logic [PMW-1:0]  bpm     [L];
  logic [L-1:0]    bvalid;
  logic [TAGW-1:0] btag    [L];
  logic [2:0]      bforks;
  instr_t          bnu_instr_q;
  logic            bnu_slot_q, bnu_act_q;

  logic take_basic, take_sr;

  always_comb begin
    ready_basic = !bnu_busy && !rsu_act_q;
    ready_sr    = !rsu_act_q &&
                  (!bnu_busy || (s1_en && bnu_rem >= 4'd2));
    take_basic  = req_valid && req_instr.typ != NT_SR && ready_basic;
    take_sr     = req_valid && req_instr.typ == NT_SR && ready_sr;
    rsu_start   = take_sr;
    // RSU result enters the BNU as soon as the BNU is free
    rsu_take    = rsu_ov && !bnu_busy;
    bnu_start   = take_basic || rsu_take;
  end

  for (genvar l = 0; l < L; l++) begin : g_rin
    for (genvar j = 0; j < RSUMAX; j++) begin : g_j
      assign rsu_in[l][j] = req_lam[l][j];
    end
  end

  rsu #(.L(L)) u_rsu (
    .clk, .rst_n, .start(rsu_start), .lg_s(3'(req_instr.stage)), .w(req_instr.w),
    .left_rep(req_instr.left_rep), .lam_in(rsu_in), .pm_in(req_pm),
    .valid_in(req_pvalid), .take(rsu_take), .busy(rsu_busy), .out_valid(rsu_ov),
    .lam_out(rsu_lam), .pm_out(rsu_pm), .valid_out(rsu_valid), .tag_out(rsu_tag),
    .lg_r(rsu_lgr)
  );

  always_comb begin
    if (rsu_take) begin
      bnu_typ    = rsu_instr_q.src;
      bnu_lg     = rsu_lgr;
      bnu_merged = 1'b1;
      bnu_lam    = rsu_lam;
      bnu_pm     = rsu_pm;
      bnu_vin    = rsu_valid;
      bnu_tag    = rsu_tag;
    end else begin
      bnu_typ    = req_instr.typ;
      bnu_lg     = 3'(req_instr.stage);
      bnu_merged = 1'b0;
      bnu_pm     = req_pm;
      bnu_vin    = req_pvalid;
      for (int l = 0; l < L; l++) begin
        bnu_tag[l] = TAGW'(l << WMAX);
        for (int j = 0; j < NSMAX; j++) bnu_lam[l][j] = widen(req_lam[l][j]);
      end
    end
  end

  bnu #(.L(L), .TAGW(TAGW), .TMAX_R1(TMAX_R1), .TMAX_SPC(TMAX_SPC), .TMAX_T3(TMAX_T3),
        .TMIN_R1(TMIN_R1), .TMIN_SPC(TMIN_SPC), .TMIN_T3(TMIN_T3)) u_bnu (
    .clk, .rst_n, .start(bnu_start), .typ(bnu_typ), .lg(bnu_lg), .merged(bnu_merged),
    .lam_in(bnu_lam), .pm_in(bnu_pm), .valid_in(bnu_vin), .tag_in(bnu_tag),
    .s2_en(s2_en), .other_waiting(req_pending[~bnu_slot_q]),
    .busy(bnu_busy), .remaining(bnu_rem), .done(bnu_done),
    .x_out(bx), .pm_out(bpm), .valid_out(bvalid), .tag_out(btag), .forks(bforks),
    .s2_cut(bnu_cut)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rsu_act_q   <= 1'b0;
      rsu_slot_q  <= 1'b0;
      rsu_instr_q <= '0;
      bnu_act_q   <= 1'b0;
      bnu_slot_q  <= 1'b0;
      bnu_instr_q <= '0;
      ev_s1       <= 1'b0;
    end else begin
      ev_s1 <= take_sr && bnu_busy;
      if (take_sr) begin
        rsu_act_q   <= 1'b1;
        rsu_slot_q  <= req_slot;
        rsu_instr_q <= req_instr;
      end else if (rsu_take) begin
        rsu_act_q   <= 1'b0;
      end
      if (bnu_done) bnu_act_q <= 1'b0;
      if (take_basic) begin
        bnu_act_q   <= 1'b1;
        bnu_slot_q  <= req_slot;
        bnu_instr_q <= req_instr;
      end else if (rsu_take) begin
        bnu_act_q   <= 1'b1;
        bnu_slot_q  <= rsu_slot_q;
        bnu_instr_q <= rsu_instr_q;
      end
    end
  end

  // results: pointers and node codewords (SR expansion)
  always_comb begin
    int r, nw, t;
    logic bt;
    logic [WMAX-1:0] sq;
    t = 0; bt = 1'b0; sq = '0;
    nw = (bnu_instr_q.typ == NT_SR) ? int'(bnu_instr_q.w) : 0;
    r  = int'(bnu_instr_q.stage) - nw;
    for (int m = 0; m < L; m++) begin
      ptr[m]       = LW'(btag[m] >> WMAX);
      sq           = btag[m][WMAX-1:0];
      pm_out[m]    = bpm[m];
      valid_out[m] = bvalid[m];
      beta[m]      = '0;
      for (int i = 0; i < NSMAX; i++) begin
        if (i < (1 << int'(bnu_instr_q.stage))) begin
          t  = i >> r;
          bt = 1'b0;
          for (int v = 0; v < WMAX; v++)
            if (v < nw && sq[v] && ((t >> (nw - 1 - v)) & 1) == 0) bt = ~bt;
          beta[m][i] = bx[m][i % (1 << r)] ^ bt;
        end
      end
    end
  end

  assign done       = bnu_done;
  assign done_slot  = bnu_slot_q;
  assign done_instr = bnu_instr_q;
  assign ev_s2      = bnu_cut;

  always_comb begin
    bnu_owner = '0;
    if (bnu_act_q) bnu_owner[bnu_slot_q] = 1'b1;
    if (rsu_act_q) bnu_owner[rsu_slot_q] = 1'b1;
  end

endmodule
