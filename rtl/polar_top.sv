// polar_top: node-based SC list polar decoder with two-frame interleaving and
// graph ensemble decoding.
//
// Structure: one online instruction generator with one instruction FIFO per
// frame slot; the controller with two slot sub-controllers; one SCU and one
// NPU (RSU + BNU) shared by the two slots; per slot a memory unit (channel
// LLRs, information set, internal LLRs, u bits), a partial-sum unit and a
// PM/CRC unit; and the permutation generator that presents each slot's
// channel LLRs and information set on the slot's current factor graph and
// returns decoded bits in natural order.
//
// Interface:
//   cfg_mode   MODE_I / MODE_II / MODE_III (change only while idle)
//   cfg_s1     enable S1, RSU processing overlapped with the other frame's BNU
//   cfg_s2     enable S2, path forking cut to the lower bound when the other
//              frame waits for the NPU
//   in_*       a frame is N/IN_PAR beats of IN_PAR 6-bit sign-magnitude LLRs in
//              natural order; in_info (1 = information or CRC bit, the last 11
//              information bits carry the CRC11) and in_id are sampled on the
//              last beat
//   out_*      one pulse per frame: id, the N decoded u bits (natural order),
//              whether the CRC passed and how many graphs were decoded
//   cnt_*      event counters (frames, attempts, CRC failures, stall cycles,
//              interleaved cycles, S1 overlaps, S2 cuts)
// Latency depends on the code: each node costs its SCU cycles, its NPU cycles
// (Fig. 7 of the design description: R0 1, REP 2, R1 1+T, SPC/TYPE-III 2+T,
// SR +1 or +2 for the RSU) and one commit cycle, and the CRC takes one cycle.
//
// Defaults follow the paper's uplink instance: N = 1024, L = 8, 64 PEs, 3 SCU
// stages, |P| = 8 graphs, 4 fixed bottom stages, T = [2,3,3] with lower bound
// [1,1,2].  The frame input width, the register-based memories and the
// result port are this design's choices.
module polar_top
  import polar_pkg::*;
#(
  parameter int N        = 1024,
  parameter int L        = 8,
  parameter int PE       = 64,
  parameter int NST      = 3,
  parameter int IN_PAR   = 16,
  parameter int NGRAPH   = 8,
  parameter int FIX      = 4,
  parameter int FIFO_D   = 4,
  parameter int IDW      = 8,
  parameter int TMAX_R1  = 2,
  parameter int TMAX_SPC = 3,
  parameter int TMAX_T3  = 3,
  parameter int TMIN_R1  = 1,
  parameter int TMIN_SPC = 1,
  parameter int TMIN_T3  = 2,
  parameter int LOGN     = $clog2(N),
  parameter int LW       = $clog2(L)
) (
  input  logic           clk,
  input  logic           rst_n,
  input  mode_e          cfg_mode,
  input  logic           cfg_s1,
  input  logic           cfg_s2,
  input  logic           in_valid,
  output logic           in_ready,
  input  llr_t           in_llr [IN_PAR],
  input  logic [N-1:0]   in_info,
  input  logic [IDW-1:0] in_id,
  output logic           out_valid,
  output logic [IDW-1:0] out_id,
  output logic [N-1:0]   out_u,
  output logic           out_crc_ok,
  output logic [3:0]     out_graphs,
  output logic [31:0]    cnt_frames,
  output logic [31:0]    cnt_attempts,
  output logic [31:0]    cnt_crc_fail,
  output logic [31:0]    cnt_stall,
  output logic [31:0]    cnt_interleave,
  output logic [31:0]    cnt_s1,
  output logic [31:0]    cnt_s2
);

  // controller <-> datapath
  logic [1:0]      ld_we, ld_a_we;
  logic [LOGN-1:0] ld_addr;
  logic [3:0]      graph [2];
  logic [1:0]      gen_start, pm_init, fifo_empty, fifo_full, fifo_pop, gen_push, gen_busy;
  instr_t          fifo_dout [2];
  instr_t          gen_instr [2];
  logic            scu_valid, scu_slot, scu_op_g;
  logic [3:0]      scu_stage;
  logic [LOGN-1:0] scu_chunk;
  logic [1:0]      scu_nchain;
  logic            npu_ready_basic, npu_ready_sr, npu_req_valid, npu_req_slot;
  instr_t          npu_req_instr;
  logic [1:0]      npu_req_pending;
  logic            npu_done, npu_done_slot;
  instr_t          npu_done_instr;
  logic [1:0]      crc_check, crc_ok;
  logic [N-1:0]    res_u [2];
  logic [1:0]      bnu_owner;
  logic            ev_s1, ev_s2;

  // memories
  llr_t            chan    [2][N];
  logic [N-1:0]    info    [2];
  llr_t            llr     [2][L][N];
  logic [N-1:0]    u       [2][L];
  logic [N-1:0]    beta    [2][L];
  llr_t            chan_p  [2][N];
  logic [N-1:0]    info_p  [2];
  logic [N-1:0]    u_nat   [2][L];
  logic [PMW-1:0]  pm      [2][L];
  logic [L-1:0]    pvalid  [2];
  logic [LW-1:0]   res_path [2];

  // SCU
  logic [NST-1:0]  wr_en;
  logic [3:0]      wr_stage [NST];
  logic [LOGN-1:0] wr_base  [NST];
  logic [LOGN:0]   wr_len   [NST];
  llr_t            wr_data  [NST][L][PE];

  // NPU
  llr_t            req_lam  [L][NSMAX];
  logic [LW-1:0]   nptr     [L];
  logic [NSMAX-1:0] nbeta   [L];
  logic [PMW-1:0]  npm      [L];
  logic [L-1:0]    nvalid;

  controller #(.N(N), .PE(PE), .NST(NST), .IN_PAR(IN_PAR), .NGRAPH(NGRAPH), .IDW(IDW)) u_ctrl (
    .clk, .rst_n, .cfg_mode, .in_valid, .in_ready, .in_id,
    .ld_we, .ld_addr, .ld_a_we, .graph, .gen_start, .pm_init,
    .fifo_empty, .fifo_dout, .fifo_pop,
    .scu_valid, .scu_slot, .scu_stage, .scu_op_g, .scu_chunk, .scu_nchain,
    .npu_ready_basic, .npu_ready_sr, .npu_req_valid, .npu_req_slot, .npu_req_instr,
    .npu_req_pending, .npu_done, .npu_done_slot,
    .crc_check, .crc_ok, .res_u,
    .out_valid, .out_id, .out_u, .out_crc_ok, .out_graphs,
    .cnt_frames, .cnt_attempts, .cnt_crc_fail, .cnt_stall, .cnt_interleave
  );

  instr_gen #(.N(N)) u_gen (
    .clk, .rst_n, .start(gen_start), .info_set(info_p), .full(fifo_full),
    .push(gen_push), .instr(gen_instr), .busy(gen_busy)
  );

  perm_gen #(.N(N), .L(L), .FIX(FIX)) u_perm (
    .graph, .chan, .info, .u,
    .chan_p, .info_p, .u_nat
  );

  scu #(.N(N), .L(L), .PE(PE), .NST(NST)) u_scu (
    .chan(chan_p[scu_slot]), .llr(llr[scu_slot]), .beta(beta[scu_slot]),
    .valid(scu_valid), .stage(scu_stage), .op_g(scu_op_g), .chunk(scu_chunk),
    .nchain(scu_nchain),
    .wr_en, .wr_stage, .wr_base, .wr_len, .wr_data
  );

  // node LLRs of the requesting slot: stage s is stored from index 2^s
  always_comb begin
    int s;
    s = int'(npu_req_instr.stage);
    for (int l = 0; l < L; l++)
      for (int j = 0; j < NSMAX; j++)
        req_lam[l][j] = (j < (1 << s)) ? llr[npu_req_slot][l][((1 << s) + j) % N] : '0;
  end

  npu #(.L(L), .TMAX_R1(TMAX_R1), .TMAX_SPC(TMAX_SPC), .TMAX_T3(TMAX_T3),
        .TMIN_R1(TMIN_R1), .TMIN_SPC(TMIN_SPC), .TMIN_T3(TMIN_T3)) u_npu (
    .clk, .rst_n, .s1_en(cfg_s1), .s2_en(cfg_s2), .req_pending(npu_req_pending),
    .req_valid(npu_req_valid), .req_slot(npu_req_slot), .req_instr(npu_req_instr),
    .req_lam, .req_pm(pm[npu_req_slot]), .req_pvalid(pvalid[npu_req_slot]),
    .ready_basic(npu_ready_basic), .ready_sr(npu_ready_sr),
    .done(npu_done), .done_slot(npu_done_slot), .done_instr(npu_done_instr),
    .ptr(nptr), .beta(nbeta), .pm_out(npm), .valid_out(nvalid),
    .bnu_owner, .ev_s1, .ev_s2
  );

  for (genvar s = 0; s < 2; s++) begin : g_slot
    logic commit;
    assign commit = npu_done && (npu_done_slot == 1'(s));

    instr_fifo #(.DEPTH(FIFO_D)) u_fifo (
      .clk, .rst_n, .flush(gen_start[s]), .push(gen_push[s]), .din(gen_instr[s]),
      .pop(fifo_pop[s]), .dout(fifo_dout[s]), .empty(fifo_empty[s]), .full(fifo_full[s])
    );

    mem_unit #(.N(N), .L(L), .PE(PE), .NST(NST), .IN_PAR(IN_PAR)) u_mem (
      .clk, .rst_n, .ch_we(ld_we[s]), .ch_addr(ld_addr), .ch_data(in_llr),
      .a_we(ld_a_we[s]), .a_in(in_info),
      .scu_we(wr_en & {NST{scu_slot == 1'(s)}}), .scu_stage(wr_stage), .scu_base(wr_base),
      .scu_len(wr_len), .scu_data(wr_data),
      .commit, .ptr(nptr), .node_x(nbeta), .node_stage(npu_done_instr.stage),
      .node_pos(npu_done_instr.pos),
      .chan(chan[s]), .info_set(info[s]), .llr(llr[s]), .u(u[s])
    );

    psum_unit #(.N(N), .L(L)) u_psum (
      .clk, .rst_n, .commit, .ptr(nptr), .node_x(nbeta),
      .node_stage(npu_done_instr.stage), .node_pos(npu_done_instr.pos), .beta(beta[s])
    );

    pm_crc_unit #(.N(N), .L(L)) u_pmc (
      .clk, .rst_n, .init(pm_init[s]), .update(commit), .pm_in(npm), .valid_in(nvalid),
      .check(crc_check[s]), .info_set(info[s]), .u(u_nat[s]),
      .pm(pm[s]), .valid(pvalid[s]), .res_ok(crc_ok[s]), .res_path(res_path[s]),
      .res_u(res_u[s])
    );
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt_s1 <= '0;
      cnt_s2 <= '0;
    end else begin
      cnt_s1 <= cnt_s1 + 32'(ev_s1);
      cnt_s2 <= cnt_s2 + 32'(ev_s2);
    end
  end

  // the generator never pushes into a full FIFO
  a_push_ok: assert property (@(posedge clk) disable iff (!rst_n)
                              (gen_push & fifo_full) == 2'b00);

endmodule
