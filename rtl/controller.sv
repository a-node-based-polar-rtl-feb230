// controller: top-level control of the two interleaved frame slots.  It loads
// frames, runs the interleaving mode, arbitrates the shared SCU and NPU
// between the two slot sub-controllers, returns results and counts events.
//
// Frame loading: a frame enters as N/IN_PAR beats of IN_PAR channel LLRs
// (in_valid/in_ready handshake, natural order); the information set and the
// frame id are taken with the last beat (the information set is written by
// the datapath on ld_a_we).  In Modes I and III a frame goes to a
// free slot (slot 0 first); in Mode II a frame needs both slots and is written
// to both.
//
// Modes (cfg_mode, change only while idle):
//   Mode I   frame interleaving: each slot decodes its own frame once on the
//            original factor graph.
//   Mode II  graph interleaving: both slots decode the same frame, slot 0 on
//            graphs 0,2,4,6 and slot 1 on graphs 1,3,5,7; the first attempt
//            that passes the CRC wins and the other slot is dropped at its
//            next node boundary; after NGRAPH graphs without a pass the last
//            result of slot 0 is returned with crc_ok = 0.
//   Mode III hybrid interleaving: each slot decodes its own frame and, when
//            the CRC fails, decodes it again on the next graph, up to NGRAPH
//            graphs, while the other slot keeps decoding its own frame.
//
// Arbitration: the SCU is granted for a whole node descent (until scu_last),
// alternating between slots when both request.  The NPU accepts the request
// of one slot per cycle whose node kind (basic or SR) it can take; slots take
// turns.  req_pending tells the NPU which slots wait (used by S2).
//
// Results: one result per cycle at most on out_* (no back-pressure), from a
// finished slot, slot 0 first.
//
// Paper: top-level controller with per-frame sub-controllers, three modes,
// CRC-aided early termination.  This design's choices: the loading protocol,
// the graph assignment and the fallback result of Mode II, the arbitration
// order.
module controller
  import polar_pkg::*;
#(
  parameter int N      = 1024,
  parameter int PE     = 64,
  parameter int NST    = 3,
  parameter int IN_PAR = 16,
  parameter int NGRAPH = 8,
  parameter int IDW    = 8,
  parameter int LOGN   = $clog2(N)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  mode_e           cfg_mode,
  // frame input
  input  logic            in_valid,
  output logic            in_ready,
  input  logic [IDW-1:0]  in_id,
  output logic [1:0]      ld_we,          // write channel chunk into slot s
  output logic [LOGN-1:0] ld_addr,
  output logic [1:0]      ld_a_we,        // write information set into slot s
  // per-slot control towards the datapath
  output logic [3:0]      graph   [2],
  output logic [1:0]      gen_start,
  output logic [1:0]      pm_init,
  input  logic [1:0]      fifo_empty,
  input  instr_t          fifo_dout [2],
  output logic [1:0]      fifo_pop,
  // SCU
  output logic            scu_valid,
  output logic            scu_slot,
  output logic [3:0]      scu_stage,
  output logic            scu_op_g,
  output logic [LOGN-1:0] scu_chunk,
  output logic [1:0]      scu_nchain,
  // NPU
  input  logic            npu_ready_basic,
  input  logic            npu_ready_sr,
  output logic            npu_req_valid,
  output logic            npu_req_slot,
  output instr_t          npu_req_instr,
  output logic [1:0]      npu_req_pending,
  input  logic            npu_done,
  input  logic            npu_done_slot,
  // CRC
  output logic [1:0]      crc_check,
  input  logic [1:0]      crc_ok,
  input  logic [N-1:0]    res_u [2],
  // results
  output logic            out_valid,
  output logic [IDW-1:0]  out_id,
  output logic [N-1:0]    out_u,
  output logic            out_crc_ok,
  output logic [3:0]      out_graphs,     // graphs tried for this frame
  // event counters
  output logic [31:0]     cnt_frames,
  output logic [31:0]     cnt_attempts,
  output logic [31:0]     cnt_crc_fail,
  output logic [31:0]     cnt_stall,
  output logic [31:0]     cnt_interleave  // cycles with both slots decoding
);

  localparam int NBEAT = N / IN_PAR;

  typedef enum logic [1:0] {C_FREE, C_RUN, C_FIN} cst_e;

  cst_e           cst_q   [2];
  logic [1:0]     launch_q;
  logic [1:0]     drop_q;
  logic [1:0]     ok_q;
  logic [3:0]     graph_q [2];
  logic [3:0]     tries_q [2];
  logic [IDW-1:0] id_q    [2];
  logic [N-1:0]   u_q     [2];
  logic           pair_q;             // current frame pair runs in Mode II

  // loader
  logic           ld_act_q;
  logic [1:0]     ld_mask_q;
  logic [LOGN-1:0] ld_cnt_q;
  logic [1:0]     ld_mask_new;
  logic           beat, beat_last;

  // sub-controller wires
  logic [1:0]      sc_scu_req, sc_scu_gnt, sc_scu_last, sc_npu_req, sc_npu_acc;
  logic [1:0]      sc_npu_done, sc_done, sc_busy, sc_stall_scu, sc_stall_npu;
  logic [3:0]      sc_stage  [2];
  logic [1:0]      sc_op_g;
  logic [LOGN-1:0] sc_chunk  [2];
  logic [1:0]      sc_nchain [2];
  instr_t          sc_instr  [2];

  for (genvar s = 0; s < 2; s++) begin : g_sc
    sub_ctrl #(.N(N), .PE(PE), .NST(NST)) u_sc (
      .clk, .rst_n, .launch(launch_q[s]), .drop(drop_q[s]),
      .gen_start(gen_start[s]), .pm_init(pm_init[s]),
      .fifo_empty(fifo_empty[s]), .fifo_dout(fifo_dout[s]), .fifo_pop(fifo_pop[s]),
      .scu_req(sc_scu_req[s]), .scu_gnt(sc_scu_gnt[s]), .scu_stage(sc_stage[s]),
      .scu_op_g(sc_op_g[s]), .scu_chunk(sc_chunk[s]), .scu_nchain(sc_nchain[s]),
      .scu_last(sc_scu_last[s]),
      .npu_req(sc_npu_req[s]), .npu_instr(sc_instr[s]), .npu_acc(sc_npu_acc[s]),
      .npu_done(sc_npu_done[s]),
      .crc_check(crc_check[s]), .attempt_done(sc_done[s]), .busy(sc_busy[s]),
      .stall_scu(sc_stall_scu[s]), .stall_npu(sc_stall_npu[s])
    );
    assign sc_npu_done[s] = npu_done && (npu_done_slot == 1'(s));
    assign graph[s] = graph_q[s];
  end

  // ---------------- SCU arbitration ----------------
  logic scu_lock_q, scu_own_q, scu_pick;
  always_comb begin
    if (scu_lock_q && sc_scu_req[scu_own_q]) scu_pick = scu_own_q;
    else if (sc_scu_req[0] && sc_scu_req[1]) scu_pick = ~scu_own_q;
    else scu_pick = sc_scu_req[1];
    sc_scu_gnt = '0;
    sc_scu_gnt[scu_pick] = sc_scu_req[scu_pick];
    scu_valid  = |sc_scu_gnt;
    scu_slot   = scu_pick;
    scu_stage  = sc_stage[scu_pick];
    scu_op_g   = sc_op_g[scu_pick];
    scu_chunk  = sc_chunk[scu_pick];
    scu_nchain = sc_nchain[scu_pick];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      scu_lock_q <= 1'b0;
      scu_own_q  <= 1'b0;
    end else if (scu_valid) begin
      scu_own_q  <= scu_pick;
      scu_lock_q <= !sc_scu_last[scu_pick];
    end else begin
      scu_lock_q <= 1'b0;
    end
  end

  // ---------------- NPU arbitration ----------------
  logic       npu_last_q;
  logic [1:0] npu_ok;
  logic       npu_pick;
  always_comb begin
    for (int s = 0; s < 2; s++)
      npu_ok[s] = sc_npu_req[s] &&
                  ((sc_instr[s].typ == NT_SR) ? npu_ready_sr : npu_ready_basic);
    if (npu_ok[0] && npu_ok[1]) npu_pick = ~npu_last_q;
    else                        npu_pick = npu_ok[1];
    sc_npu_acc = '0;
    sc_npu_acc[npu_pick] = npu_ok[npu_pick];
    npu_req_valid   = npu_ok[npu_pick];
    npu_req_slot    = npu_pick;
    npu_req_instr   = sc_instr[npu_pick];
    npu_req_pending = sc_npu_req & ~sc_npu_acc;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) npu_last_q <= 1'b0;
    else if (npu_req_valid) npu_last_q <= npu_pick;
  end

  // ---------------- frame loading ----------------
  always_comb begin
    ld_mask_new = '0;
    if (cfg_mode == MODE_II) begin
      if (cst_q[0] == C_FREE && cst_q[1] == C_FREE) ld_mask_new = 2'b11;
    end else if (cst_q[0] == C_FREE) begin
      ld_mask_new = 2'b01;
    end else if (cst_q[1] == C_FREE) begin
      ld_mask_new = 2'b10;
    end
  end

  assign in_ready  = ld_act_q || (ld_mask_new != '0);
  assign beat      = in_valid && in_ready;
  assign beat_last = beat && (ld_act_q ? (int'(ld_cnt_q) == NBEAT - 1) : (NBEAT == 1));
  assign ld_we     = beat ? (ld_act_q ? ld_mask_q : ld_mask_new) : 2'b00;
  assign ld_addr   = ld_act_q ? ld_cnt_q : '0;
  assign ld_a_we   = beat_last ? ld_we : 2'b00;

  // ---------------- slot control ----------------
  logic [1:0] fin_now;   // slot result becomes final this cycle
  logic [1:0] relaunch;
  logic       out_sel;
  logic       out_fire;
  logic       pair_won;

  always_comb begin
    fin_now  = '0;
    relaunch = '0;
    pair_won = pair_q && ((sc_done[0] && crc_ok[0]) || (sc_done[1] && crc_ok[1]) ||
                          ok_q[0] || ok_q[1]);
    for (int s = 0; s < 2; s++) begin
      if (cst_q[s] == C_RUN) begin
        if (sc_done[s]) begin
          if (crc_ok[s] || drop_q[s] || pair_won || cfg_mode == MODE_I ||
              int'(graph_q[s]) + (pair_q ? 2 : 1) >= NGRAPH)
            fin_now[s] = 1'b1;
          else
            relaunch[s] = 1'b1;
        end else if (!sc_busy[s] && !launch_q[s] && drop_q[s]) begin
          fin_now[s] = 1'b1;   // dropped at a node boundary
        end
      end
    end
    // output: single slot done, or pair with both slots done
    out_sel  = 1'b0;
    out_fire = 1'b0;
    if (pair_q) begin
      if (cst_q[0] == C_FIN && cst_q[1] == C_FIN) begin
        out_fire = 1'b1;
        out_sel  = (!ok_q[0] && ok_q[1]);
      end
    end else if (cst_q[0] == C_FIN) begin
      out_fire = 1'b1;
      out_sel  = 1'b0;
    end else if (cst_q[1] == C_FIN) begin
      out_fire = 1'b1;
      out_sel  = 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < 2; s++) begin
        cst_q[s]   <= C_FREE;
        graph_q[s] <= '0;
        tries_q[s] <= '0;
        id_q[s]    <= '0;
        u_q[s]     <= '0;
      end
      launch_q   <= '0;
      drop_q     <= '0;
      ok_q       <= '0;
      pair_q     <= 1'b0;
      ld_act_q   <= 1'b0;
      ld_mask_q  <= '0;
      ld_cnt_q   <= '0;
      out_valid  <= 1'b0;
      out_id     <= '0;
      out_u      <= '0;
      out_crc_ok <= 1'b0;
      out_graphs <= '0;
      cnt_frames <= '0;
      cnt_attempts <= '0;
      cnt_crc_fail <= '0;
      cnt_stall  <= '0;
      cnt_interleave <= '0;
    end else begin
      launch_q  <= '0;
      out_valid <= 1'b0;

      // loader
      if (beat) begin
        if (!ld_act_q) begin
          ld_mask_q <= ld_mask_new;
          ld_act_q  <= !beat_last;
          ld_cnt_q  <= LOGN'(1);
        end else begin
          ld_cnt_q  <= ld_cnt_q + 1'b1;
          if (beat_last) ld_act_q <= 1'b0;
        end
        for (int s = 0; s < 2; s++)
          if (ld_we[s]) begin
            cst_q[s]  <= C_RUN;   // slot reserved from the first beat
            drop_q[s] <= 1'b0;
          end
      end
      if (beat_last) begin
        for (int s = 0; s < 2; s++) begin
          if (ld_we[s]) begin
            launch_q[s] <= 1'b1;
            id_q[s]     <= in_id;
            graph_q[s]  <= (ld_we == 2'b11) ? 4'(s) : 4'd0;
            tries_q[s]  <= 4'd1;
            ok_q[s]     <= 1'b0;
          end
        end
        pair_q <= (ld_we == 2'b11);
      end

      // attempts
      for (int s = 0; s < 2; s++) begin
        if (sc_done[s]) begin
          u_q[s]       <= res_u[s];
          if (crc_ok[s]) ok_q[s] <= 1'b1;
        end
        if (relaunch[s]) begin
          launch_q[s] <= 1'b1;
          graph_q[s]  <= graph_q[s] + (pair_q ? 4'd2 : 4'd1);
          tries_q[s]  <= tries_q[s] + 4'd1;
        end
        if (fin_now[s]) cst_q[s] <= C_FIN;
      end
      cnt_attempts <= cnt_attempts + 32'(sc_done[0]) + 32'(sc_done[1]);
      cnt_crc_fail <= cnt_crc_fail + 32'(sc_done[0] && !crc_ok[0]) +
                      32'(sc_done[1] && !crc_ok[1]);
      // Mode II: drop the partner once one slot has passed
      if (pair_q && pair_won)
        for (int s = 0; s < 2; s++)
          if (cst_q[s] == C_RUN && !(sc_done[s] && crc_ok[s]) && !ok_q[s]) drop_q[s] <= 1'b1;

      // results
      if (out_fire) begin
        out_valid  <= 1'b1;
        out_id     <= id_q[out_sel];
        out_u      <= u_q[out_sel];
        out_crc_ok <= ok_q[out_sel];
        out_graphs <= pair_q ? 4'(int'(tries_q[0]) + int'(tries_q[1])) : tries_q[out_sel];
        cnt_frames <= cnt_frames + 32'd1;
        if (pair_q) begin
          cst_q[0] <= C_FREE;
          cst_q[1] <= C_FREE;
          pair_q   <= 1'b0;
        end else begin
          cst_q[out_sel] <= C_FREE;
        end
      end

      cnt_stall <= cnt_stall + 32'(sc_stall_scu[0] || sc_stall_npu[0]) +
                   32'(sc_stall_scu[1] || sc_stall_npu[1]);
      if (sc_busy[0] && sc_busy[1]) cnt_interleave <= cnt_interleave + 32'd1;
    end
  end

endmodule
