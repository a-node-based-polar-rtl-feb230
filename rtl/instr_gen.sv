// instr_gen: online instruction generator for two frame contexts.
//
// Each context (one per interleaved frame slot) holds the information-set
// bit vector A of its frame (A' when a permuted factor graph is decoded) and a
// window position pos.  Every clock cycle the generator serves one context
// whose instruction FIFO has room: it slides an NSMAX-bit window to pos,
// identifies the node that starts there with node_detect, pushes one node
// instruction and advances pos by the node length.  A context finishes with
// the instruction whose last flag is set.  When both contexts can be served
// they alternate.
//
// Interface: start[c] loads info_set[c] and restarts context c at leaf 0.
// push[c]/instr[c] write FIFO c; full[c] pauses node identification for that
// context, which is how the paper's FIFO keeps the generator from running
// ahead of the decoder cores.  Timing: one node per cycle, the first pushed in
// the cycle after start.
//
// Paper: one node identified per cycle from the binary information set, with
// a FIFO towards the cores.  This design's choice: one instruction per node
// (the SCU steps are derived from the node position by the sub-controller) and
// one generator shared by the two frame contexts.
module instr_gen
  import polar_pkg::*;
#(
  parameter int N    = 1024,
  parameter int LOGN = $clog2(N)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [1:0]    start,
  input  logic [N-1:0]  info_set [2],
  input  logic [1:0]    full,
  output logic [1:0]    push,
  output instr_t        instr    [2],
  output logic [1:0]    busy
);

  logic [N-1:0]      a_q   [2];
  logic [LOGN:0]     pos_q [2];
  logic [1:0]        act_q;
  logic              rr_q;      // context served last

  logic              sel;
  logic              go;
  logic [NSMAX-1:0]  win;
  logic [3:0]        max_lg;
  node_e             d_typ, d_src;
  logic [3:0]        d_stage;
  logic [1:0]        d_w, d_lrep;

  always_comb begin
    logic c0, c1;
    c0 = act_q[0] && !full[0];
    c1 = act_q[1] && !full[1];
    go  = c0 || c1;
    sel = (c0 && c1) ? ~rr_q : c1;
  end

  // window and allowed node size at the selected position
  always_comb begin
    int p, tz;
    p = int'(pos_q[sel]);
    for (int i = 0; i < NSMAX; i++)
      win[i] = (p + i < N) ? a_q[sel][(p + i) % N] : 1'b0;
    tz = LOGN;
    for (int b = LOGN-1; b >= 0; b--) if (((p >> b) & 1) != 0) tz = b;
    max_lg = 4'((tz < LNSMAX) ? tz : LNSMAX);
  end

  node_detect u_det (
    .win(win), .max_lg(max_lg),
    .typ(d_typ), .stage(d_stage), .w(d_w), .left_rep(d_lrep), .src(d_src)
  );

  always_comb begin
    for (int c = 0; c < 2; c++) begin
      push[c]           = go && (sel == c[0]);
      instr[c].typ      = d_typ;
      instr[c].stage    = d_stage;
      instr[c].pos      = POSW'(pos_q[c]);
      instr[c].w        = d_w;
      instr[c].left_rep = d_lrep;
      instr[c].src      = d_src;
      instr[c].last     = (int'(pos_q[c]) + (1 << d_stage)) >= N;
    end
  end

  assign busy = act_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      act_q <= '0;
      rr_q  <= 1'b1;
      for (int c = 0; c < 2; c++) begin
        pos_q[c] <= '0;
        a_q[c]   <= '0;
      end
    end else begin
      if (go) begin
        rr_q <= sel;
        pos_q[sel] <= pos_q[sel] + (LOGN+1)'(1 << d_stage);
        if ((int'(pos_q[sel]) + (1 << d_stage)) >= N) act_q[sel] <= 1'b0;
      end
      for (int c = 0; c < 2; c++) begin
        if (start[c]) begin
          a_q[c]   <= info_set[c];
          pos_q[c] <= '0;
          act_q[c] <= 1'b1;
        end
      end
    end
  end

endmodule
