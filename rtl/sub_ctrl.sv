// sub_ctrl: sub-controller of one frame slot.  It walks the node instructions
// of one decoding attempt and drives the shared SCU and NPU for its frame.
//
// Per node: fetch the instruction from the slot's FIFO; plan the descent of
// the decoding tree to the node (if the node is the first one, f from stage
// n-1 down; otherwise climb from the node while it is a left child to the
// first right child at stage k, apply g there and f below, down to the node's
// stage); request the SCU and issue one SCU command per cycle while granted
// (vectors longer than PE take several chunks, shorter ones descend up to NST
// stages per cycle); request the NPU until it accepts; wait for the NPU result
// of this slot, which the memories commit in that cycle (the PSU step).  After
// the last node the CRC is checked in one cycle and the attempt ends with
// attempt_done.
//
// Interface: launch starts an attempt (gen_start restarts the instruction
// generator context and flushes the FIFO, pm_init resets the PMs).  scu_req /
// scu_gnt and npu_req / npu_acc are request/grant handshakes with the
// controller; scu_last marks the last SCU command of a node so the SCU can be
// handed over.  drop (level) abandons the attempt at the next node boundary: a
// node already accepted by the NPU is waited for, then the slot goes idle
// without attempt_done.  stall_scu / stall_npu are high in cycles spent waiting for a
// unit the other frame holds.
module sub_ctrl
  import polar_pkg::*;
#(
  parameter int N    = 1024,
  parameter int PE   = 64,
  parameter int NST  = 3,
  parameter int LOGN = $clog2(N)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            launch,
  input  logic            drop,         // give up the attempt at a node boundary
  output logic            gen_start,
  output logic            pm_init,
  // instruction FIFO
  input  logic            fifo_empty,
  input  instr_t          fifo_dout,
  output logic            fifo_pop,
  // SCU
  output logic            scu_req,
  input  logic            scu_gnt,
  output logic [3:0]      scu_stage,
  output logic            scu_op_g,
  output logic [LOGN-1:0] scu_chunk,
  output logic [1:0]      scu_nchain,
  output logic            scu_last,
  // NPU
  output logic            npu_req,
  output instr_t          npu_instr,
  input  logic            npu_acc,
  input  logic            npu_done,      // NPU finished a node of this slot
  // CRC
  output logic            crc_check,
  output logic            attempt_done,
  output logic            busy,
  output logic            stall_scu,
  output logic            stall_npu
);

  typedef enum logic [2:0] {S_IDLE, S_FETCH, S_SCU, S_NPU, S_WAIT, S_CRC, S_RES} st_e;

  st_e             st_q;
  instr_t          ins_q;
  logic [3:0]      cur_q;
  logic            g_q;
  logic [LOGN-1:0] chunk_q;

  // first SCU stage for a node
  function automatic logic [4:0] first_stage(instr_t in);
    int k, idx;
    if (in.pos == '0) return 5'(LOGN - 1);
    k = int'(in.stage);
    idx = int'(in.pos) >> in.stage;
    for (int b = 0; b < LOGN; b++)
      if ((idx & 1) == 0 && k < LOGN) begin
        idx = idx >> 1;
        k++;
      end
    return 5'(k);
  endfunction

  // SCU command for the current state
  always_comb begin
    int len, nc, s;
    len = 1 << cur_q;
    s   = int'(ins_q.stage);
    scu_stage = cur_q;
    scu_op_g  = g_q;
    scu_chunk = chunk_q;
    if (len > PE) begin
      nc = 1;
      scu_last = (int'(cur_q) == s) && ((int'(chunk_q) + 1) * PE >= len);
    end else begin
      nc = int'(cur_q) - s + 1;
      if (nc > NST) nc = NST;
      scu_last = (int'(cur_q) - nc + 1) <= s;
    end
    scu_nchain = 2'(nc);
  end

  assign scu_req   = (st_q == S_SCU) && !drop;
  assign npu_req   = (st_q == S_NPU);
  assign npu_instr = ins_q;
  assign fifo_pop  = (st_q == S_FETCH) && !fifo_empty && !drop;
  assign gen_start = launch && (st_q == S_IDLE);
  assign pm_init   = gen_start;
  assign crc_check = (st_q == S_CRC);
  assign attempt_done = (st_q == S_RES);
  assign busy      = (st_q != S_IDLE);
  assign stall_scu = (st_q == S_SCU) && !scu_gnt;
  assign stall_npu = (st_q == S_NPU) && !npu_acc;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_q    <= S_IDLE;
      ins_q   <= '0;
      cur_q   <= '0;
      g_q     <= 1'b0;
      chunk_q <= '0;
    end else begin
      case (st_q)
        S_IDLE: if (launch) st_q <= S_FETCH;
        S_FETCH: begin
          if (drop) begin
            st_q <= S_IDLE;
          end else if (!fifo_empty) begin
            logic [4:0] k;
            k       = first_stage(fifo_dout);
            ins_q   <= fifo_dout;
            cur_q   <= 4'(k);
            g_q     <= (fifo_dout.pos != '0);
            chunk_q <= '0;
            st_q    <= S_SCU;
          end
        end
        S_SCU: begin
          if (drop) begin
            st_q <= S_IDLE;
          end else if (scu_gnt) begin
            if (scu_last) st_q <= S_NPU;
            if ((1 << cur_q) > PE) begin
              if ((int'(chunk_q) + 1) * PE >= (1 << cur_q)) begin
                chunk_q <= '0;
                cur_q   <= cur_q - 4'd1;
                g_q     <= 1'b0;
              end else begin
                chunk_q <= chunk_q + 1'b1;
              end
            end else begin
              cur_q <= cur_q - 4'(scu_nchain);
              g_q   <= 1'b0;
            end
          end
        end
        S_NPU:  if (npu_acc) st_q <= S_WAIT;
                else if (drop) st_q <= S_IDLE;
        S_WAIT: if (npu_done) st_q <= drop ? S_IDLE : (ins_q.last ? S_CRC : S_FETCH);
        S_CRC:  st_q <= S_RES;
        S_RES:  st_q <= S_IDLE;
        default: st_q <= S_IDLE;
      endcase
    end
  end

endmodule
