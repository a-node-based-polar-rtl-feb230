// tb_sub_ctrl: a slot sub-controller fed with the node list of a random
// aligned partition of N = 256 leaves, with random SCU grants, random NPU
// acceptance and random NPU latency.  For every node the granted SCU commands
// must descend contiguously from the right stage (g first unless the node is
// the first one, PE-wide chunks for long vectors, up to NST stages per command
// otherwise) and end with scu_last exactly at the node's stage; the NPU
// request must carry the node; after the last node the CRC check and
// attempt_done follow in consecutive cycles.  A dropped attempt must go idle
// without attempt_done.
module tb_sub_ctrl;
  import polar_pkg::*;
  localparam int N = 256, PE = 64, NST = 3, LOGN = 8;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic launch, drop, gen_start, pm_init, fifo_empty, fifo_pop, scu_req, scu_gnt, scu_op_g, scu_last;
  logic npu_req, npu_acc, npu_done, crc_check, attempt_done, busy, stall_scu, stall_npu;
  instr_t fifo_dout, npu_instr;
  logic [3:0] scu_stage;
  logic [LOGN-1:0] scu_chunk;
  logic [1:0] scu_nchain;
  sub_ctrl #(.N(N), .PE(PE), .NST(NST)) dut (.*);
  int checks = 0, failures = 0;
  instr_t q[$];
  instr_t cur;
  int exp_stage, exp_chunk, ncmd;
  bit exp_g, in_node;

  task automatic fail(string m);
    failures++;
    if (failures < 10) $display("FAIL %s (t=%0t)", m, $time);
  endtask

  function automatic int first_stage(instr_t in);
    int k, idx;
    if (in.pos == '0) return LOGN - 1;
    k = int'(in.stage); idx = int'(in.pos) >> in.stage;
    while ((idx & 1) == 0) begin idx >>= 1; k++; end
    return k;
  endfunction

  assign fifo_empty = (q.size() == 0);
  assign fifo_dout  = fifo_empty ? '0 : q[0];

  // SCU command checker
  always @(posedge clk) if (rst_n) begin
    if (fifo_pop) begin
      cur = q[0];          // removed at the falling edge, after the DUT sampled it
      pop_pend = 1;
      exp_stage = first_stage(cur); exp_g = (cur.pos != '0); exp_chunk = 0; in_node = 1;
    end
    if (scu_req && scu_gnt) begin
      int len, nc;
      len = 1 << exp_stage;
      checks++;
      if (int'(scu_stage) != exp_stage || scu_op_g != exp_g || int'(scu_chunk) != exp_chunk)
        fail($sformatf("SCU command stage %0d/%0d g %0b/%0b chunk %0d/%0d", scu_stage, exp_stage,
                       scu_op_g, exp_g, scu_chunk, exp_chunk));
      if (len > PE) begin
        nc = 1;
        if ((exp_chunk + 1) * PE >= len) begin exp_chunk = 0; exp_stage--; exp_g = 0; end
        else exp_chunk++;
      end else begin
        nc = exp_stage - int'(cur.stage) + 1;
        if (nc > NST) nc = NST;
        exp_stage -= nc; exp_g = 0;
      end
      if (int'(scu_nchain) != nc) fail("nchain");
      if (scu_last != (exp_stage < int'(cur.stage))) fail("scu_last");
    end
    if (npu_req && npu_acc) begin
      checks++;
      if (npu_instr != cur || exp_stage >= int'(cur.stage)) fail("NPU request before descent ended");
    end
  end

  bit pop_pend = 0;
  always @(negedge clk) if (pop_pend) begin
    void'(q.pop_front());
    pop_pend = 0;
  end

  // NPU model: accept randomly, finish after 1..6 cycles
  int npu_wait;
  always @(negedge clk) begin
    scu_gnt = scu_req && ($urandom % 3 != 0);
    npu_acc = npu_req && ($urandom % 3 != 0);
  end
  always @(posedge clk) begin
    npu_done <= 1'b0;
    if (npu_req && npu_acc) npu_wait <= 1 + $urandom % 6;
    else if (npu_wait > 0) begin
      npu_wait <= npu_wait - 1;
      if (npu_wait == 1) npu_done <= 1'b1;
    end
  end

  initial begin
    launch = 0; drop = 0; npu_wait = 0; npu_done = 0; scu_gnt = 0; npu_acc = 0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 60; t++) begin
      int p, nodes, c;
      bit dropped;
      // random aligned partition into nodes
      p = 0; nodes = 0; q.delete();
      while (p < N) begin
        instr_t in;
        int maxs, s;
        maxs = 0;
        while (maxs < 5 && (p % (1 << (maxs + 1))) == 0) maxs++;
        s = $urandom % (maxs + 1);
        in = '0; in.typ = NT_R1; in.stage = 4'(s); in.pos = POSW'(p); in.last = (p + (1 << s) == N);
        q.push_back(in);
        p += 1 << s; nodes++;
      end
      @(negedge clk);
      launch = 1;
      #1;
      checks++;
      if (!gen_start || !pm_init) fail("launch");
      @(negedge clk);
      launch = 0;
      dropped = (t % 5 == 4);
      c = 0;
      while (!crc_check && c < 20000) begin
        if (dropped && c == 200) drop = 1;
        if (drop && !busy) break;
        @(negedge clk);
        c++;
      end
      if (dropped) begin
        checks++;
        if (busy || crc_check) fail("drop");
        drop = 0;
      end else begin
        checks++;
        if (q.size() != 0) fail("CRC before all nodes");
        @(negedge clk);
        if (!attempt_done) fail("attempt_done");
        @(negedge clk);
      end
      while (npu_wait > 0) @(negedge clk);
      repeat (2) @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000000;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
