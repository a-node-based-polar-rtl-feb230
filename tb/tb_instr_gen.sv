// tb_instr_gen: two contexts with random information sets.  The node
// instructions of each context must tile 0..N-1 in order, be aligned, end with
// the last flag, and each basic node must match its information-set pattern.
// With one context and a never-full FIFO one node is produced per cycle.
module tb_instr_gen;
  import polar_pkg::*;
  localparam int N = 256;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic [1:0] start, full, push, busy;
  logic [N-1:0] info_set [2];
  instr_t instr [2];
  instr_gen #(.N(N)) dut (.*);
  int checks = 0, failures = 0;
  int nxt [2], nodes [2], cyc, first [2], lastc [2];
  bit fin [2];
  always @(posedge clk) if (rst_n) begin
    cyc++;
    for (int c = 0; c < 2; c++) if (push[c]) begin
      int p, n;
      bit ok;
      p = int'(instr[c].pos); n = 1 << instr[c].stage;
      ok = (p == nxt[c]) && (p % n == 0) && !fin[c];
      for (int i = 0; i < n; i++) begin
        bit b;
        b = info_set[c][(p + i) % N];
        case (instr[c].typ)
          NT_R0:  if (b) ok = 0;
          NT_R1:  if (!b) ok = 0;
          NT_REP: if (b != (i == n - 1)) ok = 0;
          NT_SPC: if (b != (i != 0)) ok = 0;
          NT_T3:  if (b != (i >= 2)) ok = 0;
          default: if (n < 8 || n > RSUMAX) ok = 0;
        endcase
      end
      if (instr[c].last != (p + n == N)) ok = 0;
      checks++;
      if (!ok) begin
        failures++;
        if (failures < 10) $display("FAIL ctx %0d node pos=%0d stage=%0d typ=%0d", c, p, instr[c].stage, instr[c].typ);
      end
      if (nodes[c] == 0) first[c] = cyc;
      lastc[c] = cyc;
      nodes[c]++;
      nxt[c] = p + n;
      if (instr[c].last) fin[c] = 1;
    end
  end
  initial begin
    start = '0; full = '0; cyc = 0;
    for (int c = 0; c < 2; c++) begin info_set[c] = '0; nxt[c] = 0; nodes[c] = 0; fin[c] = 0; end
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 40; t++) begin
      @(negedge clk);
      for (int c = 0; c < 2; c++) begin
        for (int i = 0; i < N; i++) info_set[c][i] = ($urandom % 100) < (10 + i * 80 / N);
        nxt[c] = 0; nodes[c] = 0; fin[c] = 0;
      end
      start = (t % 2 == 0) ? 2'b01 : 2'b11;
      @(negedge clk);
      start = '0;
      while (!(fin[0] && (fin[1] || t % 2 == 0))) begin
        full = 2'($urandom % 4) & ((t % 2 == 0) ? 2'b00 : 2'b11);
        @(negedge clk);
      end
      full = '0;
      checks++;
      if (t % 2 == 0 && lastc[0] - first[0] + 1 != nodes[0]) begin
        failures++; $display("FAIL rate: %0d nodes in %0d cycles", nodes[0], lastc[0] - first[0] + 1);
      end
      repeat (3) @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #10000000;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
