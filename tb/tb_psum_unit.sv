// tb_psum_unit: a code of N = 64 leaves is cut into random aligned nodes and
// committed in order for L = 4 paths with random codewords and random origin
// pointers.  A model keeps each path's u bits; after every commit, for each
// stage k at which the finished part ends a left child, the stored partial
// sums must equal the polar transform of that child's u bits.
module tb_psum_unit;
  import polar_pkg::*;
  localparam int N = 64, L = 4, LOGN = 6, LW = 2;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic commit;
  logic [LW-1:0] ptr [L];
  logic [NSMAX-1:0] node_x [L];
  logic [3:0] node_stage;
  logic [POSW-1:0] node_pos;
  logic [N-1:0] beta [L];
  psum_unit #(.N(N), .L(L)) dut (.*);
  int checks = 0, failures = 0;
  logic [N-1:0] um [L];
  function automatic logic [N-1:0] xf(logic [N-1:0] v, int lg);
    logic [N-1:0] y;
    y = v;
    for (int st = 0; st < lg; st++)
      for (int j = 0; j < N; j++)
        if (((j >> st) & 1) == 0 && j + (1 << st) < N) y[j] = y[j] ^ y[j + (1 << st)];
    return y;
  endfunction
  initial begin
    commit = 0; node_stage = '0; node_pos = '0;
    for (int l = 0; l < L; l++) begin ptr[l] = LW'(l); node_x[l] = '0; um[l] = '0; end
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 60; t++) begin
      int p;
      p = 0;
      while (p < N) begin
        int s, maxs;
        logic [N-1:0] nu [L];
        maxs = 0;
        while (maxs < 5 && (p % (1 << (maxs + 1))) == 0 && p + (1 << (maxs + 1)) <= N) maxs++;
        s = $urandom % (maxs + 1);
        @(negedge clk);
        node_stage = 4'(s); node_pos = POSW'(p);
        for (int l = 0; l < L; l++) begin
          ptr[l] = LW'($urandom % L);
          node_x[l] = {$urandom};
        end
        for (int l = 0; l < L; l++) begin
          logic [N-1:0] xu;
          nu[l] = um[ptr[l]];
          xu = xf(N'(node_x[l]) & ((N'(1) << (1 << s)) - 1), s);   // node u bits
          for (int i = 0; i < (1 << s); i++) nu[l][p + i] = xu[i];
        end
        commit = 1;
        @(negedge clk);
        commit = 0;
        um = nu;
        p += 1 << s;
        for (int k = 0; k < LOGN; k++)
          if (p % (1 << k) == 0 && ((p >> k) & 1) == 1)
            for (int l = 0; l < L; l++) begin
              logic [N-1:0] seg, ex;
              seg = '0;
              for (int i = 0; i < (1 << k); i++) seg[i] = um[l][p - (1 << k) + i];
              ex = xf(seg, k);
              checks++;
              for (int i = 0; i < (1 << k); i++)
                if (beta[l][(1 << k) + i] != ex[i]) begin
                  failures++;
                  if (failures < 10) $display("FAIL p=%0d k=%0d l=%0d i=%0d", p, k, l, i);
                  break;
                end
            end
      end
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
