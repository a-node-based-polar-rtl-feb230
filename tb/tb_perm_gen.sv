// tb_perm_gen: for every graph number the index map must be a bijection that
// keeps the FIX low index bits, graphs 0..7 must be distinct, graph 0 the
// identity, and u_nat must undo the permutation applied to chan and info.
module tb_perm_gen;
  import polar_pkg::*;
  localparam int N = 256, L = 2, FIX = 4;
  logic [3:0] graph [2];
  llr_t chan [2][N], chan_p [2][N];
  logic [N-1:0] info [2], info_p [2], u [2][L], u_nat [2][L];
  perm_gen #(.N(N), .L(L), .FIX(FIX)) dut (.*);
  int checks = 0, failures = 0;
  int map [8][N];
  initial begin
    for (int g = 0; g < 8; g++) begin
      graph[0] = 4'(g); graph[1] = 4'((g + 3) % 8);
      for (int s = 0; s < 2; s++)
        for (int i = 0; i < N; i++) begin
          chan[s][i] = llr_t'(6'(i % 64));
          chan[s][i].s = 1'((i >> 6) & 1);
          info[s][i] = 1'($urandom % 2);
        end
      #1;
      // find the source of every output index (same low bits, unused)
      for (int s = 0; s < 2; s++) begin
        int used [N];
        for (int i = 0; i < N; i++) used[i] = 0;
        for (int i = 0; i < N; i++) begin
          int src;
          src = -1;
          for (int k = 0; k < N; k++)
            if (chan[s][k] == chan_p[s][i] && (k % (1 << FIX)) == (i % (1 << FIX)) && used[k] == 0 &&
                info[s][k] == info_p[s][i]) begin src = k; break; end
          checks++;
          if (src < 0) begin failures++; $display("FAIL g=%0d s=%0d i=%0d no source", g, s, i); end
          else used[src] = 1;
          if (s == 0) map[g][i] = src;
        end
      end
      // u_nat undoes the map: feed u = info_p, expect info back
      for (int s = 0; s < 2; s++) for (int l = 0; l < L; l++) u[s][l] = info_p[s];
      #1;
      for (int s = 0; s < 2; s++) begin
        checks++;
        if (u_nat[s][0] != info[s]) begin failures++; $display("FAIL g=%0d s=%0d u_nat", g, s); end
      end
    end
    // distinctness
    for (int g = 0; g < 8; g++)
      for (int h = g + 1; h < 8; h++) begin
        bit same;
        same = 1;
        for (int i = 0; i < N; i++) if (map[g][i] != map[h][i]) same = 0;
        checks++;
        if (same) begin failures++; $display("FAIL graphs %0d and %0d equal", g, h); end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #1000000;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
