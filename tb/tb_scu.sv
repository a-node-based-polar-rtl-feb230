// tb_scu: random channel LLRs, stored LLRs and partial sums; every command
// (stage, f or g, chunk, chained stages) is compared with a reference model of
// Eqs. (1)-(2) including the f descent of the chained columns.  One command is
// combinational and is written back at the next edge, i.e. one cycle each.
module tb_scu;
  import polar_pkg::*;
  localparam int N = 256, L = 2, PE = 64, NST = 3, LOGN = 8;
  llr_t chan [N], llr [L][N];
  logic [N-1:0] beta [L];
  logic valid, op_g;
  logic [3:0] stage;
  logic [LOGN-1:0] chunk;
  logic [1:0] nchain;
  logic [NST-1:0] wr_en;
  logic [3:0] wr_stage [NST];
  logic [LOGN-1:0] wr_base [NST];
  logic [LOGN:0] wr_len [NST];
  llr_t wr_data [NST][L][PE];
  scu #(.N(N), .L(L), .PE(PE), .NST(NST)) dut (.*);
  int checks = 0, failures = 0;
  initial begin
    for (int t = 0; t < 500; t++) begin
      int k, len, nc, base;
      llr_t ref_v [NST][L][PE];
      for (int i = 0; i < N; i++) chan[i] = llr_t'($urandom);
      for (int l = 0; l < L; l++) begin
        beta[l] = {8{$urandom}};
        for (int i = 0; i < N; i++) llr[l][i] = llr_t'($urandom);
      end
      k = $urandom % LOGN;
      len = 1 << k;
      op_g = 1'($urandom % 2);
      stage = 4'(k);
      chunk = (len > PE) ? LOGN'($urandom % (len / PE)) : '0;
      nc = (len > PE) ? 1 : 1 + $urandom % ((k + 1 < NST) ? k + 1 : NST);
      nchain = 2'(nc);
      valid = 1'b1;
      base = int'(chunk) * PE;
      for (int l = 0; l < L; l++) begin
        for (int j = 0; j < PE; j++) begin
          llr_t a, b;
          if (j < len) begin
            a = (k + 1 >= LOGN) ? chan[base + j] : llr[l][2 * len + base + j];
            b = (k + 1 >= LOGN) ? chan[base + j + len] : llr[l][3 * len + base + j];
            ref_v[0][l][j] = op_g ? g_fn(a, b, beta[l][len + base + j]) : f_fn(a, b);
          end
        end
        for (int c = 1; c < nc; c++)
          for (int j = 0; j < (len >> c); j++)
            ref_v[c][l][j] = f_fn(ref_v[c-1][l][j], ref_v[c-1][l][j + (len >> c)]);
      end
      #1;
      for (int c = 0; c < nc; c++) begin
        int wl;
        wl = ((len >> c) < PE) ? (len >> c) : PE;
        checks++;
        if (!wr_en[c] || int'(wr_stage[c]) != k - c || int'(wr_len[c]) != wl ||
            (c == 0 && int'(wr_base[c]) != base)) begin
          failures++; $display("FAIL t=%0d col=%0d control", t, c);
        end
        for (int l = 0; l < L; l++)
          for (int j = 0; j < wl; j++) begin
            checks++;
            if (wr_data[c][l][j] != ref_v[c][l][j]) begin
              failures++;
              if (failures < 10) $display("FAIL t=%0d k=%0d g=%0b col=%0d l=%0d j=%0d", t, k, op_g, c, l, j);
            end
          end
      end
      checks++;
      for (int c = nc; c < NST; c++) if (wr_en[c]) begin failures++; $display("FAIL extra column"); end
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
