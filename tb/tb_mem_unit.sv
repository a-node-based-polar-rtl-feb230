// tb_mem_unit: channel chunk writes, information-set write, SCU write-back of
// up to NST stage vectors per cycle and node commits (copy by pointer, then
// the node's u bits from its codeword) against a model of the memory.
module tb_mem_unit;
  import polar_pkg::*;
  localparam int N = 128, L = 4, PE = 16, NST = 3, IN_PAR = 16, LOGN = 7, LW = 2;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic ch_we, a_we, commit;
  logic [LOGN-1:0] ch_addr;
  llr_t ch_data [IN_PAR];
  logic [N-1:0] a_in, info_set, u [L];
  logic [NST-1:0] scu_we;
  logic [3:0] scu_stage [NST], node_stage;
  logic [LOGN-1:0] scu_base [NST];
  logic [LOGN:0] scu_len [NST];
  llr_t scu_data [NST][L][PE];
  logic [LW-1:0] ptr [L];
  logic [NSMAX-1:0] node_x [L];
  logic [POSW-1:0] node_pos;
  llr_t chan [N], llr [L][N];
  mem_unit #(.N(N), .L(L), .PE(PE), .NST(NST), .IN_PAR(IN_PAR)) dut (.*);
  int checks = 0, failures = 0;
  llr_t mchan [N], mllr [L][N];
  logic [N-1:0] mu [L], minfo;
  initial begin
    ch_we = 0; a_we = 0; commit = 0; ch_addr = '0; a_in = '0; scu_we = '0; node_stage = '0;
    node_pos = '0; minfo = '0;
    for (int j = 0; j < IN_PAR; j++) ch_data[j] = '0;
    for (int i = 0; i < N; i++) mchan[i] = '0;
    for (int t = 0; t < NST; t++) begin
      scu_stage[t] = '0; scu_base[t] = '0; scu_len[t] = '0;
      for (int l = 0; l < L; l++) for (int j = 0; j < PE; j++) scu_data[t][l][j] = '0;
    end
    for (int l = 0; l < L; l++) begin
      ptr[l] = LW'(l); node_x[l] = '0; mu[l] = '0;
      for (int i = 0; i < N; i++) mllr[l][i] = '0;
    end
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 3000; t++) begin
      int op;
      @(negedge clk);
      op = $urandom % 4;
      ch_we = (op == 0); a_we = (op == 1); commit = (op == 3); scu_we = '0;
      ch_addr = LOGN'($urandom % (N / IN_PAR));
      for (int j = 0; j < IN_PAR; j++) ch_data[j] = llr_t'($urandom);
      a_in = {4{$urandom}};
      if (op == 2) begin
        int k;
        k = 1 + $urandom % (LOGN - 1);
        for (int c = 0; c < NST; c++) begin
          scu_we[c] = (k - c >= 0) && ($urandom % 2 == 0 || c == 0);
          scu_stage[c] = 4'(k - c);
          scu_len[c] = (LOGN+1)'(((1 << (k - c)) < PE) ? (1 << (k - c)) : PE);
          scu_base[c] = (c == 0 && (1 << k) > PE) ? LOGN'(PE * ($urandom % ((1 << k) / PE))) : '0;
          for (int l = 0; l < L; l++) for (int j = 0; j < PE; j++) scu_data[c][l][j] = llr_t'($urandom);
        end
      end
      node_stage = 4'($urandom % 6);
      node_pos = POSW'(((1 << node_stage) * ($urandom % (N >> node_stage))));
      for (int l = 0; l < L; l++) begin ptr[l] = LW'($urandom % L); node_x[l] = $urandom; end
      @(posedge clk);
      // model
      if (ch_we) for (int j = 0; j < IN_PAR; j++) mchan[int'(ch_addr) * IN_PAR + j] = ch_data[j];
      if (a_we) minfo = a_in;
      if (commit) begin
        llr_t nl [L][N];
        logic [N-1:0] nu [L];
        for (int l = 0; l < L; l++) begin
          logic [NSMAX-1:0] ub;
          nl[l] = mllr[ptr[l]]; nu[l] = mu[ptr[l]];
          ub = polar_xform(node_x[l], int'(node_stage));
          for (int i = 0; i < (1 << node_stage); i++) nu[l][int'(node_pos) + i] = ub[i];
        end
        mllr = nl; mu = nu;
      end else begin
        for (int c = 0; c < NST; c++) if (scu_we[c])
          for (int l = 0; l < L; l++) for (int j = 0; j < int'(scu_len[c]); j++)
            mllr[l][(1 << scu_stage[c]) + int'(scu_base[c]) + j] = scu_data[c][l][j];
      end
      #1;
      checks++;
      if (chan != mchan || info_set != minfo || llr != mllr || u != mu) begin
        failures++;
        if (failures < 10) $display("FAIL t=%0d op=%0d", t, op);
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
