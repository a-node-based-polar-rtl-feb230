// tb_rsu: repetition sequence unit.  For an SR node with one R0 left half the
// only sequence is S = 0 and the merged LLRs are lambda[j] + lambda[h+j]; with a
// REP left half both sequences appear, S = 1 giving -lambda[j] + lambda[h+j] (the REP bit flips the first half).
// The result must be ready two cycles after start and held until take.
module tb_rsu;
  import polar_pkg::*;
  localparam int L = 8, LW = 3, TAGW = LW + WMAX;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic start, take, busy, out_valid;
  logic [2:0] lg_s, lg_r;
  logic [1:0] w, left_rep;
  llr_t lam_in [L][RSUMAX];
  logic [PMW-1:0] pm_in [L], pm_out [L];
  logic [L-1:0] valid_in, valid_out;
  illr_t lam_out [L][NSMAX];
  logic [TAGW-1:0] tag_out [L];
  rsu #(.L(L)) dut (.*);
  int checks = 0, failures = 0;
  function automatic int sv(llr_t a); return a.s ? -int'(a.m) : int'(a.m); endfunction
  function automatic int svi(illr_t a); return a.s ? -int'(a.m) : int'(a.m); endfunction
  initial begin
    start = 0; take = 0; lg_s = '0; w = '0; left_rep = '0; valid_in = '0;
    for (int l = 0; l < L; l++) begin
      pm_in[l] = '0;
      for (int j = 0; j < RSUMAX; j++) lam_in[l][j] = '0;
    end
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 200; t++) begin
      int h, c;
      bit rep;
      @(negedge clk);
      rep = ($urandom % 2 == 1);
      lg_s = 3'(3 + $urandom % 2); w = 2'd1; left_rep = {1'b0, rep};
      h = 1 << (lg_s - 1);
      valid_in = L'(1);
      for (int j = 0; j < RSUMAX; j++) lam_in[0][j] = llr_t'($urandom);
      start = 1;
      @(negedge clk);
      start = 0;
      c = 1;
      while (!out_valid && c < 10) begin @(negedge clk); c++; end
      checks += 2;
      if (c != 2) begin failures++; $display("FAIL RSU took %0d cycles", c); end
      begin
        bit seen [2];
        bit bad;
        seen = '{0, 0}; bad = 0;
        for (int k = 0; k < L; k++) if (valid_out[k]) begin
          int s;
          s = int'(tag_out[k]) & 1;
          seen[s] = 1;
          if (int'(tag_out[k]) >> WMAX != 0 || int'(lg_r) != int'(lg_s) - 1) bad = 1;
          for (int j = 0; j < h; j++)
            if (svi(lam_out[k][j]) != (s ? -sv(lam_in[0][j]) : sv(lam_in[0][j])) + sv(lam_in[0][h + j]))
              bad = 1;
        end
        if (bad || !seen[0] || seen[1] != rep) begin
          failures++; $display("FAIL t=%0d rep=%0b merged LLRs or sequences", t, rep);
        end
      end
      repeat (2) @(negedge clk);
      checks++;
      if (!out_valid) begin failures++; $display("FAIL output not held"); end
      take = 1; @(negedge clk); take = 0;
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
