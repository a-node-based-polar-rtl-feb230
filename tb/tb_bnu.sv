// tb_bnu: basic node unit.  One valid path with random LLRs per node; checks
// the cycle count from start to done against the paper's Fig. 7 (R0 1, REP 2,
// R1 1+T, SPC/TYPE-III 2+T with T = 2,3,3 limited by the node's free bits) and
// the best survivor: R0 all zero, REP the sign of the LLR sum, R1 the hard
// decisions, SPC the hard decisions with even parity (least reliable bit
// flipped if needed), with PM 0 after normalisation (R0 has no selection and
// keeps its penalty; REP compares the saturated 7-bit PMs).
module tb_bnu;
  import polar_pkg::*;
  localparam int L = 8, TAGW = 5;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic start, merged, s2_en, other_waiting, busy, done;
  node_e typ;
  logic [2:0] lg, forks;
  illr_t lam_in [L][NSMAX];
  logic [PMW-1:0] pm_in [L], pm_out [L];
  logic [L-1:0] valid_in, valid_out;
  logic [TAGW-1:0] tag_in [L], tag_out [L];
  logic [3:0] remaining;
  logic [NSMAX-1:0] x_out [L];
  logic s2_cut;
  bnu #(.L(L), .TAGW(TAGW)) dut (.clk, .rst_n, .start, .typ, .lg, .merged, .lam_in, .pm_in,
    .valid_in, .tag_in, .s2_en, .other_waiting, .busy, .remaining, .done, .x_out, .pm_out,
    .valid_out, .tag_out, .forks, .s2_cut);
  int checks = 0, failures = 0;
  initial begin
    start = 0; merged = 0; s2_en = 0; other_waiting = 0; typ = NT_R0; lg = '0;
    valid_in = '0;
    for (int l = 0; l < L; l++) begin
      pm_in[l] = '0; tag_in[l] = TAGW'(l);
      for (int j = 0; j < NSMAX; j++) lam_in[l][j] = '0;
    end
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 400; t++) begin
      int n, cyc, expc, tf, sum, minj, p0, p1, epm;
      logic [NSMAX-1:0] hd, ex;
      logic par;
      @(negedge clk);
      case ($urandom % 4)
        0: typ = NT_R0; 1: typ = NT_REP; 2: typ = NT_R1; default: typ = NT_SPC;
      endcase
      lg = 3'(2 + $urandom % 4);
      n = 1 << lg;
      valid_in = L'(1);
      hd = '0; sum = 0; minj = 0; par = 0; p0 = 0; p1 = 0;
      for (int j = 0; j < NSMAX; j++) begin
        lam_in[0][j].s = (j < n) ? 1'($urandom % 2) : 1'b0;
        lam_in[0][j].m = (j < n) ? IMAGW'(1 + $urandom % 31) : '0;
        if (j < n) begin
          hd[j] = lam_in[0][j].s;
          sum += lam_in[0][j].s ? -int'(lam_in[0][j].m) : int'(lam_in[0][j].m);
          par ^= hd[j];
          if (hd[j]) p0 += int'(lam_in[0][j].m); else p1 += int'(lam_in[0][j].m);
          if (lam_in[0][j].m < lam_in[0][minj].m) minj = j;
        end
      end
      case (typ)
        NT_R0:   begin ex = '0; expc = 1; end
        NT_REP:  begin ex = (((p1 > 127) ? 127 : p1) < ((p0 > 127) ? 127 : p0)) ? ((NSMAX'(1) << n) - 1) : '0; expc = 2; end
        NT_R1:   begin ex = hd; tf = (n < 2) ? n : 2; expc = 1 + tf; end
        default: begin ex = hd; if (par) ex[minj] = ~ex[minj]; tf = (n - 1 < 3) ? n - 1 : 3; expc = 2 + tf; end
      endcase
      start = 1'b1;
      @(posedge clk);
      cyc = 1;
      @(negedge clk);
      start = 1'b0;
      while (!done && cyc < 50) begin
        @(posedge clk);
        cyc++;
        @(negedge clk);
      end
      checks += 2;
      if (cyc != expc) begin
        failures++;
        $display("FAIL typ=%0d lg=%0d cycles=%0d expected=%0d", typ, lg, cyc, expc);
      end
      epm = (typ == NT_R0) ? ((p0 > 127) ? 127 : p0) : 0;
      if (!valid_out[0] || x_out[0] != ex || int'(pm_out[0]) != epm) begin
        if (!(typ == NT_REP && ((p1 > 127) ? 127 : p1) == ((p0 > 127) ? 127 : p0))) begin
          failures++;
          $display("FAIL typ=%0d lg=%0d x=%h exp=%h pm=%0d", typ, lg, x_out[0], ex, pm_out[0]);
        end
      end
      @(negedge clk);
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
