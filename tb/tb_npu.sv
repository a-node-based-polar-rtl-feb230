// tb_npu: node-processing unit with its RSU and BNU.  Noiseless node LLRs of a
// valid node codeword are sent for basic nodes and for SR nodes (left R0 or
// REP half, R1 or SPC source half); the best survivor must return that
// codeword.  The cycles from request to done must match the paper's Fig. 7:
// R0 1, REP 2, R1 1+T, SPC 2+T, SR(R1) 2+T, SR(SPC) 3+T.  A second phase
// sends an SR node of slot 1 while the BNU works on slot 0 with S1 enabled and
// checks that the RSU starts at once (overlap).
module tb_npu;
  import polar_pkg::*;
  localparam int L = 8, LW = 3;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic s1_en, s2_en, req_valid, req_slot, ready_basic, ready_sr, done, done_slot, ev_s1, ev_s2;
  logic [1:0] req_pending, bnu_owner;
  instr_t req_instr, done_instr;
  llr_t req_lam [L][NSMAX];
  logic [PMW-1:0] req_pm [L], pm_out [L];
  logic [L-1:0] req_pvalid, valid_out;
  logic [LW-1:0] ptr [L];
  logic [NSMAX-1:0] beta [L];
  npu #(.L(L)) dut (.*);
  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  // node codeword: u bits by node kind, then the polar transform
  function automatic logic [NSMAX-1:0] codeword(int kind, int lg);
    logic [NSMAX-1:0] u;
    int n;
    n = 1 << lg;
    u = '0;
    for (int i = 0; i < n; i++) begin
      case (kind)
        0: u[i] = 1'b0;                                        // R0
        1: u[i] = (i == n - 1) ? 1'($urandom % 2) : 1'b0;      // REP
        2: u[i] = 1'($urandom % 2);                            // R1
        3: u[i] = (i == 0) ? 1'b0 : 1'($urandom % 2);          // SPC
        4: u[i] = (i >= n / 2) ? 1'($urandom % 2) : 1'b0;      // SR: R0 + R1
        5: u[i] = (i > n / 2) ? 1'($urandom % 2) : 1'b0;       // SR: R0 + SPC
        default: u[i] = (i >= n / 2 || i == n / 2 - 1) ? 1'($urandom % 2) : 1'b0; // SR: REP + R1
      endcase
    end
    return polar_xform(u, lg);
  endfunction

  task automatic send(int kind, int lg, bit slot, logic [NSMAX-1:0] x);
    req_instr = '0;
    req_instr.stage = 4'(lg);
    req_instr.w = 2'd1;
    case (kind)
      0: req_instr.typ = NT_R0;
      1: req_instr.typ = NT_REP;
      2: req_instr.typ = NT_R1;
      3: req_instr.typ = NT_SPC;
      4: begin req_instr.typ = NT_SR; req_instr.src = NT_R1; end
      5: begin req_instr.typ = NT_SR; req_instr.src = NT_SPC; end
      default: begin req_instr.typ = NT_SR; req_instr.src = NT_R1; req_instr.left_rep = 2'b01; end
    endcase
    req_slot = slot;
    for (int l = 0; l < L; l++)
      for (int j = 0; j < NSMAX; j++) begin
        req_lam[l][j].s = x[j];
        req_lam[l][j].m = 5'(10 + $urandom % 20);
      end
    req_valid = 1'b1;
  endtask

  initial begin
    s1_en = 0; s2_en = 0; req_valid = 0; req_slot = 0; req_pending = '0; req_instr = '0;
    for (int l = 0; l < L; l++) begin
      req_pm[l] = '0;
      for (int j = 0; j < NSMAX; j++) req_lam[l][j] = '0;
    end
    req_pvalid = L'(1);
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 300; t++) begin
      int kind, lg, c0, expc, n;
      logic [NSMAX-1:0] x;
      kind = $urandom % 7;
      lg = (kind >= 4) ? 3 + $urandom % 2 : 2 + $urandom % 4;
      n = 1 << lg;
      x = codeword(kind, lg);
      case (kind)
        0: expc = 1;
        1: expc = 2;
        2: expc = 1 + 2;
        3: expc = 2 + 3;
        4, 6: expc = 2 + 2;
        default: expc = 3 + 3;
      endcase
      @(negedge clk);
      send(kind, lg, 1'b0, x);
      while (!((req_instr.typ == NT_SR) ? ready_sr : ready_basic)) @(negedge clk);
      c0 = cyc;
      @(negedge clk);
      req_valid = 1'b0;
      while (!done) @(negedge clk);
      checks += 2;
      if (cyc - c0 != expc) begin
        failures++;
        $display("FAIL kind=%0d lg=%0d cycles=%0d expected=%0d", kind, lg, cyc - c0, expc);
      end
      begin
        int b;
        b = 0;
        for (int l = 1; l < L; l++) if (valid_out[l] && pm_out[l] < pm_out[b]) b = l;
        if ((beta[b] & ((NSMAX'(1) << n) - 1)) != x || pm_out[b] != '0) begin
          failures++;
          $display("FAIL kind=%0d lg=%0d x=%h exp=%h", kind, lg, beta[b], x);
        end
      end
      @(negedge clk);
    end
    // S1: SR node of slot 1 while slot 0 forks on an SPC node
    s1_en = 1'b1;
    begin
      int hits;
      hits = 0;
      for (int t = 0; t < 20; t++) begin
        @(negedge clk);
        send(3, 4, 1'b0, codeword(3, 4));
        @(negedge clk);
        send(4, 4, 1'b1, codeword(4, 4));
        checks++;
        if (!ready_sr) begin failures++; $display("FAIL S1: SR not accepted while BNU busy"); end
        @(negedge clk);
        req_valid = 1'b0;
        if (ev_s1) hits++;
        repeat (12) @(negedge clk);
      end
      checks++;
      if (hits == 0) begin failures++; $display("FAIL S1 never overlapped"); end
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
