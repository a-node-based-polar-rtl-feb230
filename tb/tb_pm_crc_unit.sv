// tb_pm_crc_unit: paths with random PMs; some carry a message with a valid
// CRC11, others are corrupted.  The result, one cycle after check, must be the
// valid passing path of smallest PM (or the smallest-PM valid path with
// res_ok = 0 when none passes).  Also checks init and update of the PMs.
module tb_pm_crc_unit;
  import polar_pkg::*;
  localparam int N = 64, LOGN = 6, K = 32, L = 8, LW = 3;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic init, update, check, res_ok;
  logic [PMW-1:0] pm_in [L], pm [L];
  logic [L-1:0] valid_in, valid;
  logic [N-1:0] info_set, u [L], res_u;
  logic [LW-1:0] res_path;
  pm_crc_unit #(.N(N), .L(L)) dut (.*);
  `include "tb_frame_fns.svh"
  int checks = 0, failures = 0;
  initial begin
    init = 0; update = 0; check = 0; valid_in = '0; info_set = build_info();
    for (int l = 0; l < L; l++) begin pm_in[l] = '0; u[l] = '0; end
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk); init = 1; @(negedge clk); init = 0;
    checks++;
    if (valid != L'(1) || pm[0] != '0) begin failures++; $display("FAIL init"); end
    for (int t = 0; t < 300; t++) begin
      int best, bestok, bpm, bokpm;
      best = -1; bestok = -1; bpm = 1000; bokpm = 1000;
      for (int l = 0; l < L; l++) begin
        pm_in[l] = PMW'($urandom % 128);
        valid_in[l] = ($urandom % 4 != 0);
        u[l] = make_u(info_set, ($urandom % 3) == 0);
        if (valid_in[l] && int'(pm_in[l]) < bpm) begin bpm = int'(pm_in[l]); best = l; end
      end
      for (int l = 0; l < L; l++) begin
        if (valid_in[l] && int'(pm_in[l]) < bokpm && crc_ok_ref(u[l])) begin bokpm = int'(pm_in[l]); bestok = l; end
      end
      update = 1; @(negedge clk); update = 0;
      checks++;
      if (pm != pm_in || valid != valid_in) begin failures++; $display("FAIL update"); end
      check = 1; @(negedge clk); check = 0;
      checks++;
      if (best >= 0) begin
        if (res_ok != (bestok >= 0) || int'(res_path) != ((bestok >= 0) ? bestok : best) ||
            res_u != u[res_path]) begin
          failures++;
          $display("FAIL t=%0d ok=%0b path=%0d exp ok=%0b path=%0d/%0d", t, res_ok, res_path,
                   bestok >= 0, bestok, best);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  function automatic bit crc_ok_ref(logic [N-1:0] uu);
    logic [10:0] r;
    logic fb;
    r = '0;
    for (int i = 0; i < N; i++)
      if (info_set[i]) begin
        fb = r[10] ^ uu[i];
        r = {r[9:0], 1'b0};
        if (fb) r = r ^ 11'h621;
      end
    return r == '0;
  endfunction
  initial begin
    #10000000;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
