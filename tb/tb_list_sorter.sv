// tb_list_sorter: random PMs and valid bits; the L selected candidates must be
// the L smallest valid PMs in order (ties by index), invalid ones last.
module tb_list_sorter;
  import polar_pkg::*;
  localparam int M = 16, L = 8, SW = 4;
  logic [PMW-1:0] pm [M];
  logic [M-1:0]   valid;
  logic [SW-1:0]  sel [L];
  logic [L-1:0]   sel_valid;
  logic [PMW-1:0] sel_pm [L];
  list_sorter #(.M(M), .L(L)) dut (.*);
  int checks = 0, failures = 0;
  initial begin
    for (int t = 0; t < 3000; t++) begin
      int key [M];
      int ord [M];
      for (int i = 0; i < M; i++) begin
        pm[i] = PMW'($urandom % ((t % 3 == 0) ? 4 : 128));
        valid[i] = ($urandom % 4 != 0);
        key[i] = (valid[i] ? 0 : 100000) + int'(pm[i]) * 32 + i;
        ord[i] = i;
      end
      // reference order
      for (int a = 0; a < M; a++)
        for (int b = a + 1; b < M; b++)
          if (key[ord[b]] < key[ord[a]]) begin
            int tmp; tmp = ord[a]; ord[a] = ord[b]; ord[b] = tmp;
          end
      #1;
      for (int k = 0; k < L; k++) begin
        checks++;
        if (int'(sel[k]) != ord[k] || sel_valid[k] != valid[ord[k]] ||
            (valid[ord[k]] && sel_pm[k] != pm[ord[k]])) begin
          failures++;
          if (failures < 10) $display("FAIL t=%0d k=%0d sel=%0d exp=%0d", t, k, sel[k], ord[k]);
        end
      end
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
