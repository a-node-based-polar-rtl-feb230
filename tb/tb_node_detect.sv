// tb_node_detect: windows that start with a node of known type and stage
// (R0, REP, R1, SPC, TYPE-III and SR nodes made of an R0 half and an R1 half),
// followed by random bits, with max_lg set to the node's stage.
module tb_node_detect;
  import polar_pkg::*;
  logic [NSMAX-1:0] win;
  logic [3:0] max_lg;
  node_e typ, src;
  logic [3:0] stage;
  logic [1:0] w, left_rep;
  node_detect dut (.*);
  int checks = 0, failures = 0;
  initial begin
    for (int t = 0; t < 2000; t++) begin
      int lg, n, kind;
      node_e et;
      kind = $urandom % 6;
      lg = (kind == 4) ? 2 + $urandom % 4 : (kind == 5) ? 3 + $urandom % 2 : 1 + $urandom % 5;
      n = 1 << lg;
      win = {$urandom, $urandom};
      for (int i = 0; i < n; i++) begin
        case (kind)
          0: begin win[i] = 1'b0; et = NT_R0; end
          1: begin win[i] = (i == n - 1); et = NT_REP; end
          2: begin win[i] = 1'b1; et = NT_R1; end
          3: begin win[i] = (i != 0); et = NT_SPC; end
          4: begin win[i] = (i >= 2); et = NT_T3; end
          default: begin win[i] = (i >= n / 2); et = NT_SR; end
        endcase
      end
      if (kind == 1 && lg == 1) et = NT_REP;
      if (kind == 3 && lg == 1) et = NT_REP;   // 01 is both REP and SPC
      max_lg = 4'(lg);
      #1;
      checks++;
      if (!(typ == et || (lg == 1 && kind == 3 && typ == NT_SPC)) || int'(stage) != lg ||
          (et == NT_SR && (w != 2'd1 || src != NT_R1 || left_rep[0]))) begin
        failures++;
        if (failures < 10)
          $display("FAIL kind=%0d lg=%0d win=%h got typ=%0d stage=%0d w=%0d src=%0d", kind, lg,
                   win, typ, stage, w, src);
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
