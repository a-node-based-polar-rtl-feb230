// tb_instr_fifo: random push/pop traffic against a queue model; checks the
// first-word-fall-through output, empty/full and flush.
module tb_instr_fifo;
  import polar_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic flush, push, pop, empty, full;
  instr_t din, dout;
  instr_fifo #(.DEPTH(4)) dut (.*);
  int checks = 0, failures = 0;
  instr_t q[$];
  initial begin
    flush = 0; push = 0; pop = 0; din = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int c = 0; c < 2000; c++) begin
      @(negedge clk);
      checks++;
      if (empty != (q.size() == 0) || full != (q.size() == 4) ||
          (q.size() > 0 && dout != q[0])) begin
        failures++;
        $display("FAIL cycle %0d size %0d empty %0b full %0b", c, q.size(), empty, full);
      end
      flush = ($urandom % 50 == 0);
      push  = !full && ($urandom % 2 == 1);
      pop   = !empty && ($urandom % 2 == 1);
      din   = instr_t'({$urandom, $urandom});
      @(posedge clk);
      if (flush) q.delete();
      else begin
        if (pop) void'(q.pop_front());
        if (push) q.push_back(din);
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
