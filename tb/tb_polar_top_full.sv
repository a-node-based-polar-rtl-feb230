// tb_polar_top_full: the decoder at its default size (N = 1024, L = 8, 64 PEs,
// 3 SCU stages, 8 graphs) decoding codes of the uplink size (1024,512): K = 512
// information bits including the CRC11, chosen by polarization weight.  Two
// noiseless frames are interleaved in Mode I, then one noisy frame is decoded
// in Mode III with S1 and S2 enabled.  Decoded bits and CRC flags are checked
// and the latency of each frame is printed.
module tb_polar_top_full;
  import polar_pkg::*;

  localparam int N      = 1024;
  localparam int LOGN   = 10;
  localparam int K      = 512;
  localparam int IN_PAR = 16;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  mode_e        cfg_mode;
  logic         cfg_s1, cfg_s2;
  logic         in_valid, in_ready;
  llr_t         in_llr [IN_PAR];
  logic [N-1:0] in_info;
  logic [7:0]   in_id;
  logic         out_valid, out_crc_ok;
  logic [7:0]   out_id;
  logic [N-1:0] out_u;
  logic [3:0]   out_graphs;
  logic [31:0]  cnt_frames, cnt_attempts, cnt_crc_fail, cnt_stall, cnt_interleave, cnt_s1, cnt_s2;

  polar_top dut (
    .clk, .rst_n, .cfg_mode, .cfg_s1, .cfg_s2, .in_valid, .in_ready, .in_llr, .in_info,
    .in_id, .out_valid, .out_id, .out_u, .out_crc_ok, .out_graphs,
    .cnt_frames, .cnt_attempts, .cnt_crc_fail, .cnt_stall, .cnt_interleave, .cnt_s1, .cnt_s2
  );

  `include "tb_frame_fns.svh"

  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  logic [N-1:0] exp_u [4];
  bit           noisy [4];
  int           t_in  [4];
  int           pending = 0;
  logic [N-1:0] A;

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  always @(posedge clk) begin
    if (rst_n && out_valid) begin
      pending--;
      $display("frame %0d: crc_ok=%0b graphs=%0d latency %0d cycles after its last input beat",
               out_id, out_crc_ok, out_graphs, cyc - t_in[out_id]);
      if (!noisy[out_id] || out_crc_ok) check(out_u == exp_u[out_id], $sformatf("frame %0d bits", out_id));
      if (!noisy[out_id]) check(out_crc_ok, $sformatf("frame %0d crc", out_id));
    end
  end

  task automatic send(int id, int noise);
    logic [N-1:0] u, x;
    u = make_u(A, 0);
    x = encode(u);
    exp_u[id] = u; noisy[id] = (noise > 0);
    pending++;
    for (int b = 0; b < N / IN_PAR; b++) begin
      @(negedge clk);
      in_valid = 1'b1;
      in_id    = 8'(id);
      in_info  = A;
      for (int j = 0; j < IN_PAR; j++) in_llr[j] = to_llr(x[b*IN_PAR + j], noise);
      while (!in_ready) @(negedge clk);
      @(posedge clk);
    end
    t_in[id] = cyc;
    @(negedge clk);
    in_valid = 1'b0;
  endtask

  initial begin
    cfg_mode = MODE_I; cfg_s1 = 1'b0; cfg_s2 = 1'b0;
    in_valid = 1'b0; in_id = '0; in_info = '0;
    for (int j = 0; j < IN_PAR; j++) in_llr[j] = '0;
    for (int i = 0; i < 4; i++) begin exp_u[i] = '0; noisy[i] = 0; t_in[i] = 0; end
    A = build_info();
    repeat (4) @(posedge clk);
    rst_n = 1'b1;
    send(0, 0);
    send(1, 0);
    while (pending > 0) @(posedge clk);
    cfg_mode = MODE_III; cfg_s1 = 1'b1; cfg_s2 = 1'b1;
    send(2, 2);
    while (pending > 0) @(posedge clk);
    check(cnt_frames == 3, "three frames returned");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    while (cyc < 100000) @(posedge clk);
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

endmodule
