// tb_polar_top: end-to-end self-checking testbench of the decoder at a reduced
// size (N = 128, L = 8, K = 64 information bits including the CRC11).
//
// Frames are random messages with a CRC11, encoded by the polar transform and
// sent as 6-bit LLRs, noiseless or with a few flipped low-magnitude signs.
// Good frames must come back with crc_ok = 1 and the sent u bits; frames whose
// CRC was corrupted on purpose can never pass, so they exercise the CRC fail /
// re-decoding path: in Modes II and III all NGRAPH graphs are tried and the
// noiseless codeword must still be returned with crc_ok = 0.
//
// Phases: Mode I with S1/S2 off, then Mode I with S1/S2 on (two frames
// interleaved; their total time must be below twice the single-frame latency,
// which is the frame-interleaving rate gain), Mode II (graph interleaving),
// Mode III (hybrid).  Every mechanism (stall, S1, S2, each mode, CRC
// fail/retry) is counted and one that never happened is a failure.
module tb_polar_top;
  import polar_pkg::*;

  localparam int N      = 128;
  localparam int LOGN   = 7;
  localparam int K      = 64;
  localparam int L      = 8;
  localparam int IN_PAR = 16;
  localparam int NGRAPH = 8;

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

  polar_top #(.N(N), .L(L), .PE(64), .NST(3), .IN_PAR(IN_PAR), .NGRAPH(NGRAPH), .FIX(4)) dut (
    .clk, .rst_n, .cfg_mode, .cfg_s1, .cfg_s2, .in_valid, .in_ready, .in_llr, .in_info,
    .in_id, .out_valid, .out_id, .out_u, .out_crc_ok, .out_graphs,
    .cnt_frames, .cnt_attempts, .cnt_crc_fail, .cnt_stall, .cnt_interleave, .cnt_s1, .cnt_s2
  );

  `include "tb_frame_fns.svh"

  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  // expected results by frame id
  logic [N-1:0] exp_u   [256];
  bit           exp_ok  [256];
  bit           exp_any [256];   // noisy frame: u checked only if the CRC passed
  int           pending = 0;
  int           done_cyc [256];
  int           mode_frames [3];

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL %s (t=%0t)", what, $time);
    end
  endtask

  always @(posedge clk) begin
    if (rst_n && out_valid) begin
      done_cyc[out_id] = cyc;
      $display("out frame %0d crc_ok=%0b graphs=%0d at cycle %0d", out_id, out_crc_ok, out_graphs, cyc);
      pending--;
      mode_frames[int'(cfg_mode)]++;
      if (exp_any[out_id]) begin
        if (out_crc_ok) check(out_u == exp_u[out_id], $sformatf("frame %0d u (noisy, crc ok)", out_id));
      end else begin
        check(out_crc_ok == exp_ok[out_id], $sformatf("frame %0d crc_ok=%0b", out_id, out_crc_ok));
        check(out_u == exp_u[out_id], $sformatf("frame %0d decoded bits", out_id));
        if (!exp_ok[out_id] && cfg_mode != MODE_I)
          check(int'(out_graphs) == NGRAPH, $sformatf("frame %0d graphs=%0d", out_id, out_graphs));
      end
    end
  end

  logic [N-1:0] A;

  task automatic send(int id, bit bad, int noise);
    logic [N-1:0] u, x;
    u = make_u(A, bad);
    x = encode(u);
    exp_u[id] = u; exp_ok[id] = !bad; exp_any[id] = (noise > 0);
    pending++;
    // inputs change on the falling edge; a beat is taken at the rising edge
    // that follows a falling edge with in_ready high
    for (int b = 0; b < N / IN_PAR; b++) begin
      @(negedge clk);
      in_valid = 1'b1;
      in_id    = 8'(id);
      in_info  = A;
      for (int j = 0; j < IN_PAR; j++) in_llr[j] = to_llr(x[b*IN_PAR + j], noise);
      while (!in_ready) @(negedge clk);
      @(posedge clk);
    end
    @(negedge clk);
    in_valid = 1'b0;
  endtask

  task automatic wait_idle();
    while (pending > 0) @(posedge clk);
    repeat (3) @(posedge clk);
  endtask

  int t0, lat1, lat2;

  initial begin
    cfg_mode = MODE_I; cfg_s1 = 1'b0; cfg_s2 = 1'b0;
    in_valid = 1'b0; in_id = '0; in_info = '0;
    for (int j = 0; j < IN_PAR; j++) in_llr[j] = '0;
    for (int i = 0; i < 256; i++) begin
      exp_u[i] = '0; exp_ok[i] = 1'b0; exp_any[i] = 1'b0; done_cyc[i] = 0;
    end
    mode_frames = '{0, 0, 0};
    A = build_info();
    repeat (4) @(posedge clk);
    rst_n = 1'b1;
    @(posedge clk);

    // single frame latency, Mode I
    send(1, 0, 0);
    t0 = cyc;
    wait_idle();
    lat1 = done_cyc[1] - t0;
    $display("single-frame latency: %0d cycles", lat1);

    // two interleaved frames, S1/S2 on
    cfg_s1 = 1'b1; cfg_s2 = 1'b1;
    t0 = cyc;
    send(2, 0, 0);
    send(3, 0, 0);
    wait_idle();
    lat2 = done_cyc[3] - t0;
    $display("two interleaved frames: %0d cycles", lat2);
    check(lat2 < 2 * lat1 + 2 * (N / IN_PAR), "frame interleaving gives a rate gain");

    for (int f = 4; f < 10; f++) send(f, 0, 3);
    wait_idle();

    // Mode II: graph interleaving
    cfg_mode = MODE_II;
    send(20, 0, 0);
    send(21, 1, 0);
    send(22, 0, 4);
    wait_idle();

    // Mode III: hybrid
    cfg_mode = MODE_III;
    send(30, 1, 0);
    send(31, 0, 0);
    send(32, 0, 4);
    send(33, 0, 4);
    wait_idle();

    $display("counters: frames=%0d attempts=%0d crc_fail=%0d stall=%0d interleave=%0d s1=%0d s2=%0d",
             cnt_frames, cnt_attempts, cnt_crc_fail, cnt_stall, cnt_interleave, cnt_s1, cnt_s2);
    check(cnt_stall > 0, "stall happened");
    check(cnt_s1 > 0, "S1 happened");
    check(cnt_s2 > 0, "S2 happened");
    check(cnt_interleave > 0, "two frames decoded at once");
    check(mode_frames[0] > 0, "Mode I frames");
    check(mode_frames[1] > 0, "Mode II frames");
    check(mode_frames[2] > 0, "Mode III frames");
    check(cnt_crc_fail > 0, "CRC failure happened");
    check(cnt_attempts > cnt_frames, "re-decoding happened");
    check(cnt_frames == 16, "all frames returned");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    while (cyc < 400000) @(posedge clk);
    $display("FAIL watchdog: %0d frames still pending", pending);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

endmodule
