// pm_crc_unit: path metrics, path validity, CRC detection and final path
// selection of one frame slot.
//
// init starts a decoding attempt with one valid path (path 0, PM 0).  update
// loads the PMs and valid bits the NPU returns for a node.  check runs the CRC
// detection in one cycle: for every path the information bits (u bits at the
// positions where info_set is 1, in increasing order, the last CRC_LEN of them
// being the CRC) are divided by the CRC polynomial; a path passes when the
// remainder is zero.  The selected path is the valid path of smallest PM that
// passes, or, if none passes, the valid path of smallest PM.  res_ok, res_path
// and res_u hold the result from the cycle after check.
//
// Paper: PM, pointer and CRC detection per frame, one cycle for the CRC.  The
// polynomial is the 5G NR CRC11 used by uplink polar codes (g(D) = D^11 + D^10
// + D^9 + D^5 + 1); the bit order is this design's choice.
module pm_crc_unit
  import polar_pkg::*;
#(
  parameter int          N        = 1024,
  parameter int          L        = 8,
  parameter int          CRC_LEN  = 11,
  parameter logic [31:0] CRC_POLY = 32'h621,
  parameter int          LW       = $clog2(L)
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           init,
  input  logic           update,
  input  logic [PMW-1:0] pm_in    [L],
  input  logic [L-1:0]   valid_in,
  input  logic           check,
  input  logic [N-1:0]   info_set,
  input  logic [N-1:0]   u        [L],   // u bits in natural order
  output logic [PMW-1:0] pm       [L],
  output logic [L-1:0]   valid,
  output logic           res_ok,
  output logic [LW-1:0]  res_path,
  output logic [N-1:0]   res_u
);

  logic [L-1:0]  crc_ok;
  logic          sel_ok;
  logic [LW-1:0] sel_path;

  always_comb begin
    logic [CRC_LEN-1:0] r;
    logic fb;
    int best_pm, best_any;
    r = '0; fb = 1'b0;
    for (int l = 0; l < L; l++) begin
      r = '0;
      for (int i = 0; i < N; i++) begin
        if (info_set[i]) begin
          fb = r[CRC_LEN-1] ^ u[l][i];
          r  = {r[CRC_LEN-2:0], 1'b0};
          if (fb) r = r ^ CRC_POLY[CRC_LEN-1:0];
        end
      end
      crc_ok[l] = (r == '0);
    end
    sel_ok = 1'b0; sel_path = '0;
    best_pm = 1 << 20; best_any = 1 << 20;
    for (int l = 0; l < L; l++) begin
      if (valid[l] && crc_ok[l] && int'(pm[l]) < best_pm) begin
        best_pm = int'(pm[l]);
        sel_path = LW'(l);
        sel_ok = 1'b1;
      end
    end
    if (!sel_ok) begin
      for (int l = 0; l < L; l++)
        if (valid[l] && int'(pm[l]) < best_any) begin
          best_any = int'(pm[l]);
          sel_path = LW'(l);
        end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid    <= '0;
      res_ok   <= 1'b0;
      res_path <= '0;
      res_u    <= '0;
      for (int l = 0; l < L; l++) pm[l] <= '0;
    end else begin
      if (init) begin
        valid <= L'(1);
        for (int l = 0; l < L; l++) pm[l] <= '0;
      end else if (update) begin
        valid <= valid_in;
        pm    <= pm_in;
      end
      if (check) begin
        res_ok   <= sel_ok;
        res_path <= sel_path;
        res_u    <= u[sel_path];
      end
    end
  end

endmodule
