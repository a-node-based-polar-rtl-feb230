// psum_unit: partial-sum (PSUM) memory and combine logic of one frame slot.
//
// For every path l and stage k the memory keeps the partial sums beta of the
// last finished left child at stage k, at beta[l][2^k .. 2^(k+1)-1]; the SCU
// reads them for the g function of the right sibling.  When the NPU commits a
// node (stage s, first leaf pos) with codeword x for path l, the unit copies
// the origin path ptr[l] and then climbs the tree: while the current node is a
// right child, beta_{k+1} = (beta_left XOR beta_right, beta_right), Eq. (3);
// the first left child reached stores its partial sums at its stage.  The whole
// climb is combinational and written in the commit cycle, which is the paper's
// one PSU cycle after each node.
module psum_unit
  import polar_pkg::*;
#(
  parameter int N    = 1024,
  parameter int L    = 8,
  parameter int LOGN = $clog2(N),
  parameter int LW   = $clog2(L)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             commit,
  input  logic [LW-1:0]    ptr        [L],
  input  logic [NSMAX-1:0] node_x     [L],
  input  logic [3:0]       node_stage,
  input  logic [POSW-1:0]  node_pos,
  output logic [N-1:0]     beta       [L]
);

  logic [N-1:0] nb [L];

  always_comb begin
    logic [N-1:0] b, bn, old;
    int  idx;
    logic act;
    b = '0; bn = '0; old = '0; idx = 0; act = 1'b0;
    for (int l = 0; l < L; l++) begin
      old = beta[ptr[l]];
      nb[l] = old;
      b = '0;
      for (int j = 0; j < NSMAX; j++)
        if (j < (1 << node_stage)) b[j] = node_x[l][j];
      idx = int'(node_pos) >> node_stage;
      act = 1'b1;
      for (int k = 0; k < LOGN; k++) begin
        if (act && k >= int'(node_stage)) begin
          if ((idx & 1) != 0) begin
            bn = '0;
            for (int j = 0; j < N/2; j++) begin
              if (j < (1 << k)) begin
                bn[j]            = old[((1 << k) + j) % N] ^ b[j];
                bn[(j + (1 << k)) % N] = b[j];
              end
            end
            b   = bn;
            idx = idx >> 1;
          end else begin
            for (int j = 0; j < N/2; j++)
              if (j < (1 << k)) nb[l][((1 << k) + j) % N] = b[j];
            act = 1'b0;
          end
        end
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int l = 0; l < L; l++) beta[l] <= '0;
    end else if (commit) begin
      beta <= nb;
    end
  end

endmodule
