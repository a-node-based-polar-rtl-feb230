// instr_fifo: small synchronous FIFO holding node instructions between the
// online instruction generator and a frame's sub-controller.
//
// Standard first-word-fall-through FIFO: dout is the oldest entry while
// empty is low; pop removes it, push writes din.  full stops the generator.
// A push into a full FIFO or a pop from an empty one is a protocol error and
// is flagged by assertions.  flush empties the FIFO (used when a decoding
// attempt is abandoned).  The paper calls the FIFO "compact" without a depth;
// DEPTH = 4 is this design's choice.
module instr_fifo
  import polar_pkg::*;
#(
  parameter int DEPTH = 4
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   flush,
  input  logic   push,
  input  instr_t din,
  input  logic   pop,
  output instr_t dout,
  output logic   empty,
  output logic   full
);
  localparam int AW = $clog2(DEPTH);

  instr_t        mem [DEPTH];
  logic [AW-1:0] rd_q, wr_q;
  logic [AW:0]   cnt_q;

  assign empty = (cnt_q == 0);
  assign full  = (cnt_q == (AW+1)'(DEPTH));
  assign dout  = mem[rd_q];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_q  <= '0;
      wr_q  <= '0;
      cnt_q <= '0;
    end else if (flush) begin
      rd_q  <= '0;
      wr_q  <= '0;
      cnt_q <= '0;
    end else begin
      if (push && !full) begin
        mem[wr_q] <= din;
        wr_q <= (wr_q == AW'(DEPTH-1)) ? '0 : wr_q + 1'b1;
      end
      if (pop && !empty)
        rd_q <= (rd_q == AW'(DEPTH-1)) ? '0 : rd_q + 1'b1;
      cnt_q <= cnt_q + (AW+1)'(push && !full) - (AW+1)'(pop && !empty);
    end
  end

  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) push |-> !full || flush);
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) pop  |-> !empty || flush);

endmodule
