// polar_pkg: types, constants and arithmetic shared by the frame-interleaving
// node-based SCL polar decoder.
//
// LLRs are 6-bit sign-magnitude words (1 sign bit, 5 magnitude bits) and path
// metrics (PMs) are 7-bit unsigned; both widths follow the paper.  Inside the
// node units LLRs are widened to a 7-bit magnitude so that the sums formed for
// repetition nodes do not clip early (a choice of this design).  All arithmetic
// saturates.  The hard decision of a sign-magnitude LLR is its sign bit.
//
// A node instruction (instr_t) names one constituent code of the decoding tree:
// its type, its stage s (length 2^s) and the index of its first leaf.  For a
// sequence-repetition (SR) node it also carries the number W of R0/REP left
// descendants, which of them are REP nodes, and the type of the source node.
package polar_pkg;

  localparam int Q      = 6;   // LLR width, sign-magnitude
  localparam int MAGW   = Q-1; // stored LLR magnitude bits
  localparam int IMAGW  = 7;   // LLR magnitude bits inside the node units
  localparam int PMW    = 7;   // path metric width
  localparam int NSMAX  = 32;  // largest special node (N_s,max)
  localparam int LNSMAX = 5;   // log2(NSMAX)
  localparam int WMAX   = 2;   // max R0/REP left descendants of an SR node
  localparam int RSUMAX = 16;  // largest SR node handled by the RSU
  localparam int TFMAX  = 3;   // largest number of path forks per node
  localparam int POSW   = 16;  // width of leaf positions in instructions

  localparam logic [PMW-1:0]   PM_MAX   = '1;
  localparam logic [MAGW-1:0]  MAG_MAX  = '1;
  localparam logic [IMAGW-1:0] IMAG_MAX = '1;

  typedef struct packed {
    logic            s; // sign: 1 = negative = hard decision 1
    logic [MAGW-1:0] m; // magnitude
  } llr_t;

  typedef struct packed {
    logic             s;
    logic [IMAGW-1:0] m;
  } illr_t;

  typedef enum logic [2:0] {
    NT_R0  = 3'd0,
    NT_REP = 3'd1,
    NT_R1  = 3'd2,
    NT_SPC = 3'd3,
    NT_T3  = 3'd4,
    NT_SR  = 3'd5
  } node_e;

  typedef struct packed {
    node_e           typ;      // node type
    logic [3:0]      stage;    // node length is 2^stage
    logic [POSW-1:0] pos;      // first leaf index of the node
    logic [1:0]      w;        // SR: number of left R0/REP nodes (1..WMAX)
    logic [1:0]      left_rep; // SR: bit k set = k-th left node (stage s-1-k) is REP
    node_e           src;      // SR: source node type (R1, SPC or TYPE-III)
    logic            last;     // last node of the frame
  } instr_t;

  typedef enum logic [1:0] {
    MODE_I   = 2'd0, // frame interleaving
    MODE_II  = 2'd1, // graph interleaving
    MODE_III = 2'd2  // hybrid interleaving
  } mode_e;

  // f(x,y) = sgn(x) sgn(y) min(|x|,|y|)
  function automatic llr_t f_fn(llr_t a, llr_t b);
    llr_t r;
    r.s = a.s ^ b.s;
    r.m = (a.m < b.m) ? a.m : b.m;
    return r;
  endfunction

  // g(x,y,z) = (1-2z) x + y, saturated to the magnitude range
  function automatic llr_t g_fn(llr_t a, llr_t b, logic z);
    int   x, y, v;
    llr_t r;
    x = a.s ? -int'(a.m) : int'(a.m);
    if (z) x = -x;
    y = b.s ? -int'(b.m) : int'(b.m);
    v = x + y;
    r.s = (v < 0);
    if (v < 0) v = -v;
    r.m = (v > int'(MAG_MAX)) ? MAG_MAX : MAGW'(v);
    return r;
  endfunction

  function automatic illr_t widen(llr_t a);
    illr_t r;
    r.s = a.s;
    r.m = IMAGW'(a.m);
    return r;
  endfunction

  function automatic logic [PMW-1:0] pm_add(logic [PMW-1:0] a, int unsigned b);
    int unsigned v;
    v = int'(a) + b;
    return (v > int'(PM_MAX)) ? PM_MAX : PMW'(v);
  endfunction

  // Polar transform of the first 2^lg bits of x (x * F^{(x)lg}); it is its
  // own inverse and maps a node codeword to the node's u bits and back.
  function automatic logic [NSMAX-1:0] polar_xform(logic [NSMAX-1:0] x, int lg);
    logic [NSMAX-1:0] y;
    y = x;
    for (int st = 0; st < LNSMAX; st++) begin
      if (st < lg) begin
        for (int j = 0; j < NSMAX; j++) begin
          if (((j >> st) & 1) == 0 && j + (1 << st) < NSMAX)
            y[j] = y[j] ^ y[j + (1 << st)];
        end
      end
    end
    for (int j = 0; j < NSMAX; j++) if (j >= (1 << lg)) y[j] = 1'b0;
    return y;
  endfunction

endpackage
