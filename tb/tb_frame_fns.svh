// Frame construction helpers for the decoder testbenches, included inside a
// testbench module that defines the localparams N, LOGN and K.
//
// build_info: information set of K bits (message + CRC11) chosen by the
// polarization-weight reliability order.  make_u: random message, CRC11 with
// polynomial 0x621 appended so that the CRC register over all information bits
// ends at zero (bad = 1 flips one CRC bit so no path can pass).  encode: the
// polar transform x = u F^{(x)n}.  to_llr: 6-bit sign-magnitude channel LLRs,
// sign = code bit, optional noise that flips a few low-magnitude signs.

function automatic logic [N-1:0] build_info();
  real pw [N];
  logic [N-1:0] a;
  a = '0;
  for (int i = 0; i < N; i++) begin
    pw[i] = 0.0;
    for (int j = 0; j < LOGN; j++)
      if (((i >> j) & 1) != 0) pw[i] += $pow(2.0, 0.25 * j);
  end
  for (int k = 0; k < K; k++) begin
    int best;
    best = -1;
    for (int i = 0; i < N; i++)
      if (!a[i] && (best < 0 || pw[i] > pw[best] ||
                    (pw[i] == pw[best] && i > best))) best = i;
    a[best] = 1'b1;
  end
  return a;
endfunction

function automatic logic [N-1:0] make_u(logic [N-1:0] a, bit bad);
  logic [N-1:0] u;
  logic [10:0]  r;
  logic         fb;
  int           cnt;
  u = '0; r = '0; cnt = 0;
  for (int i = 0; i < N; i++) begin
    if (a[i]) begin
      if (cnt < K - 11) begin
        u[i] = 1'($urandom % 2);
        fb = r[10] ^ u[i];
        r  = {r[9:0], 1'b0};
        if (fb) r = r ^ 11'h621;
      end else begin
        u[i] = r[10 - (cnt - (K - 11))];
        if (bad && cnt == K - 1) u[i] = ~u[i];
      end
      cnt++;
    end
  end
  return u;
endfunction

function automatic logic [N-1:0] encode(logic [N-1:0] u);
  logic [N-1:0] y;
  y = u;
  for (int st = 0; st < LOGN; st++)
    for (int j = 0; j < N; j++)
      if (((j >> st) & 1) == 0) y[j] = y[j] ^ y[j + (1 << st)];
  return y;
endfunction

function automatic llr_t to_llr(logic b, int noise_pct);
  llr_t v;
  v.s = b;
  v.m = 5'(6 + $urandom % 12);
  if (noise_pct > 0 && int'($urandom % 100) < noise_pct) begin
    v.s = ~b;
    v.m = 5'(1 + $urandom % 3);
  end
  return v;
endfunction
