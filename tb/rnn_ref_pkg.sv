// rnn_ref_pkg: integer reference model of the vanilla-RNN datapath for the
// testbenches. It recomputes, with plain 64-bit integer arithmetic and no
// use of the RTL's helper functions, what each unit must produce:
//   U_i   = wrap19(floor((W_i*x + B_i*2^DF) / 2^WF))
//   S1    = ReLU(U(x0))
//   S_k   = ReLU(wrap19(sum_j-pairs floor((S_a R_aj + S_b R_bj) / 2^WF) + U(x_k-1)))
//   E     = wrap19(floor((sum_i S5_i Wd_i + Bd*2^DF + 2^(WF-1)) / 2^WF))
// with DF = 10 and WF = 12 fraction bits, wrap19 keeping the low 19 bits as
// a signed number.
package rnn_ref_pkg;
  localparam int NS = 8;
  localparam int DF = 10;
  localparam int WF = 12;

  typedef struct {
    int r  [NS*NS];   // r[i*8+j]
    int w  [NS];
    int b  [NS];
    int wd [NS];
    int bd;
  } wset_t;

  function automatic longint wrap19(input longint v);
    longint m;
    m = v & 64'h7FFFF;
    if (m >= 64'h40000) m = m - 64'h80000;
    return m;
  endfunction

  function automatic longint fdiv(input longint v, input int sh);   // floor(v / 2^sh)
    longint q;
    q = v / (64'sd1 << sh);
    if (v < 0 && (q * (64'sd1 << sh)) != v) q = q - 1;
    return q;
  endfunction

  function automatic int relu(input longint v);
    return (v > 0) ? int'(v) : 0;
  endfunction

  function automatic int rand_range(input int lo, input int hi);   // lo..hi inclusive
    return lo + int'($urandom % (hi - lo + 1));
  endfunction

  function automatic wset_t rand_wset();
    wset_t s;
    for (int i = 0; i < NS*NS; i++) s.r[i] = rand_range(-(1 << (WF-1)), (1 << (WF-1)));
    for (int i = 0; i < NS; i++) begin
      s.w[i]  = rand_range(-(1 << WF), (1 << WF));
      s.b[i]  = rand_range(-(1 << (WF-1)), (1 << (WF-1)));
      s.wd[i] = rand_range(-(1 << WF), (1 << WF));
    end
    s.bd = rand_range(-(1 << WF), (1 << WF));
    return s;
  endfunction

  // Weight at configuration address a (0-63 R, 64-71 W, 72-79 B, 80-87 Wd, 88 Bd).
  function automatic int wset_word(input wset_t s, input int a);
    if (a < 64) return s.r[a];
    if (a < 72) return s.w[a-64];
    if (a < 80) return s.b[a-72];
    if (a < 88) return s.wd[a-80];
    return s.bd;
  endfunction

  function automatic int ref_u(input wset_t s, input int x, input int i);
    return int'(wrap19(fdiv(longint'(s.w[i]) * x + (longint'(s.b[i]) << DF), WF)));
  endfunction

  // One recurrent cell: returns the new state element j.
  function automatic int ref_t(input wset_t s, input int st [NS], input int j);
    longint acc = 0;
    for (int p = 0; p < NS/2; p++)
      acc += wrap19(fdiv(longint'(st[2*p]) * s.r[(2*p)*NS+j] + longint'(st[2*p+1]) * s.r[(2*p+1)*NS+j], WF));
    return int'(wrap19(acc));
  endfunction

  function automatic int ref_dense(input wset_t s, input int st [NS]);
    longint acc = longint'(s.bd) << DF;
    for (int i = 0; i < NS; i++) acc += longint'(st[i]) * s.wd[i];
    return int'(wrap19(fdiv(acc + (64'sd1 << (WF-1)), WF)));
  endfunction

  // Whole network on a window x[0] (oldest) .. x[4] (newest).
  function automatic int ref_energy(input wset_t s, input int x [5]);
    int st [NS];
    int nx [NS];
    for (int i = 0; i < NS; i++) st[i] = relu(ref_u(s, x[0], i));
    for (int k = 1; k < 5; k++) begin
      for (int j = 0; j < NS; j++) nx[j] = relu(wrap19(longint'(ref_t(s, st, j)) + ref_u(s, x[k], j)));
      st = nx;
    end
    return ref_dense(s, st);
  endfunction
endpackage
