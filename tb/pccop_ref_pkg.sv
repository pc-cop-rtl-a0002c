// pccop_ref_pkg: bit-exact reference model of the pc-COP accelerator for
// the testbenches, written as plain sequential software (Algorithm: for
// every sample, update p-bits 1..N_m one after another with
// m_i = sgn(rand + act(beta * sum_{j<N_m} J_ij m_j))). The update rule
// is the published algorithm with tanh replaced by the A1 clamp; the
// formats and the LFSR assignment below are this design's.
//
// It models the number formats of the hardware (beta Q4.20 with a
// truncating, saturating anneal step, activation clamp at +-1, 21-bit LFSR
// values as signed Q1.20) but none of its structure: there are no adder
// trees or speculative paths, only a running sequential update. The one
// hardware detail it must share is which LFSR feeds which update: p-bit
// i+r of a group of K uses LFSR number 2^r - 1 + c, where c holds the new
// values of p-bits i..i+r-1 (bit q for p-bit i+q), and every LFSR steps
// once per group.
package pccop_ref_pkg;

  // J code to value
  function automatic int jval(input logic [1:0] j);
    return (j == 2'b01) ? 1 : (j == 2'b11) ? -1 : 0;
  endfunction

  function automatic logic [1:0] jcode(input int v);
    return (v > 0) ? 2'b01 : (v < 0) ? 2'b11 : 2'b00;
  endfunction

  function automatic logic [20:0] lfsr_next(input logic [20:0] q);
    return {q[19:0], q[20] ^ q[19] ^ q[18] ^ q[15]};
  endfunction

  function automatic logic [20:0] lfsr_seed(input logic [20:0] s);
    return (s == '0) ? 21'd1 : s;
  endfunction

  // activation A_T with T = 2^tlog2, on a Q.20 value, result Q.20
  function automatic longint act(input longint i_val, input int tlog2 = 0);
    longint t = longint'(1) << (20 + tlog2);
    if (i_val <= -t) return -(longint'(1) << 20);
    if (i_val >=  t) return  (longint'(1) << 20);
    return i_val >>> tlog2;
  endfunction

  // one p-bit decision
  function automatic bit pbit(input longint beta, input longint sum, input logic [20:0] rnd);
    longint a = act(beta * sum);
    longint r = longint'(signed'(rnd));
    return a > r;
  endfunction

  function automatic longint beta_next(input longint beta, input longint rate);
    longint p = (beta * rate) >> 20;
    return (p > 64'hFFFFFF) ? 64'hFFFFFF : p;
  endfunction

  class pcop_model;
    int              n, k;
    int              j[][];        // j[row][col] in {-1,0,1}
    bit              m[];          // 0 = -1, 1 = +1
    logic [20:0]     lf[];         // 2^k - 1 LFSR states
    longint          beta;
    int              spec_used;    // updates whose LFSR path was not path 0 of its lane
    int              masked_lanes; // lanes skipped because they were >= N_m

    function new(int n_, int k_);
      n = n_; k = k_;
      j = new[n];
      foreach (j[r]) j[r] = new[n];
      m = new[n];
      lf = new[(1 << k) - 1];
      spec_used = 0; masked_lanes = 0;
    endfunction

    function void seed_all(input logic [511:0] seed);
      foreach (lf[p]) lf[p] = lfsr_seed(seed[21*p +: 21]);
    endfunction

    function int field(int i, int nm);
      int s = 0;
      for (int c = 0; c < nm; c++) s += j[i][c] * (m[c] ? 1 : -1);
      return s;
    endfunction

    // update one group of k p-bits starting at p-bit base; returns new bits
    function int update_group(int base, int nm);
      int cbits = 0;
      for (int r = 0; r < k; r++) begin
        int i = base + r;
        if (i < nm) begin
          bit b = pbit(beta, field(i, nm), lf[(1 << r) - 1 + cbits]);
          if (cbits != 0) spec_used++;
          m[i] = b;
          cbits |= (int'(b) << r);
        end else begin
          masked_lanes++;
          // a masked lane's value is unchanged; later lanes are masked too
          cbits |= (int'(m[i]) << r);
        end
      end
      foreach (lf[p]) lf[p] = lfsr_next(lf[p]);
      return cbits;
    endfunction

    function void run(int nm, int ns, longint beta0, longint rate);
      int groups = (nm + k - 1) / k;
      beta = beta0;
      for (int s = 0; s < ns; s++) begin
        for (int g = 0; g < groups; g++) void'(update_group(g * k, nm));
        beta = beta_next(beta, rate);
      end
    endfunction

    // Ising energy E = -sum_{i<j} J_ij m_i m_j over the first nm p-bits
    function longint energy(int nm);
      longint e = 0;
      for (int a = 0; a < nm; a++)
        for (int b = a + 1; b < nm; b++)
          e -= j[a][b] * (m[a] ? 1 : -1) * (m[b] ? 1 : -1);
      return e;
    endfunction
  endclass

endpackage
