// pg_pkg -- graph constants and folded-schedule arithmetic shared by the whole
// decoder.
//
// The data-flow graph is the point/hyperplane incidence graph of the
// projective space PG(3,GF(2)): J = 15 points, J = 15 hyperplanes, every node
// has degree GAMMA = 7.  After re-labelling the graph is circulant: hyperplane
// h is incident on the points (HP0[t] + h) mod J, where HP0 is the sorted point
// set of hyperplane 0, {0,1,2,4,5,8,10}.  Seen from a point x, the incident
// hyperplanes are (x - HP0[t]) mod J, i.e. the sorted set of -HP0 mod J.
//
// Folding by Q (Q divides J) leaves N = J/Q physical processing units (PPUs)
// and N physical memory units (PMUs) on each side.  Logical node r runs on
// PPU r mod N in fold r div N.  A node reads its edges two at a time in
// ascending order of the far-end index: perfect access pattern l uses edges
// 2l and 2l+1; GAMMA is odd, so the last pattern carries one dummy edge.
// Edge t of reader node r ends in PMU (base[t] + r) mod N, which does not
// depend on the fold: this is what lets one static set of wires serve all
// folds.
//
// Every schedule table in the design (switch port selections, the wiring of
// the interconnect, the write-address LUT of a PMU) is computed here by
// constant functions, at elaboration time, from HP0 alone.  The names used:
//   side      SIDE_H: hyperplane PPUs read the point PMUs (base = HP0)
//             SIDE_P: point PPUs read the hyperplane PMUs (base = -HP0 sorted)
//   rbase     far-end offset of edge t of reader node 0, -1 for a dummy edge
//   wire      index of a point-to-point wire at a switch; a PPU reaches PMU
//             (i + wire_off(w)) mod N over its wire w.  One wire per distinct
//             PMU (rho of them) plus one extra wire for every pattern whose
//             two edges land in the same PMU (theta), so rho_hat = rho+theta.
//   PMU port  in pattern l the PMU serves its two readers from bin l; port 1
//             (index 0 here) holds offset 2k and goes to the reader with the
//             smaller PPU index, port 2 holds 2k+1 (both edges of one reader
//             in the same PMU: port 1 carries edge 2l, port 2 edge 2l+1).
package pg_pkg;

  // ---- the graph (point-hyperplane correspondence of PG(3,GF(2))) --------
  localparam int J       = 15;
  localparam int GAMMA   = 7;
  localparam int HP0 [GAMMA] = '{0, 1, 2, 4, 5, 8, 10};

  // Degree padded to even with one dummy edge, and patterns per sequence.
  localparam int GAMMA_E = GAMMA + (GAMMA % 2);
  localparam int NPAT    = GAMMA_E / 2;

  localparam int SIDE_H  = 0;  // hyperplane (check) PPUs are the readers
  localparam int SIDE_P  = 1;  // point (variable) PPUs are the readers

  // Control word of one memory unit (the enable and read/write pins of Fig.16)
  typedef struct packed {
    logic en_use;
    logic rd_w_bar1;
    logic rd_w_bar2;
  } pmu_ctrl_t;

  function automatic bit in_hp0(int v);
    bit r;
    r = 1'b0;
    for (int x = 0; x < GAMMA; x++) if (HP0[x] == v) r = 1'b1;
    return r;
  endfunction

  // Far-end offset of edge t of reader node 0 (sorted ascending); -1 = dummy.
  function automatic int rbase(int side, int t);
    int r, cnt;
    r = -1;
    cnt = 0;
    if (t < GAMMA) begin
      if (side == SIDE_H) r = HP0[t];
      else if (side == SIDE_P) begin
        for (int v = 0; v < J; v++) begin
          if (in_hp0((J - v) % J)) begin
            if (cnt == t) r = v;
            cnt++;
          end
        end
      end
    end
    return r;
  endfunction

  // PMU offset of edge t: reader PPU i reaches PMU (i + roff) mod n.
  function automatic int roff(int side, int n, int t);
    int b;
    b = rbase(side, t);
    return (b < 0) ? -1 : b % n;
  endfunction

  function automatic bit off_used(int side, int n, int v);
    bit r;
    r = 1'b0;
    for (int t = 0; t < GAMMA; t++) if (roff(side, n, t) == v) r = 1'b1;
    return r;
  endfunction

  // rho: number of distinct PMUs one PPU reads (Corollary 1).
  function automatic int rho(int side, int n);
    int c;
    c = 0;
    for (int v = 0; v < n; v++) if (off_used(side, n, v)) c++;
    return c;
  endfunction

  // Index of offset v among the used offsets (wire number of that PMU).
  function automatic int didx(int side, int n, int v);
    int c;
    c = 0;
    for (int u = 0; u < v; u++) if (off_used(side, n, u)) c++;
    return c;
  endfunction

  // Pattern l has both of its (real) edges in the same PMU.
  function automatic bit same_pmu(int side, int n, int l);
    return (rbase(side, 2*l+1) >= 0) && (roff(side, n, 2*l) == roff(side, n, 2*l+1));
  endfunction

  function automatic int same_before(int side, int n, int l);
    int c;
    c = 0;
    for (int x = 0; x < l; x++) if (same_pmu(side, n, x)) c++;
    return c;
  endfunction

  function automatic int theta(int side, int n);
    return same_before(side, n, NPAT);
  endfunction

  function automatic int rho_hat(int side, int n);
    return rho(side, n) + theta(side, n);
  endfunction

  // Wire used by a reader's first / second input port in pattern l (-1: none).
  function automatic int wire0(int side, int n, int l);
    return didx(side, n, roff(side, n, 2*l));
  endfunction

  function automatic int wire1(int side, int n, int l);
    int r;
    if (rbase(side, 2*l+1) < 0)  r = -1;
    else if (same_pmu(side, n, l)) r = rho(side, n) + same_before(side, n, l);
    else r = didx(side, n, roff(side, n, 2*l+1));
    return r;
  endfunction

  // PMU offset reached over wire w.
  function automatic int wire_off(int side, int n, int w);
    int r, c;
    r = 0;
    c = 0;
    for (int v = 0; v < n; v++) begin
      if (off_used(side, n, v)) begin
        if (c == w) r = v;
        c++;
      end
    end
    for (int l = 0; l < NPAT; l++)
      if (same_pmu(side, n, l) && (rho(side, n) + same_before(side, n, l) == w))
        r = roff(side, n, 2*l);
    return r;
  endfunction

  // Wire driven by PMU p's read port `port` in pattern l (-1: port idle).
  function automatic int dmx_sel(int side, int n, int p, int l, int port);
    int i0, i1, r;
    i0 = (p - roff(side, n, 2*l) + n) % n;
    if (rbase(side, 2*l+1) < 0)       r = (port == 0) ? wire0(side, n, l) : -1;
    else if (same_pmu(side, n, l))    r = (port == 0) ? wire0(side, n, l) : wire1(side, n, l);
    else begin
      i1 = (p - roff(side, n, 2*l+1) + n) % n;
      if ((port == 0) == (i0 < i1)) r = wire0(side, n, l);
      else                          r = wire1(side, n, l);
    end
    return r;
  endfunction

  // Write address (-1: dummy edge, no write) in the PMU m of the writing side,
  // whose data is read by `side`.  At write step c the local PPU emits edges
  // 2*(c/q) and 2*(c/q)+1 of its logical node (c mod q)*n + m, on ports 0/1.
  // The word goes where the reader will fetch it: bin l', offset 2k'+port.
  function automatic int waddr(int side, int n, int q, int m, int c, int port);
    int t, w, r, dlt, tr, lr, hr, kr, i0, i1, pp, res;
    res = -1;
    t = 2 * (c / q) + port;
    if (rbase(1 - side, t) >= 0) begin
      w   = (c % q) * n + m;
      r   = (rbase(1 - side, t) + w) % J;
      dlt = (w - r + J) % J;
      tr  = 0;
      for (int x = 0; x < GAMMA; x++) if (rbase(side, x) == dlt) tr = x;
      lr  = tr / 2;
      hr  = tr % 2;
      kr  = r / n;
      pp  = hr;
      if ((rbase(side, 2*lr+1) >= 0) && !same_pmu(side, n, lr)) begin
        i0 = (m - roff(side, n, 2*lr) + n) % n;
        i1 = (m - roff(side, n, 2*lr+1) + n) % n;
        pp = ((hr == 0) == (i0 < i1)) ? 0 : 1;
      end
      res = lr * 2 * q + 2 * kr + pp;
    end
    return res;
  endfunction

  // Width of an index in [0, n).
  function automatic int idx_w(int n);
    return (n <= 1) ? 1 : $clog2(n);
  endfunction

endpackage
