// tb_ref_pkg -- reference model of the folded schedule, written for the
// testbenches independently of the design's pg_pkg.  Call build() once at
// time zero; the tables below are then filled.
//
// The incidence comes from GF(16) (primitive polynomial x^4 + x + 1): point p
// lies on hyperplane h when bit 3 of alpha^((p - h) mod 15) is 0.  Neighbour
// lists are found by scanning the incidence in ascending order of the
// cyclic distance (y - x) mod 15, so that edge t of every node has the same
// distance (the order that makes the schedule repeat from node to node).
// Where a datum sits in a memory unit is worked out from the reader's side only: in pattern
// l, fold k, all readers of that fold are scanned, the (reader, edge) pairs
// that land in one memory unit are ranked by reader index then edge index,
// and rank r gets word l*2Q + 2k + r.  Fold factor Q = 3, N = 5.
// Side 0: hyperplane nodes read point memories; side 1: the reverse.
package tb_ref_pkg;
  localparam int J = 15, G = 7, Q = 3, N = 5, NPAT = 4;

  bit inc_t [J][J];               // [hyperplane][point]
  int nb_t  [2][J][2*NPAT];       // t-th neighbour of reader node, -1 = dummy
  int rd_t  [2][J][2*NPAT];       // word address of reader's edge t
  int wr_t  [2][N][NPAT*Q][2];    // write address per memory unit/step/port
  int woff_t[2][8];               // memory offset reached over wire w
  int nw_t  [2];                  // number of wires
  int ew_t  [2][2*NPAT];          // wire that carries edge t, -1 = dummy

  function automatic void build();
    logic [3:0] pw [J];
    logic [3:0] a;
    int c, l, k, i, pmu, rank, w, t, r;
    bit used [N];
    a = 4'b0001;
    for (int e = 0; e < J; e++) begin
      pw[e] = a;
      a = {a[2:0], 1'b0} ^ (a[3] ? 4'b0011 : 4'b0000);
    end
    for (int h = 0; h < J; h++)
      for (int p = 0; p < J; p++) inc_t[h][p] = (pw[(p - h + J) % J][3] == 1'b0);
    for (int s = 0; s < 2; s++)
      for (int x = 0; x < J; x++) begin
        c = 0;
        for (int t2 = 0; t2 < 2*NPAT; t2++) nb_t[s][x][t2] = -1;
        for (int d = 0; d < J; d++)
          if (s == 0 ? inc_t[x][(x+d)%J] : inc_t[(x+d)%J][x]) begin
            nb_t[s][x][c] = (x + d) % J;
            c++;
          end
      end
    for (int s = 0; s < 2; s++)
      for (int x = 0; x < J; x++)
        for (int t2 = 0; t2 < G; t2++) begin
          l = t2 / 2;
          k = x / N;
          i = x % N;
          pmu = nb_t[s][x][t2] % N;
          rank = 0;
          for (int i2 = 0; i2 < N; i2++)
            for (int t3 = 2 * l; t3 <= 2 * l + 1; t3++)
              if (nb_t[s][k*N+i2][t3] >= 0 && nb_t[s][k*N+i2][t3] % N == pmu)
                if (i2 < i || (i2 == i && t3 < t2)) rank++;
          rd_t[s][x][t2] = l * 2 * Q + 2 * k + rank;
        end
    for (int s = 0; s < 2; s++)
      for (int m = 0; m < N; m++)
        for (int st = 0; st < NPAT * Q; st++)
          for (int p = 0; p < 2; p++) begin
            w = (st % Q) * N + m;
            t = 2 * (st / Q) + p;
            wr_t[s][m][st][p] = -1;
            if (t < G) begin
              r = nb_t[1-s][w][t];
              for (int t2 = 0; t2 < G; t2++)
                if (nb_t[s][r][t2] == w) wr_t[s][m][st][p] = rd_t[s][r][t2];
            end
          end
    for (int s = 0; s < 2; s++) begin
      c = 0;
      for (int v = 0; v < N; v++) used[v] = 0;
      for (int t2 = 0; t2 < G; t2++) used[nb_t[s][0][t2] % N] = 1;
      for (int v = 0; v < N; v++)
        if (used[v]) begin
          woff_t[s][c] = v;
          c++;
        end
      for (int l2 = 0; l2 < NPAT; l2++)
        if (nb_t[s][0][2*l2+1] >= 0 && nb_t[s][0][2*l2] % N == nb_t[s][0][2*l2+1] % N) begin
          woff_t[s][c] = nb_t[s][0][2*l2] % N;
          c++;
        end
      nw_t[s] = c;
      for (int t2 = 0; t2 < 2 * NPAT; t2++) begin
        ew_t[s][t2] = -1;
        if (nb_t[s][0][t2] >= 0)
          for (int w2 = 0; w2 < c; w2++)
            if (woff_t[s][w2] == nb_t[s][0][t2] % N && ew_t[s][t2] < 0) ew_t[s][t2] = w2;
      end
      // the second edge of a pattern whose two edges share a memory unit
      // takes that pattern's extra wire
      c = 0;
      for (int v = 0; v < N; v++) if (used[v]) c++;
      for (int l2 = 0; l2 < NPAT; l2++)
        if (nb_t[s][0][2*l2+1] >= 0 && nb_t[s][0][2*l2] % N == nb_t[s][0][2*l2+1] % N) begin
          ew_t[s][2*l2+1] = c;
          c++;
        end
    end
  endfunction
endpackage
