// tb_squire_fn: constants and score functions shared by the end-to-end
// testbench and the behavioural worker model, so that the reference results
// and the workers' computation use the same definitions.
//   match_up(xi, xj): the Chain kernel's alpha - beta for anchors at reference
//   positions xi > xj: 16 - gap while the gap is at most 12, otherwise "no
//   match-up" (NEG_INF), which the worker skips without waiting.
//   ANCHOR_W: the score an anchor has on its own.
//   dp_cell / dp_edge: one cell of the DTW matrix (|s_i - r_j| plus the
//   smallest of the three neighbours; outside the matrix counts as INF, except
//   the corner before (0,0), which is 0) or of the Smith-Waterman matrix
//   (max of 0, diagonal + SW_MATCH or - SW_MISM, up - SW_GAP, left - SW_GAP;
//   outside the matrix counts as 0).
package tb_squire_fn;
  localparam longint INF      = 64'sd1 <<< 40;
  localparam longint NEG_INF  = -(64'sd1 <<< 40);
  localparam longint ANCHOR_W = 8;

  function automatic longint match_up(longint xi, longint xj);
    longint gap = xi - xj;
    return (gap <= 12) ? 16 - gap : NEG_INF;
  endfunction

  localparam longint SW_MATCH = 3;
  localparam longint SW_MISM  = 3;
  localparam longint SW_GAP   = 2;

  // value of the neighbour (i-di, j-dj) when it lies outside the matrix
  function automatic longint dp_edge(bit sw, longint i, longint j, int di, int dj);
    if (sw) return 0;
    return (di == 1 && dj == 1 && i == 0 && j == 0) ? 0 : INF;
  endfunction

  function automatic longint dp_cell(bit sw, longint up, longint left, longint diag,
                                     longint si, longint rj);
    longint best;
    if (sw) begin
      best = 0;
      if (diag + ((si == rj) ? SW_MATCH : -SW_MISM) > best) best = diag + ((si == rj) ? SW_MATCH : -SW_MISM);
      if (up - SW_GAP > best) best = up - SW_GAP;
      if (left - SW_GAP > best) best = left - SW_GAP;
      return best;
    end
    best = up;
    if (left < best) best = left;
    if (diag < best) best = diag;
    return best + ((si > rj) ? si - rj : rj - si);
  endfunction
endpackage
