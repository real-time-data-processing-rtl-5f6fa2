// tb_hlt_pkg: stimulus and reference helpers shared by the cluster finder
// and board-level testbenches.
//
// Synthetic TPC charge "blobs" are placed on pad rows; each blob covers 3
// pads x 5 time bins with the separable profile amp * WP[dp] * WT[dt]. The
// package turns a list of blobs into the raw link words of one event
// (channel headers and samples, pads ascending, time bins ascending) and
// computes, straight from the definition of the centre of gravity, the
// cluster each blob must yield when the gain is 1.0. Blobs must be placed
// so that they neither touch nor overlap.
package tb_hlt_pkg;
  import hlt_pkg::*;

  typedef struct {
    int row;
    int pad0;
    int t0;
    int amp;
  } blob_t;

  localparam int WP[3] = '{1, 2, 1};
  localparam int WT[5] = '{1, 3, 5, 3, 1};

  function automatic int blob_q(blob_t b, int dp, int dt);
    return b.amp * WP[dp] * WT[dt];
  endfunction

  // raw link words of one event: {last, word}
  function automatic void make_event(input blob_t blobs[$], ref logic [32:0] words[$]);
    int q [int][int][int]; // row -> pad -> time -> adc
    words.delete();
    foreach (blobs[i])
      for (int dp = 0; dp < 3; dp++)
        for (int dt = 0; dt < 5; dt++)
          q[blobs[i].row][blobs[i].pad0 + dp][blobs[i].t0 + dt] = blob_q(blobs[i], dp, dt);
    foreach (q[r]) begin
      foreach (q[r][p]) begin
        words.push_back({1'b0, 1'b1, 8'(r), 8'(p), 15'd0});
        foreach (q[r][p][t]) words.push_back({1'b0, 12'd0, 10'(t), 10'(q[r][p][t])});
      end
    end
    if (words.size() == 0) words.push_back({1'b1, 1'b1, 31'd0});
    else words[words.size() - 1][32] = 1'b1;
  endfunction

  // expected cluster of one blob (gain 1.0)
  function automatic cluster_t expect_cluster(blob_t b);
    longint unsigned sq = 0, sqp = 0, sqp2 = 0, sqt = 0, sqt2 = 0, qmax = 0;
    longint unsigned mp, mt, m2p, m2t;
    longint signed   vp, vt;
    cluster_t c;
    for (int dp = 0; dp < 3; dp++)
      for (int dt = 0; dt < 5; dt++) begin
        longint unsigned qq = longint'(blob_q(b, dp, dt));
        longint unsigned p = longint'(b.pad0 + dp), t = longint'(b.t0 + dt);
        sq += qq; sqp += qq * p; sqp2 += qq * p * p; sqt += qq * t; sqt2 += qq * t * t;
        if (qq > qmax) qmax = qq;
      end
    mp  = (sqp  << COG_FRAC) / sq;
    mt  = (sqt  << COG_FRAC) / sq;
    m2p = (sqp2 << (2 * COG_FRAC)) / sq;
    m2t = (sqt2 << (2 * COG_FRAC)) / sq;
    vp  = longint'(m2p) - longint'(mp * mp);
    vt  = longint'(m2t) - longint'(mt * mt);
    c.row      = 8'(b.row);
    c.pad      = 14'(mp);
    c.t        = 16'(mt);
    c.sig2_pad = (vp < 0) ? 20'd0 : 20'(vp);
    c.sig2_t   = (vt < 0) ? 20'd0 : 20'(vt);
    c.q        = 24'(sq);
    c.qmax     = 12'(qmax);
    return c;
  endfunction

  // random, non-touching blobs on a few rows
  function automatic void random_blobs(int n, int rows, ref blob_t blobs[$]);
    blobs.delete();
    for (int i = 0; i < n; i++) begin
      blob_t b;
      bit ok;
      int tries = 0;
      do begin
        ok = 1;
        b.row  = 1 + ($urandom % rows);
        b.pad0 = 2 + ($urandom % 40);
        b.t0   = 5 + ($urandom % 200);
        b.amp  = 4 + ($urandom % 60);
        foreach (blobs[j])
          if (blobs[j].row == b.row && b.pad0 < blobs[j].pad0 + 5 && blobs[j].pad0 < b.pad0 + 5 &&
              b.t0 < blobs[j].t0 + 9 && blobs[j].t0 < b.t0 + 9) ok = 0;
        tries++;
      end while (!ok && tries < 1000);
      if (ok) blobs.push_back(b);
    end
  endfunction

endpackage
