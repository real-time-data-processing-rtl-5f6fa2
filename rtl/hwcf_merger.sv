// hwcf_merger: third step of the TPC hardware cluster finder. It merges the
// time-direction candidates of neighbouring pads of one pad row into
// clusters.
//
// Two small lists hold the clusters that are still open: "prev" holds those
// that reached the previous pad, "cur" those that reach the current pad. A
// candidate on the current pad is compared with all entries of prev at once
// (one comparator per entry); it joins the first unused entry whose peak time
// lies within MATCH_DT time bins, adding its charge moments, and the grown
// cluster moves to cur. Without a match it opens a new cluster in cur. A
// cluster is also split in pad direction: if its per-pad peak charge had
// already fallen below its maximum and the candidate rises more than
// SPLIT_THR above the last pad's peak, the candidate starts a new cluster and
// the old one ends.
//
// At the end of each pad (end-of-channel token) the prev entries that found
// no continuation are finished and sent out, one per cycle, and cur becomes
// prev. If the next pad is not the neighbour of the previous one (gap or new
// row), all of prev is finished first. At the end of the event everything is
// finished and an end-of-event token follows. A finished cluster whose total
// charge is below QTOT_MIN is taken for noise and dropped. When cur is full a
// candidate leaves at once as a cluster of its own (overflow_cnt counts it).
//
// Interface: candidate tokens in, cluster moments out, both valid/ready.
// Timing: one candidate per cycle; each finished cluster costs one cycle,
// during which the input is held.
//
// From the paper: merging of neighbouring signals in pad-row direction as
// the third pipelined step, splitting of overlapping clusters, a minimum
// charge threshold against noise clusters. The list size, the matching
// window and the thresholds are this design's choice.
module hwcf_merger
  import hlt_pkg::*;
#(
  parameter int unsigned MAX_CAND  = 8,   // open clusters per pad
  parameter int unsigned MATCH_DT  = 2,   // time bins between peaks on neighbouring pads
  parameter int unsigned SPLIT_THR = 3,   // pad-direction rise that starts a new cluster
  parameter int unsigned QTOT_MIN  = 8    // smallest total charge kept
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         in_valid,
  output logic         in_ready,
  input  cand_tok_t    in_tok,
  output logic         out_valid,
  input  logic         out_ready,
  output moments_t     out_tok,
  output logic [15:0]  overflow_cnt
);
  localparam int unsigned CW = $clog2(MAX_CAND + 1);

  typedef struct packed {
    logic [Q_W-1:0]    qmax;   // largest sample charge of the cluster
    logic [Q_W-1:0]    lastq;  // peak charge on the last pad
    logic [TIME_W-1:0] tpk;    // peak time bin on the last pad
    logic [QSUM_W-1:0] q;
    logic [M1_W-1:0]   qp;
    logic [M2_W-1:0]   qp2;
    logic [M1_W-1:0]   qt;
    logic [M2_W-1:0]   qt2;
  } entry_t;

  entry_t              prev [MAX_CAND];
  entry_t              cur  [MAX_CAND];
  logic [MAX_CAND-1:0] prev_valid, prev_used;
  logic [CW-1:0]       ncur;
  chan_t               prev_ch;

  logic                flushing;
  logic [MAX_CAND-1:0] flush_mask;
  logic                send_eoe;

  wire out_free = !out_valid || out_ready;

  // ---- candidate as a one-pad cluster
  entry_t cand_e;
  always_comb begin
    logic [M1_W-1:0] qp1;
    qp1    = M1_W'(in_tok.q) * M1_W'(in_tok.ch.pad);
    cand_e = '{qmax: in_tok.qmax, lastq: in_tok.qmax, tpk: in_tok.tpk, q: in_tok.q,
               qp: qp1, qp2: M2_W'(qp1) * M2_W'(in_tok.ch.pad), qt: in_tok.qt, qt2: in_tok.qt2};
  end

  // ---- parallel match against all prev entries
  logic [MAX_CAND-1:0] hit;
  logic                any_hit;
  int unsigned         hit_idx;
  always_comb begin
    any_hit = 1'b0;
    hit_idx = 0;
    for (int i = 0; i < MAX_CAND; i++) begin
      logic [TIME_W-1:0] d;
      d = (prev[i].tpk > in_tok.tpk) ? prev[i].tpk - in_tok.tpk : in_tok.tpk - prev[i].tpk;
      hit[i] = prev_valid[i] && !prev_used[i] && (d <= TIME_W'(MATCH_DT));
    end
    for (int i = MAX_CAND - 1; i >= 0; i--) begin
      if (hit[i]) begin
        any_hit = 1'b1;
        hit_idx = i;
      end
    end
  end

  entry_t hit_e, merged_e;
  logic   pad_split;
  always_comb begin
    hit_e     = prev[hit_idx];
    pad_split = (hit_e.lastq < hit_e.qmax) && (in_tok.qmax > hit_e.lastq + Q_W'(SPLIT_THR));
    merged_e  = '{qmax: (in_tok.qmax > hit_e.qmax) ? in_tok.qmax : hit_e.qmax,
                  lastq: in_tok.qmax, tpk: in_tok.tpk,
                  q: hit_e.q + cand_e.q, qp: hit_e.qp + cand_e.qp, qp2: hit_e.qp2 + cand_e.qp2,
                  qt: hit_e.qt + cand_e.qt, qt2: hit_e.qt2 + cand_e.qt2};
  end
  wire join_hit = any_hit && !pad_split;
  entry_t new_e;
  assign new_e = join_hit ? merged_e : cand_e;

  // ---- flush selection
  int unsigned fl_idx;
  always_comb begin
    fl_idx = 0;
    for (int i = MAX_CAND - 1; i >= 0; i--) if (flush_mask[i]) fl_idx = i;
  end

  function automatic moments_t to_mom(entry_t e, logic [ROW_W-1:0] row);
    return '{eoe: 1'b0, row: row, qmax: e.qmax, q: e.q, qp: e.qp, qp2: e.qp2, qt: e.qt, qt2: e.qt2};
  endfunction

  wire prev_any  = |prev_valid;
  wire adjacent  = (in_tok.ch.row == prev_ch.row) && (in_tok.ch.pad == prev_ch.pad + 1'b1);
  wire [MAX_CAND-1:0] unused = prev_valid & ~prev_used;

  // The input is consumed only in run mode, with room on the output, and
  // when nothing has to be finished first.
  wire need_gap_flush = !in_tok.eoc && prev_any && !adjacent;
  wire need_eoc_flush = in_tok.eoc && (|unused);
  assign in_ready = !flushing && out_free && !need_gap_flush && !need_eoc_flush;
  wire take = in_valid && in_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid    <= 1'b0;
      out_tok      <= '0;
      prev_valid   <= '0;
      prev_used    <= '0;
      ncur         <= '0;
      prev_ch      <= '0;
      flushing     <= 1'b0;
      flush_mask   <= '0;
      send_eoe     <= 1'b0;
      overflow_cnt <= '0;
      for (int i = 0; i < MAX_CAND; i++) begin
        prev[i] <= '0;
        cur[i]  <= '0;
      end
    end else begin
      if (out_ready) out_valid <= 1'b0;

      if (flushing) begin
        if (flush_mask != '0) begin
          if (out_free) begin
            if (prev[fl_idx].q >= QSUM_W'(QTOT_MIN)) begin
              out_valid <= 1'b1;
              out_tok   <= to_mom(prev[fl_idx], prev_ch.row);
            end
            flush_mask[fl_idx] <= 1'b0;
            prev_valid[fl_idx] <= 1'b0;
          end
        end else if (send_eoe) begin
          if (out_free) begin
            out_valid <= 1'b1;
            out_tok   <= '{eoe: 1'b1, default: '0};
            send_eoe  <= 1'b0;
            flushing  <= 1'b0;
          end
        end else begin
          flushing <= 1'b0;
        end
      end else if (in_valid && need_gap_flush) begin
        flushing   <= 1'b1;
        flush_mask <= prev_valid;
      end else if (in_valid && need_eoc_flush) begin
        flushing   <= 1'b1;
        flush_mask <= unused;
      end else if (take) begin
        if (in_tok.eoc) begin
          // end of pad: cur becomes prev
          for (int i = 0; i < MAX_CAND; i++) begin
            prev[i]       <= cur[i];
            prev_valid[i] <= (CW'(i) < ncur);
          end
          prev_used <= '0;
          prev_ch   <= in_tok.ch;
          ncur      <= '0;
          if (in_tok.eoe) begin
            flushing   <= 1'b1;
            send_eoe   <= 1'b1;
            for (int i = 0; i < MAX_CAND; i++) flush_mask[i] <= (CW'(i) < ncur);
          end
        end else begin
          if (join_hit) prev_used[hit_idx] <= 1'b1;
          if (ncur < CW'(MAX_CAND)) begin
            cur[ncur[$clog2(MAX_CAND)-1:0]] <= new_e;
            ncur <= ncur + 1'b1;
          end else begin
            // no room: the cluster leaves now
            overflow_cnt <= overflow_cnt + 1'b1;
            if (new_e.q >= QSUM_W'(QTOT_MIN)) begin
              out_valid <= 1'b1;
              out_tok   <= to_mom(new_e, in_tok.ch.row);
            end
          end
        end
      end
    end
  end

endmodule
