// hwcf_peakfinder: second step of the TPC hardware cluster finder. Within
// one pad it groups samples of adjacent time bins, finds the charge peaks in
// time direction and accumulates the charge moments needed for the centre of
// gravity in time.
//
// A sequence is a run of samples in consecutive time bins on one pad. While
// a sequence grows the unit keeps sum q, sum q*t, sum q*t^2, the largest
// sample and its time bin. Once the charge has fallen below an earlier value,
// the lowest charge seen since is tracked; if the charge then rises more than
// SPLIT_THR above that minimum, a second peak has started: the sequence is
// closed before the current sample and a new one begins with it. The
// threshold keeps small noise wiggles on a falling edge from splitting a
// cluster in two. A closed sequence is sent on as a candidate only if its
// peak reaches PEAK_MIN; smaller ones are taken for noise and dropped.
//
// Interface: sample tokens in, candidate tokens out, both valid/ready. An
// end-of-channel token first flushes the open sequence, then is passed on
// itself (the input is held for that extra cycle).
//
// Timing: one sample per cycle; a closed sequence leaves one cycle after the
// sample or token that closes it.
//
// From the paper: identification of neighbouring signals and charge peaks in
// time direction as the second pipelined step, splitting (rather than
// fitting) overlapping clusters, and a peak finder made more resilient to
// noise. The concrete rule (hysteresis SPLIT_THR and minimum peak PEAK_MIN)
// is this design's choice; the paper does not give the heuristic.
module hwcf_peakfinder
  import hlt_pkg::*;
#(
  parameter int unsigned SPLIT_THR = 3,  // charge rise above minimum that starts a new peak
  parameter int unsigned PEAK_MIN  = 4   // smallest peak charge kept
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,
  output logic        in_ready,
  input  sample_tok_t in_tok,
  output logic        out_valid,
  input  logic        out_ready,
  output cand_tok_t   out_tok
);
  // open sequence
  logic              seq_open;
  chan_t             seq_ch;
  logic [TIME_W-1:0] last_t, tpk;
  logic [Q_W-1:0]    qmax, lastq, qmin;
  logic              falling;
  logic [QSUM_W-1:0] sq;
  logic [M1_W-1:0]   sqt;
  logic [M2_W-1:0]   sqt2;

  logic              pend;       // end-of-channel token waiting to go out
  cand_tok_t         pend_tok;

  wire out_free = !out_valid || out_ready;
  assign in_ready = out_free && !pend;
  wire take = in_valid && in_ready;

  // contribution of the incoming sample
  logic [M1_W-1:0] c_qt;
  logic [M2_W-1:0] c_qt2;
  always_comb begin
    c_qt  = M1_W'(in_tok.q) * M1_W'(in_tok.t);
    c_qt2 = M2_W'(c_qt) * M2_W'(in_tok.t);
  end

  wire adjacent = seq_open && (in_tok.t == last_t + 1'b1);
  wire split    = adjacent && falling && (in_tok.q > qmin + Q_W'(SPLIT_THR));
  wire keep_seq = (qmax >= Q_W'(PEAK_MIN));

  cand_tok_t seq_tok;
  assign seq_tok = '{eoc: 1'b0, eoe: 1'b0, ch: seq_ch, tpk: tpk, qmax: qmax,
                     q: sq, qt: sqt, qt2: sqt2};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_tok   <= '0;
      pend      <= 1'b0;
      pend_tok  <= '0;
      seq_open  <= 1'b0;
      seq_ch    <= '0;
      last_t    <= '0;
      tpk       <= '0;
      qmax      <= '0;
      lastq     <= '0;
      qmin      <= '0;
      falling   <= 1'b0;
      sq        <= '0;
      sqt       <= '0;
      sqt2      <= '0;
    end else begin
      if (out_ready) out_valid <= 1'b0;
      if (pend && out_free) begin
        out_valid <= 1'b1;
        out_tok   <= pend_tok;
        pend      <= 1'b0;
      end else if (take) begin
        if (in_tok.eoc) begin
          cand_tok_t e;
          e = '{eoc: 1'b1, eoe: in_tok.eoe, ch: in_tok.ch, tpk: '0, qmax: '0, q: '0, qt: '0, qt2: '0};
          if (seq_open && keep_seq) begin
            out_valid <= 1'b1;
            out_tok   <= seq_tok;
            pend      <= 1'b1;
            pend_tok  <= e;
          end else begin
            out_valid <= 1'b1;
            out_tok   <= e;
          end
          seq_open <= 1'b0;
        end else if (adjacent && !split) begin
          // grow the open sequence
          sq     <= sq + QSUM_W'(in_tok.q);
          sqt    <= sqt + c_qt;
          sqt2   <= sqt2 + c_qt2;
          last_t <= in_tok.t;
          lastq  <= in_tok.q;
          if (in_tok.q > qmax) begin
            qmax <= in_tok.q;
            tpk  <= in_tok.t;
          end
          if (falling) begin
            if (in_tok.q < qmin) qmin <= in_tok.q;
          end else if (in_tok.q < lastq) begin
            falling <= 1'b1;
            qmin    <= in_tok.q;
          end
        end else begin
          // time gap, new pad or a second peak: close the open sequence, start a new one
          if (seq_open && keep_seq) begin
            out_valid <= 1'b1;
            out_tok   <= seq_tok;
          end
          seq_open <= 1'b1;
          seq_ch   <= in_tok.ch;
          sq       <= QSUM_W'(in_tok.q);
          sqt      <= c_qt;
          sqt2     <= c_qt2;
          last_t   <= in_tok.t;
          lastq    <= in_tok.q;
          qmax     <= in_tok.q;
          qmin     <= in_tok.q;
          tpk      <= in_tok.t;
          falling  <= 1'b0;
        end
      end
    end
  end

endmodule
