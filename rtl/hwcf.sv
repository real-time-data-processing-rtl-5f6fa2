// hwcf: one instance of the TPC hardware cluster finder, as it sits behind
// one optical link of the C-RORC.
//
// The raw, zero-suppressed ADC data of the link pass three processing steps
// in a pipeline: sample extraction with gain calibration (hwcf_extractor),
// peak finding and moment sums in time direction (hwcf_peakfinder), and
// merging of neighbouring pads of a row (hwcf_merger). The centre of gravity
// and width are then computed from the moments (hwcf_cog). Small FIFOs
// (sync_fifo) between the steps absorb their data-dependent rates. The
// clusters leave as 32-bit words, CLUSTER_WORDS per cluster (the packed
// cluster_t, most significant word first, padded to 128 bits), and every
// event ends with one trailer word {TRAILER_TAG, 12'b0, number of clusters}
// that carries the end-of-event flag. An event without clusters yields just
// the trailer.
//
// Interface: link stream in (32-bit words, valid/ready, last = end of
// event), cluster stream out with the same handshake, gain memory write port.
// Timing: one raw word per cycle at the input while no stage is full;
// clusters leave at most one word per cycle.
//
// From the paper: the three steps, their pipelining with local memories as
// de-randomizing buffers, and the multiple arithmetic cores per stage. The
// output format and the buffer sizes are this design's choice.
module hwcf
  import hlt_pkg::*;
#(
  parameter int unsigned FIFO_DEPTH = 16,
  parameter int unsigned SPLIT_THR  = 3,
  parameter int unsigned PEAK_MIN   = 4,
  parameter int unsigned MAX_CAND   = 8,
  parameter int unsigned MATCH_DT   = 2,
  parameter int unsigned QTOT_MIN   = 8
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     in_valid,
  output logic                     in_ready,
  input  logic [LINK_W-1:0]        in_data,
  input  logic                     in_last,
  output logic                     out_valid,
  input  logic                     out_ready,
  output logic [LINK_W-1:0]        out_data,
  output logic                     out_last,
  input  logic                     gain_we,
  input  logic [ROW_W+PAD_W-1:0]   gain_addr,
  input  logic [GAIN_W-1:0]        gain_data,
  output logic [15:0]              overflow_cnt,
  output logic [31:0]              cluster_cnt
);

  // step 1
  logic        x_valid, x_ready;
  sample_tok_t x_tok;
  hwcf_extractor u_extract (
    .clk, .rst_n,
    .in_valid, .in_ready, .in_data, .in_last,
    .out_valid(x_valid), .out_ready(x_ready), .out_tok(x_tok),
    .gain_we, .gain_addr, .gain_data
  );

  logic        xf_valid, xf_ready;
  sample_tok_t xf_tok;
  sync_fifo #(.WIDTH($bits(sample_tok_t)), .DEPTH(FIFO_DEPTH)) u_fifo_x (
    .clk, .rst_n,
    .in_valid(x_valid), .in_ready(x_ready), .in_data(x_tok),
    .out_valid(xf_valid), .out_ready(xf_ready), .out_data(xf_tok), .count()
  );

  // step 2
  logic      p_valid, p_ready;
  cand_tok_t p_tok;
  hwcf_peakfinder #(.SPLIT_THR(SPLIT_THR), .PEAK_MIN(PEAK_MIN)) u_peak (
    .clk, .rst_n,
    .in_valid(xf_valid), .in_ready(xf_ready), .in_tok(xf_tok),
    .out_valid(p_valid), .out_ready(p_ready), .out_tok(p_tok)
  );

  logic      pf_valid, pf_ready;
  cand_tok_t pf_tok;
  sync_fifo #(.WIDTH($bits(cand_tok_t)), .DEPTH(FIFO_DEPTH)) u_fifo_p (
    .clk, .rst_n,
    .in_valid(p_valid), .in_ready(p_ready), .in_data(p_tok),
    .out_valid(pf_valid), .out_ready(pf_ready), .out_data(pf_tok), .count()
  );

  // step 3
  logic     m_valid, m_ready;
  moments_t m_tok;
  hwcf_merger #(.MAX_CAND(MAX_CAND), .MATCH_DT(MATCH_DT), .SPLIT_THR(SPLIT_THR),
                .QTOT_MIN(QTOT_MIN)) u_merge (
    .clk, .rst_n,
    .in_valid(pf_valid), .in_ready(pf_ready), .in_tok(pf_tok),
    .out_valid(m_valid), .out_ready(m_ready), .out_tok(m_tok),
    .overflow_cnt
  );

  logic     mf_valid, mf_ready;
  moments_t mf_tok;
  sync_fifo #(.WIDTH($bits(moments_t)), .DEPTH(FIFO_DEPTH)) u_fifo_m (
    .clk, .rst_n,
    .in_valid(m_valid), .in_ready(m_ready), .in_data(m_tok),
    .out_valid(mf_valid), .out_ready(mf_ready), .out_data(mf_tok), .count()
  );

  // centre of gravity
  logic     c_valid, c_ready, c_eoe;
  cluster_t c_cl;
  hwcf_cog u_cog (
    .clk, .rst_n,
    .in_valid(mf_valid), .in_ready(mf_ready), .in_tok(mf_tok),
    .out_valid(c_valid), .out_ready(c_ready), .out_cl(c_cl), .out_eoe(c_eoe)
  );

  // serializer: cluster -> CLUSTER_WORDS words, end of event -> trailer word
  logic [1:0]  widx;
  logic [15:0] ev_clusters;
  logic [CLUSTER_WORDS*LINK_W-1:0] cl_bits;
  assign cl_bits = (CLUSTER_WORDS*LINK_W)'(c_cl);

  always_comb begin
    out_valid = c_valid;
    if (c_eoe) begin
      out_data = {TRAILER_TAG, 12'h000, ev_clusters};
      out_last = 1'b1;
    end else begin
      out_data = cl_bits[(CLUSTER_WORDS-1-int'(widx))*LINK_W +: LINK_W];
      out_last = 1'b0;
    end
  end
  assign c_ready = out_ready && (c_eoe || widx == 2'(CLUSTER_WORDS - 1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      widx        <= '0;
      ev_clusters <= '0;
      cluster_cnt <= '0;
    end else if (out_valid && out_ready) begin
      if (c_eoe) begin
        ev_clusters <= '0;
      end else if (widx == 2'(CLUSTER_WORDS - 1)) begin
        widx        <= '0;
        ev_clusters <= ev_clusters + 1'b1;
        cluster_cnt <= cluster_cnt + 1'b1;
      end else begin
        widx <= widx + 1'b1;
      end
    end
  end

endmodule
