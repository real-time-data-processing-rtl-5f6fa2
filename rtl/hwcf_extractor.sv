// hwcf_extractor: first step of the TPC hardware cluster finder. It pulls the
// ADC samples out of the raw link stream and applies the per-pad gain
// calibration factor.
//
// A channel header word selects the pad (row, pad); its gain factor is read
// from the gain memory in that same cycle and is ready for the first sample
// one cycle later. Each following sample word becomes one sample token with
// the charge q = (adc * gain) >> GAIN_FRAC. When a new header arrives, or the
// word that ends the event, the open channel is closed with an end-of-channel
// token (eoc), which on the end of the event also carries eoe. A sample word
// that ends the event yields two tokens; the input is held for one cycle
// while the second is sent.
//
// Interface: link words in with valid/ready and an end-of-event flag (last);
// sample tokens out with valid/ready through a one-entry output register.
// Gain memory written by the host through gain_we/gain_addr/gain_data, one
// entry per {row, pad}.
//
// Timing: one word per cycle when the output is not stalled.
//
// From the paper: extraction of the samples and application of calibration
// factors as the first of three pipelined steps. The word format, the gain
// format and the memory layout are this design's choice.
module hwcf_extractor
  import hlt_pkg::*;
#(
  parameter int unsigned GAIN_AW = ROW_W + PAD_W
) (
  input  logic                clk,
  input  logic                rst_n,
  // raw link stream
  input  logic                in_valid,
  output logic                in_ready,
  input  logic [LINK_W-1:0]   in_data,
  input  logic                in_last,
  // sample tokens
  output logic                out_valid,
  input  logic                out_ready,
  output sample_tok_t         out_tok,
  // gain memory write port
  input  logic                gain_we,
  input  logic [GAIN_AW-1:0]  gain_addr,
  input  logic [GAIN_W-1:0]   gain_data
);
  logic [GAIN_W-1:0] gain_mem [2**GAIN_AW];
  logic [GAIN_W-1:0] gain_q;
  chan_t             cur_ch;
  logic              ch_open;
  logic              pend_eoe;   // an eoc+eoe token still has to be sent

  wire is_hdr = in_data[31];
  wire [TIME_W-1:0] s_t   = in_data[19:10];
  wire [ADC_W-1:0]  s_adc = in_data[9:0];
  chan_t hdr_ch;
  assign hdr_ch = '{row: in_data[30:23], pad: in_data[22:15]};

  wire out_free = !out_valid || out_ready;
  assign in_ready = out_free && !pend_eoe;
  wire take = in_valid && in_ready;

  logic [ADC_W+GAIN_W-1:0] prod;
  logic [Q_W-1:0]          q_cal;
  always_comb begin
    prod  = s_adc * gain_q;
    q_cal = Q_W'(prod >> GAIN_FRAC);
  end

  always_ff @(posedge clk) begin
    if (gain_we) gain_mem[gain_addr] <= gain_data;
    if (take && is_hdr) gain_q <= gain_mem[GAIN_AW'(hdr_ch)];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_tok   <= '0;
      cur_ch    <= '0;
      ch_open   <= 1'b0;
      pend_eoe  <= 1'b0;
    end else begin
      if (out_ready) out_valid <= 1'b0;
      if (pend_eoe && out_free) begin
        out_valid <= 1'b1;
        out_tok   <= '{eoc: 1'b1, eoe: 1'b1, ch: cur_ch, t: '0, q: '0};
        pend_eoe  <= 1'b0;
        ch_open   <= 1'b0;
      end else if (take) begin
        if (is_hdr) begin
          // close the previous channel (or only the event on a lone trailer header)
          if (ch_open || in_last) begin
            out_valid <= 1'b1;
            out_tok   <= '{eoc: 1'b1, eoe: in_last, ch: cur_ch, t: '0, q: '0};
          end
          cur_ch  <= hdr_ch;
          ch_open <= !in_last;
        end else begin
          out_valid <= 1'b1;
          out_tok   <= '{eoc: 1'b0, eoe: 1'b0, ch: cur_ch, t: s_t, q: q_cal};
          pend_eoe  <= in_last;
        end
      end
    end
  end

  // the link data stay inside the TPC geometry
  assert property (@(posedge clk) disable iff (!rst_n)
                   (take && is_hdr && !in_last) |-> hdr_ch.row < ROW_W'(PAD_ROWS))
    else $error("hwcf_extractor: pad row out of range");
  assert property (@(posedge clk) disable iff (!rst_n)
                   (take && !is_hdr) |-> s_t < TIME_W'(TIME_BINS))
    else $error("hwcf_extractor: time bin out of range");

endmodule
