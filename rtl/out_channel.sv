// out_channel: one HLT output link channel, sending HLT results from the host
// to the data acquisition (DAQ) over an optical link.
//
// Events come from the host side as a word stream and normally go out to
// the link unchanged, with the link's back-pressure passed back. With
// cfg_discard set the channel instead swallows the events right before the
// link, so the whole chain can run (for example during data replay) without
// anything reaching DAQ. The setting is sampled at the first word of each
// event and holds until its last word, so an event is never cut in half
// when the setting changes. The channel counts sent and discarded events.
//
// Interface: stream in and link stream out, both valid/ready with last
// (end of event); cfg_discard; event counters.
// Timing: combinational pass-through, no added latency; a discarded event is
// consumed at one word per cycle. link_data and link_last are wired straight
// from the input: the channel only gates the handshake.
//
// From the paper: the output FPGAs can be set to drop data just before it
// would be sent to DAQ. Sampling the setting per event is this design's
// choice.
module out_channel
  import hlt_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              cfg_discard,
  input  logic              in_valid,
  output logic              in_ready,
  input  logic [LINK_W-1:0] in_data,
  input  logic              in_last,
  output logic              link_valid,
  input  logic              link_ready,
  output logic [LINK_W-1:0] link_data,
  output logic              link_last,
  output logic [31:0]       events_sent,
  output logic [31:0]       events_discarded
);
  logic in_event;       // inside an event
  logic ev_discard;     // discard setting of the current event

  wire discard = in_event ? ev_discard : cfg_discard;

  assign link_valid = in_valid && !discard;
  assign link_data  = in_data;
  assign link_last  = in_last;
  assign in_ready   = discard || link_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      in_event         <= 1'b0;
      ev_discard       <= 1'b0;
      events_sent      <= '0;
      events_discarded <= '0;
    end else if (in_valid && in_ready) begin
      if (!in_event) ev_discard <= cfg_discard;
      in_event <= !in_last;
      if (in_last) begin
        if (discard) events_discarded <= events_discarded + 1'b1;
        else         events_sent      <= events_sent + 1'b1;
      end
    end
  end

endmodule
