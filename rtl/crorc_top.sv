// crorc_top: firmware of the HLT Common Read-Out Receiver Card (C-RORC), the
// FPGA board through which detector data enter the HLT farm and HLT results
// leave it towards DAQ.
//
// Each of the NUM_LINKS input channels takes either its optical link or its
// replay unit (replay_ctrl, playing events from on-board memory) as source.
// The first NUM_HWCF channels can run the source through a TPC hardware
// cluster finder (hwcf), which replaces the raw ADC data by clusters; all
// other channels, and these when the finder is off, pass the raw data
// through unchanged. Each channel's result is written into a host ring
// buffer by its own DMA channel (dma_channel); a round-robin arbiter
// (dma_arbiter) shares the host write port among them. NUM_OUT output
// channels (out_channel) carry HLT results from the host to DAQ links and
// can discard them instead. Back-pressure propagates end to end: a full host
// ring buffer stalls its DMA channel, the cluster finder behind it, and
// finally the link (link_ready low).
//
// Ports are grouped by what sits outside the FPGA logic: the link receivers
// (word streams), the on-board memory (read ports), the PCI Express core
// (host write port, host-to-card streams for the output channels) and the
// host configuration (chan_cfg, gain memory writes).
//
// From the paper: 12 links per board, six cluster finder instances, data
// replay from on-board memory, a custom DMA engine into host memory, output
// links that can discard data, and the pass-through of non-TPC data. The
// channel-to-finder mapping, the per-channel replay units and NUM_OUT are
// this design's choices.
module crorc_top
  import hlt_pkg::*;
#(
  parameter int unsigned NLINK      = NUM_LINKS,
  parameter int unsigned NCF        = NUM_HWCF,
  parameter int unsigned NOUT       = 4,
  parameter int unsigned FIFO_DEPTH = 16
) (
  input  logic                              clk,
  input  logic                              rst_n,
  // host configuration
  input  chan_cfg_t [NLINK-1:0]             chan_cfg,
  input  logic [NOUT-1:0]                   out_discard,
  input  logic                              gain_we,
  input  logic [7:0]                        gain_chan,
  input  logic [ROW_W+PAD_W-1:0]            gain_addr,
  input  logic [GAIN_W-1:0]                 gain_data,
  // optical input links (after the link receivers)
  input  logic [NLINK-1:0]                  link_valid,
  output logic [NLINK-1:0]                  link_ready,
  input  logic [NLINK-1:0][LINK_W-1:0]      link_data,
  input  logic [NLINK-1:0]                  link_last,
  // on-board memory read ports, one per replay unit
  output logic [NLINK-1:0]                  mem_req_valid,
  input  logic [NLINK-1:0]                  mem_req_ready,
  output logic [NLINK-1:0][31:0]            mem_req_addr,
  input  logic [NLINK-1:0]                  mem_resp_valid,
  input  logic [NLINK-1:0][LINK_W-1:0]      mem_resp_data,
  // host write port (to the PCI Express core)
  output logic                              wr_valid,
  input  logic                              wr_ready,
  output logic [ADDR_W-1:0]                 wr_addr,
  output logic [HOST_W-1:0]                 wr_data,
  // host-to-card streams of the output channels
  input  logic [NOUT-1:0]                   hin_valid,
  output logic [NOUT-1:0]                   hin_ready,
  input  logic [NOUT-1:0][LINK_W-1:0]       hin_data,
  input  logic [NOUT-1:0]                   hin_last,
  // output links to DAQ
  output logic [NOUT-1:0]                   daq_valid,
  input  logic [NOUT-1:0]                   daq_ready,
  output logic [NOUT-1:0][LINK_W-1:0]       daq_data,
  output logic [NOUT-1:0]                   daq_last,
  // status
  output logic [NLINK-1:0][31:0]            dma_events,
  output logic [NLINK-1:0][31:0]            dma_wrptr,
  output logic [NLINK-1:0][31:0]            dma_stalls,
  output logic [NLINK-1:0][31:0]            replay_events,
  output logic [NLINK-1:0]                  replay_done,
  output logic [NCF-1:0][31:0]              cf_clusters,
  output logic [NCF-1:0][15:0]              cf_overflows,
  output logic [NOUT-1:0][31:0]             out_sent,
  output logic [NOUT-1:0][31:0]             out_discarded
);
  logic [NLINK-1:0]              d_valid, d_ready;
  logic [NLINK-1:0][ADDR_W-1:0]  d_addr;
  logic [NLINK-1:0][HOST_W-1:0]  d_data;

  for (genvar c = 0; c < NLINK; c++) begin : g_chan
    // ---- source: link or replay
    logic              r_valid, r_ready, r_last;
    logic [LINK_W-1:0] r_data;
    replay_ctrl #(.MEM_AW(32)) u_replay (
      .clk, .rst_n,
      .cfg_enable (chan_cfg[c].replay_enable),
      .cfg_loop   (chan_cfg[c].replay_loop),
      .cfg_start  (chan_cfg[c].replay_start),
      .cfg_end    (chan_cfg[c].replay_end),
      .cfg_period (chan_cfg[c].replay_period),
      .mem_req_valid (mem_req_valid[c]),
      .mem_req_ready (mem_req_ready[c]),
      .mem_req_addr  (mem_req_addr[c]),
      .mem_resp_valid(mem_resp_valid[c]),
      .mem_resp_data (mem_resp_data[c]),
      .out_valid(r_valid), .out_ready(r_ready), .out_data(r_data), .out_last(r_last),
      .events_sent(replay_events[c]), .done(replay_done[c])
    );

    logic              s_valid, s_ready, s_last;
    logic [LINK_W-1:0] s_data;
    wire use_replay = chan_cfg[c].src_replay;
    assign s_valid       = use_replay ? r_valid : link_valid[c];
    assign s_data        = use_replay ? r_data  : link_data[c];
    assign s_last        = use_replay ? r_last  : link_last[c];
    assign r_ready       = use_replay && s_ready;
    assign link_ready[c] = !use_replay && s_ready;

    // ---- optional cluster finder
    logic              p_valid, p_ready, p_last;
    logic [LINK_W-1:0] p_data;
    if (c < NCF) begin : g_cf
      logic              cf_in_ready, cf_valid, cf_last;
      logic [LINK_W-1:0] cf_data;
      wire cf_on = chan_cfg[c].cf_enable;
      hwcf #(.FIFO_DEPTH(FIFO_DEPTH)) u_hwcf (
        .clk, .rst_n,
        .in_valid (s_valid && cf_on), .in_ready(cf_in_ready),
        .in_data  (s_data), .in_last(s_last),
        .out_valid(cf_valid), .out_ready(p_ready && cf_on),
        .out_data (cf_data), .out_last(cf_last),
        .gain_we  (gain_we && gain_chan == 8'(c)),
        .gain_addr, .gain_data,
        .overflow_cnt(cf_overflows[c]),
        .cluster_cnt (cf_clusters[c])
      );
      assign s_ready = cf_on ? cf_in_ready : p_ready;
      assign p_valid = cf_on ? cf_valid : s_valid;
      assign p_data  = cf_on ? cf_data  : s_data;
      assign p_last  = cf_on ? cf_last  : s_last;
    end else begin : g_pass
      assign s_ready = p_ready;
      assign p_valid = s_valid;
      assign p_data  = s_data;
      assign p_last  = s_last;
    end

    // ---- DMA into the host
    dma_channel u_dma (
      .clk, .rst_n,
      .cfg_buf_base   (chan_cfg[c].buf_base),
      .cfg_buf_size   (chan_cfg[c].buf_size),
      .cfg_sw_rdptr   (chan_cfg[c].sw_rdptr),
      .cfg_rep_base   (chan_cfg[c].rep_base),
      .cfg_rep_entries(chan_cfg[c].rep_entries),
      .in_valid(p_valid), .in_ready(p_ready), .in_data(p_data), .in_last(p_last),
      .wr_valid(d_valid[c]), .wr_ready(d_ready[c]), .wr_addr(d_addr[c]), .wr_data(d_data[c]),
      .wrptr(dma_wrptr[c]), .events_done(dma_events[c]), .stall_cycles(dma_stalls[c])
    );
  end

  dma_arbiter #(.N(NLINK)) u_arb (
    .clk, .rst_n,
    .req_valid(d_valid), .req_ready(d_ready), .req_addr(d_addr), .req_data(d_data),
    .wr_valid, .wr_ready, .wr_addr, .wr_data
  );

  for (genvar o = 0; o < NOUT; o++) begin : g_out
    out_channel u_out (
      .clk, .rst_n,
      .cfg_discard(out_discard[o]),
      .in_valid(hin_valid[o]), .in_ready(hin_ready[o]), .in_data(hin_data[o]), .in_last(hin_last[o]),
      .link_valid(daq_valid[o]), .link_ready(daq_ready[o]), .link_data(daq_data[o]), .link_last(daq_last[o]),
      .events_sent(out_sent[o]), .events_discarded(out_discarded[o])
    );
  end

endmodule
