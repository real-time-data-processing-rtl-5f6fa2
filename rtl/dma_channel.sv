// dma_channel: device-to-host DMA for one C-RORC channel. It writes the
// channel's event stream into a ring buffer in host memory and tells the
// host where each event lies.
//
// Incoming 32-bit words are packed four to a 128-bit beat, the first word in
// the lowest bits. An event always ends its last beat (padding it with zero
// words), so every event starts 16-byte aligned. Beats are written to
// cfg_buf_base + (wrptr mod cfg_buf_size), where wrptr counts the bytes
// written since reset. Flow control: the host reports in cfg_sw_rdptr how
// many bytes it has consumed (same free-running count); a beat is written
// only while at least 16 bytes are free, otherwise the channel stalls and
// the stall reaches the link as back-pressure. After the last beat of an
// event a 128-bit report entry {32'h1 (valid), sequence number, start offset
// in bytes, length in bytes} (most significant first) is written to the
// report ring at cfg_rep_base + 16 * (event number mod cfg_rep_entries).
// The report ring needs no pointer of its own: every event takes at least 16
// bytes of the data ring, so with cfg_rep_entries >= cfg_buf_size / 16 the
// reports of all unread events fit.
//
// Interface: stream in (valid/ready, last); posted host writes out
// (valid/ready, address, 128-bit data). cfg_buf_size and cfg_rep_entries are
// powers of two, cfg_buf_size a multiple of 16.
// Timing: a beat every cycle the host port accepts it, i.e. up to 16 bytes
// per cycle; the report takes one extra write per event.
//
// From the paper: a custom DMA engine writes the link data directly into the
// host's memory, with buffer management and flow control shared with the
// host driver. Beat width, ring layout and report format are this design's
// choice.
module dma_channel
  import hlt_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  input  logic [ADDR_W-1:0]  cfg_buf_base,
  input  logic [31:0]        cfg_buf_size,
  input  logic [31:0]        cfg_sw_rdptr,
  input  logic [ADDR_W-1:0]  cfg_rep_base,
  input  logic [15:0]        cfg_rep_entries,
  // event stream
  input  logic               in_valid,
  output logic               in_ready,
  input  logic [LINK_W-1:0]  in_data,
  input  logic               in_last,
  // host writes
  output logic               wr_valid,
  input  logic               wr_ready,
  output logic [ADDR_W-1:0]  wr_addr,
  output logic [HOST_W-1:0]  wr_data,
  // status
  output logic [31:0]        wrptr,
  output logic [31:0]        events_done,
  output logic [31:0]        stall_cycles
);
  logic [HOST_W-1:0] beat;
  logic [1:0]        nwords;
  logic              beat_valid, beat_last;
  logic              rep_pending;
  logic [31:0]       ev_start, ev_bytes;

  wire [31:0] used  = wrptr - cfg_sw_rdptr;
  wire        space = (cfg_buf_size - used) >= 32'd16;
  wire [31:0] buf_off = wrptr & (cfg_buf_size - 32'd1);

  assign in_ready = !beat_valid && !rep_pending;

  always_comb begin
    wr_valid = 1'b0;
    wr_addr  = '0;
    wr_data  = '0;
    if (rep_pending) begin
      wr_valid = 1'b1;
      wr_addr  = cfg_rep_base + ADDR_W'({events_done[15:0] & (cfg_rep_entries - 1'b1), 4'b0});
      wr_data  = {32'h1, events_done, ev_start, ev_bytes};
    end else if (beat_valid && space) begin
      wr_valid = 1'b1;
      wr_addr  = cfg_buf_base + ADDR_W'(buf_off);
      wr_data  = beat;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      beat         <= '0;
      nwords       <= '0;
      beat_valid   <= 1'b0;
      beat_last    <= 1'b0;
      rep_pending  <= 1'b0;
      wrptr        <= '0;
      ev_start     <= '0;
      ev_bytes     <= '0;
      events_done  <= '0;
      stall_cycles <= '0;
    end else begin
      if (in_valid && in_ready) begin
        beat[nwords*LINK_W +: LINK_W] <= in_data;
        if (nwords == 2'd3 || in_last) begin
          beat_valid <= 1'b1;
          beat_last  <= in_last;
          nwords     <= '0;
        end else begin
          nwords <= nwords + 1'b1;
        end
      end
      if (beat_valid && !space) stall_cycles <= stall_cycles + 1'b1;
      if (wr_valid && wr_ready) begin
        if (rep_pending) begin
          rep_pending <= 1'b0;
          events_done <= events_done + 1'b1;
          ev_bytes    <= '0;
        end else begin
          beat       <= '0;
          beat_valid <= 1'b0;
          wrptr      <= wrptr + 32'd16;
          if (ev_bytes == '0) ev_start <= wrptr;
          ev_bytes   <= ev_bytes + 32'd16;
          if (beat_last) rep_pending <= 1'b1;
        end
      end
    end
  end

  // a beat is only written into free space
  assert property (@(posedge clk) disable iff (!rst_n)
                   (wr_valid && !rep_pending) |-> (wrptr - cfg_sw_rdptr) <= cfg_buf_size - 32'd16)
    else $error("dma_channel: ring buffer overrun");

endmodule
