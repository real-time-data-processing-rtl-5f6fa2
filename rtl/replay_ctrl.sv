// replay_ctrl: data replay for one C-RORC channel. It plays events stored in
// the board's on-board memory into the channel as if they came in over the
// optical link, at a configurable event rate.
//
// The memory region [cfg_start, cfg_end) holds the events back to back, each
// as one length word (number of data words, at least 1) followed by the data
// words. The controller reads the region word by word and, with cfg_loop set,
// starts over at cfg_start when it reaches the end, so a short recording can
// be replayed indefinitely. A response FIFO of RESP_DEPTH words takes the
// read data; requests are only issued while the FIFO has room for every read
// in flight, so the memory side is never stalled. From the FIFO a small
// parser emits each event's data words with the end-of-event flag on the
// last one. Before it starts an event it waits until cfg_period cycles have
// passed since the start of the previous event: this sets the replay event
// rate (0 = back to back). Clearing cfg_enable stops new reads.
//
// Interface: generic memory read port (request valid/ready with a word
// address; responses in request order, any latency, always accepted);
// output stream with valid/ready and last.
// Timing: one word per cycle when the memory keeps up.
//
// From the paper: replay of data loaded into on-board memory as if it came
// from the links, with a configurable replay event rate. The storage format
// and the memory port are this design's choice.
module replay_ctrl
  import hlt_pkg::*;
#(
  parameter int unsigned MEM_AW     = 32,
  parameter int unsigned RESP_DEPTH = 8
) (
  input  logic              clk,
  input  logic              rst_n,
  // configuration
  input  logic              cfg_enable,
  input  logic              cfg_loop,
  input  logic [MEM_AW-1:0] cfg_start,
  input  logic [MEM_AW-1:0] cfg_end,
  input  logic [31:0]       cfg_period,
  // on-board memory read port
  output logic              mem_req_valid,
  input  logic              mem_req_ready,
  output logic [MEM_AW-1:0] mem_req_addr,
  input  logic              mem_resp_valid,
  input  logic [LINK_W-1:0] mem_resp_data,
  // replayed stream
  output logic              out_valid,
  input  logic              out_ready,
  output logic [LINK_W-1:0] out_data,
  output logic              out_last,
  // status
  output logic [31:0]       events_sent,
  output logic              done
);
  localparam int unsigned CW = $clog2(RESP_DEPTH) + 1;

  logic [MEM_AW-1:0] addr;
  logic [CW-1:0]     inflight, fcount;
  logic              f_valid, f_ready, f_in_ready;
  logic [LINK_W-1:0] f_data;

  // ---- read requests
  assign mem_req_addr  = addr;
  assign mem_req_valid = cfg_enable && !done &&
                         ((CW+1)'(inflight) + (CW+1)'(fcount) < (CW+1)'(RESP_DEPTH));
  wire req = mem_req_valid && mem_req_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      addr     <= '0;
      inflight <= '0;
      done     <= 1'b1;
    end else begin
      inflight <= inflight + CW'(req) - CW'(mem_resp_valid);
      if (!cfg_enable) begin
        addr <= cfg_start;
        done <= (cfg_start == cfg_end);
      end else if (req) begin
        if (addr + 1'b1 == cfg_end) begin
          addr <= cfg_start;
          done <= !cfg_loop;
        end else begin
          addr <= addr + 1'b1;
        end
      end
    end
  end

  sync_fifo #(.WIDTH(LINK_W), .DEPTH(RESP_DEPTH)) u_resp (
    .clk, .rst_n,
    .in_valid(mem_resp_valid), .in_ready(f_in_ready), .in_data(mem_resp_data),
    .out_valid(f_valid), .out_ready(f_ready), .out_data(f_data), .count(fcount)
  );

  // ---- event parser
  logic        in_event;
  logic [31:0] remaining;
  logic [31:0] since_start;
  wire         may_start = (since_start >= cfg_period);

  assign out_valid = in_event && f_valid;
  assign out_data  = f_data;
  assign out_last  = (remaining == 32'd1);
  assign f_ready   = in_event ? out_ready : may_start;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      in_event    <= 1'b0;
      remaining   <= '0;
      since_start <= '1;
      events_sent <= '0;
    end else begin
      if (since_start != '1) since_start <= since_start + 1'b1;
      if (!in_event) begin
        if (f_valid && may_start) begin
          in_event    <= (f_data != '0);
          remaining   <= f_data;
          since_start <= '0;
        end
      end else if (out_valid && out_ready) begin
        remaining <= remaining - 1'b1;
        if (remaining == 32'd1) begin
          in_event    <= 1'b0;
          events_sent <= events_sent + 1'b1;
        end
      end
    end
  end

  // the credit scheme guarantees room for every response
  assert property (@(posedge clk) disable iff (!rst_n) mem_resp_valid |-> f_in_ready)
    else $error("replay_ctrl: response FIFO overrun");

endmodule
