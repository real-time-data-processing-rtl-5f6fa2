// dma_arbiter: shares the single host write port of the C-RORC among the
// DMA channels.
//
// Round-robin arbitration, one 128-bit write per grant: the search for the
// next requester starts one past the channel that was served last, so every
// requesting channel gets a write at least once in N grants. The choice is
// combinational and the selected request is passed straight through; a
// requester sees its ready only when it is granted and the port accepts.
//
// Interface: N request ports (valid, address, data) with per-port ready;
// one host write port (valid/ready).
// Timing: no added latency; one write per cycle when the port accepts.
//
// The paper names a custom DMA engine sharing the PCI Express link; the
// arbitration scheme is this design's choice.
module dma_arbiter
  import hlt_pkg::*;
#(
  parameter int unsigned N = NUM_LINKS
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic [N-1:0]                 req_valid,
  output logic [N-1:0]                 req_ready,
  input  logic [N-1:0][ADDR_W-1:0]     req_addr,
  input  logic [N-1:0][HOST_W-1:0]     req_data,
  output logic                         wr_valid,
  input  logic                         wr_ready,
  output logic [ADDR_W-1:0]            wr_addr,
  output logic [HOST_W-1:0]            wr_data
);
  localparam int unsigned IW = (N > 1) ? $clog2(N) : 1;

  logic [IW-1:0] last_grant;
  logic [IW-1:0] sel;
  logic          any;

  always_comb begin
    any = 1'b0;
    sel = last_grant;
    for (int k = 1; k <= N; k++) begin
      int unsigned idx;
      idx = (int'(last_grant) + k) % N;
      if (!any && req_valid[idx]) begin
        any = 1'b1;
        sel = IW'(idx);
      end
    end
  end

  assign wr_valid = any;
  assign wr_addr  = req_addr[sel];
  assign wr_data  = req_data[sel];

  always_comb begin
    req_ready = '0;
    req_ready[sel] = any && wr_ready;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) last_grant <= IW'(N - 1);
    else if (any && wr_ready) last_grant <= sel;
  end

endmodule
