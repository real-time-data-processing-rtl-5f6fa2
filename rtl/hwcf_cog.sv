// hwcf_cog: centre-of-gravity unit at the end of the TPC hardware cluster
// finder. It turns the charge moments of a finished cluster into its
// position and width.
//
// With Q = sum q, the position in pad and time is the charge-weighted mean
// <x> = sum(q*x) / Q, and the squared width is <x^2> - <x>^2. Four divider
// lanes (sum q*pad, sum q*pad^2, sum q*t, sum q*t^2, each divided by Q) run
// side by side in one pipelined divider; the means carry COG_FRAC fractional
// bits, the second moments 2*COG_FRAC. The width is formed after the divider
// and clamped to zero when rounding makes it negative, and to its field's
// maximum when it is too wide. The end-of-event token rides through the
// divider as side-band and leaves with out_eoe set and no cluster.
//
// Interface: cluster moments in, finished clusters out, valid/ready.
// Timing: one cluster per cycle; a result is on the output 34 cycles after
// its moments were taken (33 divider stages plus the output register).
//
// From the paper: the centre of gravity is the weighted mean of the signals;
// the cluster properties include position, width and charge. The fixed-point
// output format is this design's choice (the paper's later software step
// converts the cluster properties to fixed point in any case).
module hwcf_cog
  import hlt_pkg::*;
(
  input  logic     clk,
  input  logic     rst_n,
  input  logic     in_valid,
  output logic     in_ready,
  input  moments_t in_tok,
  output logic     out_valid,
  input  logic     out_ready,
  output cluster_t out_cl,
  output logic     out_eoe
);
  localparam int unsigned NW = 64;
  localparam int unsigned QW = 32;
  localparam int unsigned F  = COG_FRAC;
  localparam int unsigned SW = 1 + ROW_W + Q_W + QSUM_W;

  logic [3:0][NW-1:0] num;
  always_comb begin
    num[0] = NW'(in_tok.qp)  << F;
    num[1] = NW'(in_tok.qp2) << (2 * F);
    num[2] = NW'(in_tok.qt)  << F;
    num[3] = NW'(in_tok.qt2) << (2 * F);
  end

  logic               d_valid, d_ready;
  logic [3:0][QW-1:0] quo;
  logic [SW-1:0]      side;

  pipe_div #(.LANES(4), .NW(NW), .DW(QSUM_W), .QW(QW), .SW(SW)) u_div (
    .clk, .rst_n,
    .in_valid (in_valid),
    .in_ready (in_ready),
    .in_num   (num),
    .in_den   (in_tok.q),
    .in_side  ({in_tok.eoe, in_tok.row, in_tok.qmax, in_tok.q}),
    .out_valid(d_valid),
    .out_ready(d_ready),
    .out_quo  (quo),
    .out_side (side)
  );

  function automatic logic [19:0] width2(logic [QW-1:0] mean, logic [QW-1:0] m2);
    logic [2*QW-1:0] sq;
    logic [2*QW-1:0] diff;
    sq = mean * mean;
    if (sq >= (2*QW)'(m2)) return '0;
    diff = (2*QW)'(m2) - sq;
    return (diff > 64'hFFFFF) ? 20'hFFFFF : diff[19:0];
  endfunction

  assign d_ready = !out_valid || out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_cl    <= '0;
      out_eoe   <= 1'b0;
    end else begin
      if (out_ready) out_valid <= 1'b0;
      if (d_valid && d_ready) begin
        out_valid       <= 1'b1;
        out_eoe         <= side[SW-1];
        out_cl.row      <= side[ROW_W+Q_W+QSUM_W-1 -: ROW_W];
        out_cl.qmax     <= side[Q_W+QSUM_W-1 -: Q_W];
        out_cl.q        <= side[QSUM_W-1:0];
        out_cl.pad      <= quo[0][PAD_W+F-1:0];
        out_cl.t        <= quo[2][TIME_W+F-1:0];
        out_cl.sig2_pad <= width2(quo[0], quo[1]);
        out_cl.sig2_t   <= width2(quo[2], quo[3]);
      end
    end
  end

endmodule
