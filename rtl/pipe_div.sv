// pipe_div: pipelined unsigned divider with several numerators sharing one
// denominator, one quotient bit per stage.
//
// Restoring division: stage k decides quotient bit QW-1-k by comparing the
// partial remainder with the denominator shifted left by QW-1-k, and
// subtracts it when it fits. Each lane is one such arithmetic core; all
// lanes share the denominator and move in lock step. The quotient is only
// correct when it fits in QW bits (num < den << QW); the caller sizes the
// operands so that it does. A side-band word travels along unchanged.
//
// Interface: valid/ready in and out. The whole pipeline advances when its
// last stage is empty or read, so a stall freezes every stage.
// Timing: latency QW+1 cycles, one division per cycle.
module pipe_div #(
  parameter int unsigned LANES = 4,
  parameter int unsigned NW    = 64,  // numerator width
  parameter int unsigned DW    = 24,  // denominator width
  parameter int unsigned QW    = 32,  // quotient width
  parameter int unsigned SW    = 1    // side-band width
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   in_valid,
  output logic                   in_ready,
  input  logic [LANES-1:0][NW-1:0] in_num,
  input  logic [DW-1:0]          in_den,
  input  logic [SW-1:0]          in_side,
  output logic                   out_valid,
  input  logic                   out_ready,
  output logic [LANES-1:0][QW-1:0] out_quo,
  output logic [SW-1:0]          out_side
);
  localparam int unsigned W = NW + DW;  // wide enough for den << (QW-1)

  logic [QW:0]                  v;
  logic [LANES-1:0][W-1:0]      rem  [QW+1];
  logic [LANES-1:0][QW-1:0]     quo  [QW+1];
  logic [DW-1:0]                den  [QW+1];
  logic [SW-1:0]                side [QW+1];

  wire adv = !v[QW] || out_ready;
  assign in_ready  = adv;
  assign out_valid = v[QW];
  assign out_quo   = quo[QW];
  assign out_side  = side[QW];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) v <= '0;
    else if (adv) v <= {v[QW-1:0], in_valid};
  end

  always_ff @(posedge clk) begin
    if (adv) begin
      for (int l = 0; l < LANES; l++) begin
        rem[0][l] <= W'(in_num[l]);
        quo[0][l] <= '0;
      end
      den[0]  <= in_den;
      side[0] <= in_side;
      for (int k = 0; k < QW; k++) begin
        for (int l = 0; l < LANES; l++) begin
          logic [W-1:0] sd;
          sd = W'(den[k]) << (QW - 1 - k);
          if (rem[k][l] >= sd) begin
            rem[k+1][l] <= rem[k][l] - sd;
            quo[k+1][l] <= quo[k][l] | (QW'(1) << (QW - 1 - k));
          end else begin
            rem[k+1][l] <= rem[k][l];
            quo[k+1][l] <= quo[k][l];
          end
        end
        den[k+1]  <= den[k];
        side[k+1] <= side[k];
      end
    end
  end

endmodule
