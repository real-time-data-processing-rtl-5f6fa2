// sync_fifo: single-clock first-in first-out buffer with valid/ready on both
// sides.
//
// The cluster finder decouples its three processing steps with small local
// memories that absorb the bursty, data-dependent rate of each step; this is
// that memory. It is a circular array with read and write pointers one bit
// wider than the address, so that full and empty are told apart. The output
// is read combinationally from the array (first-word fall-through): out_valid
// rises the cycle after a write into an empty FIFO. A word is written when
// in_valid && in_ready and removed when out_valid && out_ready; both may
// happen in the same cycle, also when full.
//
// The depth and the fall-through behaviour are this design's choice.
module sync_fifo #(
  parameter int unsigned WIDTH = 32,
  parameter int unsigned DEPTH = 16   // power of two
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  output logic             in_ready,
  input  logic [WIDTH-1:0] in_data,
  output logic             out_valid,
  input  logic             out_ready,
  output logic [WIDTH-1:0] out_data,
  output logic [$clog2(DEPTH):0] count
);
  localparam int unsigned AW = $clog2(DEPTH);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW:0]      wp, rp;

  wire push = in_valid && in_ready;
  wire pop  = out_valid && out_ready;

  assign count     = wp - rp;
  assign out_valid = (wp != rp);
  // Full FIFO still accepts a word when one leaves in the same cycle.
  assign in_ready  = (count != (AW+1)'(DEPTH)) || out_ready;
  assign out_data  = mem[rp[AW-1:0]];

  always_ff @(posedge clk) begin
    if (push) mem[wp[AW-1:0]] <= in_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0;
      rp <= '0;
    end else begin
      if (push) wp <= wp + 1'b1;
      if (pop)  rp <= rp + 1'b1;
    end
  end

  // A full FIFO may only be written together with a read.
  assert property (@(posedge clk) disable iff (!rst_n) push |-> (count < (AW+1)'(DEPTH)) || pop)
    else $error("sync_fifo: write into full FIFO");

endmodule
