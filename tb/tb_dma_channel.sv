// tb_dma_channel: test of one DMA channel against a host memory model and a
// slow software consumer.
//
// Random events (1..20 words) are streamed in. The host model stores every
// write and accepts them with random delays. The consumer waits for each
// event's report, checks report fields (valid, sequence number, start
// offset, length rounded up to 16 bytes) and the event data in the ring
// (words packed low-first, padding zero), and only then, after a pause,
// frees the space by moving the read pointer. The 256-byte ring is much
// smaller than the traffic, so the channel must stall on a full ring
// (counted), wrap around, and never overwrite unread data.
module tb_dma_channel;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [63:0] cfg_buf_base, cfg_rep_base, wr_addr;
  logic [31:0] cfg_buf_size, cfg_sw_rdptr, wrptr, events_done, stall_cycles;
  logic [15:0] cfg_rep_entries;
  logic in_valid, in_ready, in_last, wr_valid, wr_ready;
  logic [31:0] in_data;
  logic [127:0] wr_data;
  int checks = 0, failures = 0;

  dma_channel dut (.*);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  logic [127:0] host [logic [63:0]];
  int reports_seen = 0;
  always @(negedge clk) wr_ready <= ($urandom % 4) != 0;
  always @(posedge clk) if (wr_valid && wr_ready) begin
    host[wr_addr] = wr_data;
    if (wr_addr >= cfg_rep_base && wr_addr < cfg_rep_base + 256) reports_seen++;
  end

  localparam int NEV = 60;
  logic [31:0] evw [NEV][$];

  initial begin
    cfg_buf_base = 64'h1000_0000; cfg_buf_size = 256; cfg_sw_rdptr = 0;
    cfg_rep_base = 64'h2000_0000; cfg_rep_entries = 16;
    in_valid = 0; in_data = 0; in_last = 0;
    for (int e = 0; e < NEV; e++) begin
      int n;
      n = 1 + $urandom % 20;
      for (int k = 0; k < n; k++) evw[e].push_back($urandom);
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    fork
      // producer
      for (int e = 0; e < NEV; e++)
        foreach (evw[e][k]) begin
          @(negedge clk);
          in_valid = 1; in_data = evw[e][k]; in_last = (k == evw[e].size() - 1);
          @(posedge clk);
          while (!in_ready) @(posedge clk);
          @(negedge clk) in_valid = 0;
        end
      // consumer
      for (int e = 0; e < NEV; e++) begin
        logic [127:0] rep;
        int nb;
        while (reports_seen <= e) @(posedge clk);
        rep = host[cfg_rep_base + 64'((e % 16) * 16)];
        nb = ((evw[e].size() + 3) / 4) * 16;
        check(rep[127:96] == 1 && rep[95:64] == e, $sformatf("report %0d header", e));
        check(rep[63:32] == cfg_sw_rdptr, $sformatf("report %0d offset %0d exp %0d", e, rep[63:32], cfg_sw_rdptr));
        check(rep[31:0] == nb, $sformatf("report %0d length %0d exp %0d", e, rep[31:0], nb));
        for (int b = 0; b < nb / 16; b++) begin
          logic [127:0] beat, expb;
          beat = host[cfg_buf_base + 64'((cfg_sw_rdptr + b * 16) % 256)];
          expb = '0;
          for (int w = 0; w < 4; w++) if (b * 4 + w < evw[e].size()) expb[w*32 +: 32] = evw[e][b*4 + w];
          check(beat == expb, $sformatf("event %0d beat %0d", e, b));
        end
        repeat (40 + $urandom % 100) @(posedge clk);
        @(negedge clk) cfg_sw_rdptr = cfg_sw_rdptr + nb;
      end
    join
    check(events_done == NEV, "all events reported");
    check(stall_cycles > 0, "ring-full stall happened");
    check(wrptr > 256, "ring wrapped");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
