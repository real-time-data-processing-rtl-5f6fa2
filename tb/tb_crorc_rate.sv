// tb_crorc_rate: throughput test of the complete C-RORC firmware (default
// size) under the link loads quoted for the HLT input boards.
//
// Each active link is a source that produces words at a fixed average rate,
// expressed in words per board clock cycle (312.5 MHz) and derived from the
// link speed with 8b/10b coding (32 payload bits per 40 line bits):
//   A  TPC board: 6 links at 3.125 Gbps, all through the cluster finders
//      (3.125e9 * 0.8 / 32 / 312.5e6 = 0.25 words/cycle per link)
//   B  fully equipped board: 12 links at 2.125 Gbps, raw pass-through
//      (0.17 words/cycle per link, 2.5 GB/s in total)
//   C  TRD board: 6 links at 4.0 Gbps, raw pass-through (0.32 words/cycle)
//   D  the fastest links, 12 at 5.3125 Gbps raw (0.425 words/cycle each,
//      6.4 GB/s in total) - more than the 128-bit host port carries, so
//      here back-pressure must appear and nothing may be lost
// Words a link has produced but the board has not yet taken queue up at the
// source. For A-C the test checks that this backlog stays small (the board
// keeps up) and that every event reaches the host; for D that every event
// still arrives. The host frees ring space as soon as data are written. A
// and the cluster counts check that the finders see every blob.
module tb_crorc_rate;
  import hlt_pkg::*;
  import tb_hlt_pkg::*;

  localparam int NLINK = NUM_LINKS, NCF = NUM_HWCF, NOUT = 4;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  chan_cfg_t [NLINK-1:0]          chan_cfg;
  logic [NOUT-1:0]                out_discard;
  logic                           gain_we;
  logic [7:0]                     gain_chan;
  logic [15:0]                    gain_addr;
  logic [12:0]                    gain_data;
  logic [NLINK-1:0]               link_valid, link_ready, link_last;
  logic [NLINK-1:0][31:0]         link_data;
  logic [NLINK-1:0]               mem_req_valid, mem_req_ready, mem_resp_valid;
  logic [NLINK-1:0][31:0]         mem_req_addr, mem_resp_data;
  logic                           wr_valid, wr_ready;
  logic [63:0]                    wr_addr;
  logic [127:0]                   wr_data;
  logic [NOUT-1:0]                hin_valid, hin_ready, hin_last;
  logic [NOUT-1:0][31:0]          hin_data;
  logic [NOUT-1:0]                daq_valid, daq_ready, daq_last;
  logic [NOUT-1:0][31:0]          daq_data;
  logic [NLINK-1:0][31:0]         dma_events, dma_wrptr, dma_stalls, replay_events;
  logic [NLINK-1:0]               replay_done;
  logic [NCF-1:0][31:0]           cf_clusters;
  logic [NCF-1:0][15:0]           cf_overflows;
  logic [NOUT-1:0][31:0]          out_sent, out_discarded;

  crorc_top dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // host: accepts every write; frees the ring as soon as it is written
  assign wr_ready = 1'b1;
  always @(negedge clk)
    for (int c = 0; c < NLINK; c++) chan_cfg[c].sw_rdptr = dma_wrptr[c];

  // ---- rate-limited link sources
  int          rate_milli [NLINK];     // words per 1000 cycles
  int          credit     [NLINK];
  logic [32:0] pending    [NLINK][$];  // produced, not yet taken by the board
  logic [32:0] stream     [NLINK][$];  // words still to be produced
  int          max_backlog[NLINK];
  int          words_taken[NLINK];

  always @(posedge clk) if (rst_n) begin
    for (int c = 0; c < NLINK; c++) begin
      if (link_valid[c] && link_ready[c]) begin
        void'(pending[c].pop_front());
        words_taken[c]++;
      end
      credit[c] += rate_milli[c];
      while (credit[c] >= 1000 && stream[c].size() > 0) begin
        credit[c] -= 1000;
        pending[c].push_back(stream[c].pop_front());
      end
      if (stream[c].size() == 0) credit[c] = 0;
      if (pending[c].size() > max_backlog[c]) max_backlog[c] = pending[c].size();
    end
  end
  always @(negedge clk)
    for (int c = 0; c < NLINK; c++) begin
      link_valid[c] = pending[c].size() > 0;
      if (pending[c].size() > 0) begin
        link_data[c] = pending[c][0][31:0];
        link_last[c] = pending[c][0][32];
      end
    end

  // ---- scenario
  int exp_events [NLINK];
  int exp_words  [NLINK];
  int exp_cl     [NCF];

  task automatic run(string name, int nlinks, bit cf, int rate, int nev, int max_ok_backlog);
    int ev0 [NLINK];
    int cl0 [NCF];
    int t0, cycles;
    logic [32:0] w[$];
    blob_t b[$];
    for (int c = 0; c < NLINK; c++) begin
      ev0[c] = dma_events[c];
      max_backlog[c] = 0;
      words_taken[c] = 0;
      exp_words[c] = 0;
      exp_events[c] = 0;
    end
    for (int c = 0; c < NCF; c++) begin cl0[c] = cf_clusters[c]; exp_cl[c] = 0; end
    @(negedge clk);
    for (int c = 0; c < NLINK; c++) begin
      chan_cfg[c].cf_enable = cf && c < NCF;
      rate_milli[c] = (c < nlinks) ? rate : 0;
    end
    for (int c = 0; c < nlinks; c++)
      for (int e = 0; e < nev; e++) begin
        if (cf) begin
          random_blobs(30, 6, b);
          make_event(b, w);
          exp_cl[c] += b.size();
        end else begin
          w.delete();
          for (int k = 0; k < 300; k++) w.push_back({k == 299, 32'($urandom)});
        end
        foreach (w[i]) stream[c].push_back(w[i]);
        exp_words[c] += w.size();
        exp_events[c]++;
      end
    t0 = 0;
    for (int k = 0; k < 2000000; k++) begin
      bit all;
      all = 1;
      for (int c = 0; c < NLINK; c++) if (dma_events[c] - ev0[c] != exp_events[c]) all = 0;
      if (all) break;
      @(posedge clk);
      t0++;
    end
    cycles = t0;
    for (int c = 0; c < nlinks; c++) begin
      check(dma_events[c] - ev0[c] == exp_events[c], $sformatf("%s: ch%0d events %0d exp %0d", name, c, dma_events[c] - ev0[c], exp_events[c]));
      check(words_taken[c] == exp_words[c], $sformatf("%s: ch%0d words taken", name, c));
      if (max_ok_backlog > 0)
        check(max_backlog[c] <= max_ok_backlog, $sformatf("%s: ch%0d backlog %0d words", name, c, max_backlog[c]));
      if (cf && c < NCF)
        check(cf_clusters[c] - cl0[c] == exp_cl[c], $sformatf("%s: ch%0d clusters %0d exp %0d", name, c, cf_clusters[c] - cl0[c], exp_cl[c]));
    end
    begin
      int mb;
      mb = 0;
      for (int c = 0; c < nlinks; c++) if (max_backlog[c] > mb) mb = max_backlog[c];
      $display("%s: %0d links at %0d words/1000 cycles, %0d cycles, largest source backlog %0d words",
               name, nlinks, rate, cycles, mb);
      if (max_ok_backlog == 0) check(mb > 64, $sformatf("%s: overload shows as back-pressure", name));
    end
  endtask

  initial begin
    chan_cfg = '0;
    for (int c = 0; c < NLINK; c++) begin
      chan_cfg[c].buf_base    = 64'h1_0000_0000 + (64'(c) << 24);
      chan_cfg[c].buf_size    = 32'd65536;
      chan_cfg[c].rep_base    = 64'h2_0000_0000 + (64'(c) << 24);
      chan_cfg[c].rep_entries = 16'd4096;
      rate_milli[c] = 0; credit[c] = 0;
    end
    out_discard = '0;
    gain_we = 0; gain_chan = 0; gain_addr = 0; gain_data = 0;
    link_valid = '0; link_data = '0; link_last = '0;
    hin_valid = '0; hin_data = '0; hin_last = '0; daq_ready = '1;
    mem_req_ready = '0; mem_resp_valid = '0; mem_resp_data = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int c = 0; c < NCF; c++)
      for (int r = 0; r < 8; r++)
        for (int p = 0; p < 64; p++) begin
          @(negedge clk);
          gain_we = 1; gain_chan = 8'(c); gain_addr = {8'(r), 8'(p)}; gain_data = 13'd4096;
        end
    @(negedge clk) gain_we = 0;

    run("A TPC 6x3.125G finder", 6,  1, 250, 6, 16);
    run("B 12x2.125G raw",       12, 0, 170, 6, 16);
    run("C TRD 6x4.0G raw",      6,  0, 320, 6, 16);
    run("D 12x5.3125G raw",      12, 0, 425, 6, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
