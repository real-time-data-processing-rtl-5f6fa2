// tb_crorc_top: end-to-end test of the complete C-RORC firmware at its
// default size (12 input channels, 6 cluster finders, 4 output channels).
//
// Several channels run at once, each with its own traffic, and all share
// the host write port, which accepts at random. A host model keeps every
// write; per channel a software consumer waits for each event's report,
// reads the event out of the ring buffer and then frees the space, some of
// them slowly. Traffic per channel:
//   ch0  link -> cluster finder; between events the finder is switched off
//        for one event and on again (mode switch, bypass of the finder)
//   ch1  link -> cluster finder, one event overflowing the merger
//   ch2  link, finder switched off (raw data through a finder channel)
//   ch3  replay from on-board memory -> cluster finder
//   ch6  link, pass-through channel, small ring and slow consumer, so the
//        DMA channel stalls and back-pressure reaches the link
//   ch7  replay -> pass-through, with a replay event period
//   ch11 link, pass-through
//   out0 host -> DAQ with the discard mode toggled per event
//   out1 host -> DAQ with random link back-pressure
// Cluster events are checked against clusters computed from the injected
// charge blobs (set comparison plus trailer count), raw events word for
// word. Each mechanism is counted and must occur at least once: cluster
// finding, finder bypass, finder mode switch, pass-through, replay, merger
// overflow, DMA stall, link back-pressure, arbitration between channels,
// discard and send at the output.
module tb_crorc_top;
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

  // ---- mechanism counters
  int n_cf_events = 0, n_bypass = 0, n_switch = 0, n_pass = 0, n_replay = 0;
  int n_bp_cycles = 0, n_arb = 0, n_send = 0, n_discard = 0;

  // ---- host memory model and host write port
  logic [127:0] host [logic [63:0]];
  always @(negedge clk) wr_ready <= ($urandom % 5) != 0;
  always @(posedge clk) if (rst_n) begin
    if (wr_valid && wr_ready) host[wr_addr] = wr_data;
    if ($countones(dut.d_valid) > 1) n_arb++;
    if ((link_valid & ~link_ready) != '0) n_bp_cycles++;
  end

  function automatic logic [63:0] buf_base(int c); return 64'h1_0000_0000 + (64'(c) << 24); endfunction
  function automatic logic [63:0] rep_base(int c); return 64'h2_0000_0000 + (64'(c) << 24); endfunction

  // ---- software consumer: returns the words of the next event of channel c
  int ev_idx [NLINK];
  task automatic consume(int c, int pause, ref logic [31:0] words[$]);
    logic [63:0] ra;
    logic [127:0] rep, beat;
    logic [31:0] start, len;
    ra = rep_base(c) + 64'((ev_idx[c] % int'(chan_cfg[c].rep_entries)) * 16);
    words.delete();
    for (int k = 0; k < 200000; k++) begin
      if (host.exists(ra)) if (host[ra][127:96] == 32'h1 && host[ra][95:64] == 32'(ev_idx[c])) break;
      @(posedge clk);
    end
    check(host.exists(ra), $sformatf("ch%0d report %0d present", c, ev_idx[c]));
    if (!host.exists(ra)) return;
    rep = host[ra];
    check(rep[127:96] == 32'h1 && rep[95:64] == 32'(ev_idx[c]), $sformatf("ch%0d report %0d header", c, ev_idx[c]));
    start = rep[63:32];
    len   = rep[31:0];
    check(start == chan_cfg[c].sw_rdptr, $sformatf("ch%0d event %0d starts at read pointer", c, ev_idx[c]));
    for (int b = 0; b < int'(len) / 16; b++) begin
      beat = host[buf_base(c) + 64'((start + 32'(b * 16)) & (chan_cfg[c].buf_size - 1))];
      for (int w = 0; w < 4; w++) words.push_back(beat[w*32 +: 32]);
    end
    ev_idx[c]++;
    repeat (pause) @(posedge clk);
    @(negedge clk);
    chan_cfg[c].sw_rdptr = start + len;
  endtask

  // ---- link driver
  task automatic send_link(int c, logic [32:0] w[$]);
    foreach (w[i]) begin
      @(negedge clk);
      link_valid[c] = 1; link_data[c] = w[i][31:0]; link_last[c] = w[i][32];
      @(posedge clk);
      while (!link_ready[c]) @(posedge clk);
    end
    @(negedge clk);
    link_valid[c] = 0;
  endtask

  // ---- checks of one received event
  task automatic check_raw(int c, logic [32:0] w[$], logic [31:0] got[$]);
    check(got.size() >= w.size() && got.size() < w.size() + 4 && got.size() % 4 == 0,
          $sformatf("ch%0d raw event size %0d for %0d words", c, got.size(), w.size()));
    foreach (got[i]) begin
      if (i < w.size()) check(got[i] == w[i][31:0], $sformatf("ch%0d raw word %0d", c, i));
      else check(got[i] == 0, $sformatf("ch%0d padding word %0d", c, i));
    end
  endtask

  // parses clusters + trailer; returns the number of clusters
  task automatic parse_cf(int c, logic [31:0] got[$], ref cluster_t cl[$], output bit ok);
    int i;
    ok = 0;
    cl.delete();
    i = 0;
    while (i < got.size()) begin
      if (got[i][31:28] == TRAILER_TAG) begin
        ok = (got[i][15:0] == 16'(cl.size()));
        check(ok, $sformatf("ch%0d trailer count %0d vs %0d clusters", c, got[i][15:0], cl.size()));
        for (int j = i + 1; j < got.size(); j++) check(got[j] == 0, "padding after trailer");
        return;
      end
      if (i + 4 > got.size()) break;
      cl.push_back(cluster_t'(114'({got[i], got[i+1], got[i+2], got[i+3]})));
      i += 4;
    end
    check(0, $sformatf("ch%0d cluster event without trailer", c));
  endtask

  task automatic check_cf(int c, blob_t blobs[$], logic [31:0] got[$]);
    cluster_t cl[$];
    bit ok;
    parse_cf(c, got, cl, ok);
    check(cl.size() == blobs.size(), $sformatf("ch%0d %0d clusters exp %0d", c, cl.size(), blobs.size()));
    foreach (blobs[i]) begin
      cluster_t e;
      int hit;
      e = expect_cluster(blobs[i]);
      hit = -1;
      foreach (cl[j]) if (cl[j] == e) hit = j;
      check(hit >= 0, $sformatf("ch%0d cluster row %0d pad %0d found", c, e.row, e.pad));
      if (hit >= 0) cl.delete(hit);
    end
  endtask

  function automatic void raw_words(int n, ref logic [32:0] w[$]);
    w.delete();
    for (int k = 0; k < n; k++) w.push_back({k == n - 1, 32'($urandom)});
  endfunction

  // ---- on-board memory model (replay), per channel: fixed contents,
  //      random acceptance, 1..4 cycles latency, responses in order
  logic [31:0] rmem [NLINK][$];
  typedef struct { longint due; logic [31:0] d; } resp_t;
  resp_t rq [NLINK][$];
  longint cyc = 0;
  always @(posedge clk) begin
    cyc++;
    for (int c = 0; c < NLINK; c++)
      if (mem_req_valid[c] && mem_req_ready[c]) begin
        resp_t r;
        r.due = cyc + 1 + $urandom % 4;
        if (rq[c].size() > 0 && rq[c][rq[c].size() - 1].due > r.due) r.due = rq[c][rq[c].size() - 1].due;
        r.d = (int'(mem_req_addr[c]) < rmem[c].size()) ? rmem[c][mem_req_addr[c]] : 32'd0;
        rq[c].push_back(r);
      end
  end
  always @(negedge clk) begin
    for (int c = 0; c < NLINK; c++) begin
      mem_req_ready[c] = ($urandom % 3) != 0;
      mem_resp_valid[c] = 0;
      if (rq[c].size() > 0 && rq[c][0].due <= cyc) begin
        resp_t r;
        r = rq[c].pop_front();
        mem_resp_valid[c] = 1;
        mem_resp_data[c] = r.d;
      end
    end
  end

  function automatic void load_replay(int c, logic [32:0] evs[$][$]);
    rmem[c].delete();
    foreach (evs[e]) begin
      rmem[c].push_back(32'(evs[e].size()));
      foreach (evs[e][k]) rmem[c].push_back(evs[e][k][31:0]);
    end
  endfunction

  // ---- per-channel scenarios
  bit done_ch [NLINK];

  task automatic run_ch0();
    logic [31:0] got[$];
    logic [32:0] w[$];
    blob_t b[$];
    for (int e = 0; e < 5; e++) begin
      if (e == 2 || e == 3) begin
        // mode switch between events, with the channel idle
        @(negedge clk) chan_cfg[0].cf_enable = (e == 3);
        n_switch++;
      end
      if (e == 2) begin
        raw_words(30, w);
        send_link(0, w);
        consume(0, 0, got);
        check_raw(0, w, got);
        n_bypass++;
      end else begin
        random_blobs(10, 6, b);
        make_event(b, w);
        send_link(0, w);
        consume(0, 0, got);
        check_cf(0, b, got);
        n_cf_events++;
      end
    end
    done_ch[0] = 1;
  endtask

  task automatic run_ch1();
    logic [31:0] got[$];
    logic [32:0] w[$];
    blob_t b[$];
    cluster_t cl[$];
    bit ok;
    for (int e = 0; e < 4; e++) begin
      if (e == 2) begin
        // more open clusters on one pad than the merger can hold
        b.delete();
        for (int i = 0; i < 12; i++) b.push_back('{row: 2, pad0: 20, t0: 10 + 10 * i, amp: 20});
        make_event(b, w);
        send_link(1, w);
        consume(1, $urandom % 50, got);
        parse_cf(1, got, cl, ok);
        check(cl.size() >= b.size(), "overflow event keeps its charge in clusters");
      end else begin
        random_blobs(12, 6, b);
        make_event(b, w);
        send_link(1, w);
        consume(1, $urandom % 50, got);
        check_cf(1, b, got);
        n_cf_events++;
      end
    end
    done_ch[1] = 1;
  endtask

  task automatic run_raw_link(int c, int nev, int maxw, int pause);
    logic [31:0] got[$];
    logic [32:0] w[$];
    for (int e = 0; e < nev; e++) begin
      raw_words(1 + $urandom % maxw, w);
      fork
        send_link(c, w);
        consume(c, pause, got);
      join
      check_raw(c, w, got);
      if (c < NCF) n_bypass++; else n_pass++;
    end
    done_ch[c] = 1;
  endtask

  // ch6: events are queued by the producer without waiting for the consumer
  logic [32:0] ch6_sent [$][$];
  task automatic run_ch6();
    logic [32:0] w[$];
    for (int e = 0; e < 12; e++) begin
      raw_words(20 + $urandom % 40, w);
      ch6_sent.push_back(w);
      send_link(6, w);
    end
  endtask
  task automatic drain_ch6();
    logic [31:0] got[$];
    for (int e = 0; e < 12; e++) begin
      consume(6, 150, got);
      for (int k = 0; k < 100000 && ch6_sent.size() <= e; k++) @(posedge clk);
      check_raw(6, ch6_sent[e], got);
      n_pass++;
    end
    done_ch[6] = 1;
  endtask

  blob_t rp_blobs [2][$];
  task automatic run_ch3();
    logic [31:0] got[$];
    for (int e = 0; e < 2; e++) begin
      consume(3, 0, got);
      check_cf(3, rp_blobs[e], got);
      n_cf_events++;
    end
    check(replay_events[3] == 2 && replay_done[3], "ch3 replay finished");
    n_replay += 2;
    done_ch[3] = 1;
  endtask

  logic [32:0] rp7 [$][$];
  task automatic run_ch7();
    logic [31:0] got[$];
    for (int e = 0; e < 3; e++) begin
      consume(7, 0, got);
      check_raw(7, rp7[e], got);
      n_pass++;
    end
    check(replay_events[7] == 3, "ch7 replayed 3 events");
    n_replay += 3;
    done_ch[7] = 1;
  endtask

  // ch7 event period: time between the first words of consecutive replayed
  // events. The period runs from event start to event start inside the
  // replay unit; the first word can lag its event start by the memory
  // latency, so a few cycles of jitter are allowed.
  longint ch7_starts [$];
  bit ch7_in_ev = 0;
  always @(posedge clk) if (rst_n && dut.g_chan[7].r_valid && dut.g_chan[7].r_ready) begin
    if (!ch7_in_ev) ch7_starts.push_back(cyc);
    ch7_in_ev = !dut.g_chan[7].r_last;
  end

  // ---- output channels
  task automatic run_out(int o, int nev, bit toggle);
    logic [32:0] w[$];
    for (int e = 0; e < nev; e++) begin
      raw_words(1 + $urandom % 16, w);
      @(negedge clk);
      out_discard[o] = toggle ? e[0] : 1'b0;
      if (out_discard[o]) n_discard++;
      else begin
        foreach (w[i]) daq_exp[o].push_back(w[i]);
        n_send++;
      end
      foreach (w[i]) begin
        if (i > 0) @(negedge clk);
        hin_valid[o] = 1; hin_data[o] = w[i][31:0]; hin_last[o] = w[i][32];
        @(posedge clk);
        while (!hin_ready[o]) @(posedge clk);
      end
      @(negedge clk) hin_valid[o] = 0;
    end
  endtask
  logic [32:0] daq_exp [NOUT][$];
  always @(negedge clk) daq_ready <= {2'b11, 1'($urandom % 2), 1'b1};
  always @(posedge clk) if (rst_n)
    for (int o = 0; o < NOUT; o++)
      if (daq_valid[o] && daq_ready[o]) begin
        check(daq_exp[o].size() > 0, $sformatf("out%0d unexpected word", o));
        if (daq_exp[o].size() > 0) begin
          logic [32:0] e;
          e = daq_exp[o].pop_front();
          check({daq_last[o], daq_data[o]} == e, $sformatf("out%0d word", o));
        end
      end

  initial begin
    logic [32:0] evs [$][$];
    logic [32:0] w[$];
    chan_cfg = '0;
    for (int c = 0; c < NLINK; c++) begin
      chan_cfg[c].buf_base    = buf_base(c);
      chan_cfg[c].buf_size    = (c == 6) ? 32'd256 : 32'd4096;
      chan_cfg[c].rep_base    = rep_base(c);
      chan_cfg[c].rep_entries = 16'd256;
      chan_cfg[c].cf_enable   = (c < NCF) && c != 2;
      ev_idx[c] = 0;
      done_ch[c] = 0;
    end
    out_discard = '0;
    gain_we = 0; gain_chan = 0; gain_addr = 0; gain_data = 0;
    link_valid = '0; link_data = '0; link_last = '0;
    hin_valid = '0; hin_data = '0; hin_last = '0;
    mem_resp_valid = '0; mem_resp_data = '0; mem_req_ready = '0;

    // replay recordings
    for (int e = 0; e < 2; e++) begin
      random_blobs(8, 6, rp_blobs[e]);
      make_event(rp_blobs[e], w);
      evs.push_back(w);
    end
    load_replay(3, evs);
    chan_cfg[3].src_replay = 1; chan_cfg[3].replay_start = 0; chan_cfg[3].replay_end = 32'(rmem[3].size());
    evs.delete();
    for (int e = 0; e < 3; e++) begin raw_words(5 + $urandom % 30, w); evs.push_back(w); rp7.push_back(w); end
    load_replay(7, evs);
    chan_cfg[7].src_replay = 1; chan_cfg[7].replay_start = 0; chan_cfg[7].replay_end = 32'(rmem[7].size());
    chan_cfg[7].replay_period = 200;

    repeat (3) @(posedge clk);
    rst_n = 1;
    // unit gain on rows 0..7, pads 0..63 of every cluster finder
    for (int c = 0; c < NCF; c++)
      for (int r = 0; r < 8; r++)
        for (int p = 0; p < 64; p++) begin
          @(negedge clk);
          gain_we = 1; gain_chan = 8'(c); gain_addr = {8'(r), 8'(p)}; gain_data = 13'd4096;
        end
    @(negedge clk) gain_we = 0;
    chan_cfg[3].replay_enable = 1;
    chan_cfg[7].replay_enable = 1;

    fork
      run_ch0();
      run_ch1();
      run_raw_link(2, 4, 60, 0);
      run_ch3();
      run_ch6();
      drain_ch6();
      run_ch7();
      run_raw_link(11, 6, 40, 10);
      run_out(0, 20, 1);
      run_out(1, 20, 0);
    join

    for (int k = 0; k < 2000 && (daq_exp[0].size() != 0 || daq_exp[1].size() != 0); k++) @(posedge clk);
    check(daq_exp[0].size() == 0 && daq_exp[1].size() == 0, "all sent output events reached DAQ");
    check(out_sent[0] == 10 && out_discarded[0] == 10 && out_sent[1] == 20, "output event counters");
    check(cf_overflows[1] > 0, "merger overflow counted");
    check(dma_stalls[6] > 0, "DMA channel 6 stalled on its full ring");
    for (int c = 0; c < NLINK; c++) check(dma_events[c] == 32'(ev_idx[c]), $sformatf("ch%0d DMA event count", c));
    check(ch7_starts.size() == 3, "ch7 replay events seen");
    for (int i = 1; i < ch7_starts.size(); i++)
      check(ch7_starts[i] - ch7_starts[i-1] >= 200 - 8, $sformatf("ch7 replay period %0d", ch7_starts[i] - ch7_starts[i-1]));

    $display("mechanisms: cluster_events=%0d bypass=%0d mode_switch=%0d pass_through=%0d replay=%0d overflow=%0d dma_stall_cycles=%0d link_backpressure_cycles=%0d arbitration_conflicts=%0d out_send=%0d out_discard=%0d",
             n_cf_events, n_bypass, n_switch, n_pass, n_replay, cf_overflows[1], dma_stalls[6], n_bp_cycles, n_arb, n_send, n_discard);
    check(n_cf_events > 0, "cluster finding happened");
    check(n_bypass > 0, "finder bypass happened");
    check(n_switch > 0, "finder mode switch happened");
    check(n_pass > 0, "pass-through happened");
    check(n_replay > 0, "replay happened");
    check(cf_overflows[1] > 0, "overflow happened");
    check(dma_stalls[6] > 0, "stall happened");
    check(n_bp_cycles > 0, "link back-pressure happened");
    check(n_arb > 0, "arbitration between channels happened");
    check(n_send > 0 && n_discard > 0, "output send and discard happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
