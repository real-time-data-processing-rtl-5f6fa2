// tb_hwcf: end-to-end test of one cluster finder instance.
//
// Random, non-touching charge blobs on several pad rows are sent as raw link
// events. Every blob must come out as exactly one cluster whose charge, peak,
// centre of gravity and width equal the values computed from the blob's
// charges (tb_hlt_pkg::expect_cluster); each event must end with a trailer
// word holding its cluster count. The first events run with the output
// always ready and check that the input keeps up with the link (at most
// 1.25 cycles per raw word); later ones add random output back-pressure.
// One event also carries a second blob on the same pads, later in time,
// and one event is empty.
module tb_hwcf;
  import hlt_pkg::*;
  import tb_hlt_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid, in_ready, in_last, out_valid, out_ready, out_last;
  logic [31:0] in_data, out_data;
  logic gain_we;
  logic [15:0] gain_addr;
  logic [12:0] gain_data;
  logic [15:0] overflow_cnt;
  logic [31:0] cluster_cnt;
  int checks = 0, failures = 0;
  int bp_pct = 0;

  hwcf dut (.*);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // ---- output collector
  logic [31:0] owords[$];
  logic [31:0] trailers[$];
  cluster_t    got[$];
  always @(posedge clk) begin
    if (out_valid && out_ready) begin
      if (out_last) trailers.push_back(out_data);
      else begin
        owords.push_back(out_data);
        if (owords.size() == CLUSTER_WORDS) begin
          logic [127:0] b;
          b = {owords[0], owords[1], owords[2], owords[3]};
          got.push_back(cluster_t'(b[$bits(cluster_t)-1:0]));
          owords.delete();
        end
      end
    end
  end
  always @(negedge clk) out_ready <= ($urandom % 100) >= bp_pct;

  task automatic send_event(blob_t blobs[$], output int cycles, output int nwords);
    logic [32:0] w[$];
    make_event(blobs, w);
    nwords = w.size();
    cycles = 0;
    foreach (w[i]) begin
      @(negedge clk);
      in_valid = 1; in_data = w[i][31:0]; in_last = w[i][32];
      @(posedge clk);
      cycles++;
      while (!in_ready) begin @(posedge clk); cycles++; end
    end
    @(negedge clk);
    in_valid = 0;
  endtask

  task automatic run_event(blob_t blobs[$], bit timed);
    int cyc, nw, ntr;
    cluster_t exp[$];
    foreach (blobs[i]) exp.push_back(expect_cluster(blobs[i]));
    got.delete();
    ntr = trailers.size();
    send_event(blobs, cyc, nw);
    for (int k = 0; k < 5000 && trailers.size() != ntr + 1; k++) @(posedge clk);
    check(trailers.size() == ntr + 1, "event trailer received");
    if (trailers.size() == ntr + 1) begin
      check(trailers[ntr][31:28] == TRAILER_TAG, "trailer tag");
      check(trailers[ntr][15:0] == 16'(exp.size()), $sformatf("trailer count %0d exp %0d", trailers[ntr][15:0], exp.size()));
    end
    check(got.size() == exp.size(), $sformatf("cluster count %0d exp %0d", got.size(), exp.size()));
    foreach (exp[i]) begin
      int hit = -1;
      foreach (got[j]) if (got[j] == exp[i]) hit = j;
      check(hit >= 0, $sformatf("cluster row %0d pad %0d t %0d q %0d found", exp[i].row, exp[i].pad, exp[i].t, exp[i].q));
      if (hit >= 0) got.delete(hit);
    end
    if (timed) check(cyc * 4 <= nw * 5 + 64, $sformatf("input rate: %0d cycles for %0d words", cyc, nw));
  endtask

  initial begin
    blob_t b[$];
    in_valid = 0; in_data = 0; in_last = 0;
    gain_we = 0; gain_addr = 0; gain_data = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // unit gain on rows 0..7, pads 0..63
    for (int r = 0; r < 8; r++)
      for (int p = 0; p < 64; p++) begin
        @(negedge clk);
        gain_we = 1; gain_addr = {8'(r), 8'(p)}; gain_data = 13'd4096;
      end
    @(negedge clk) gain_we = 0;

    // a single blob
    b = '{'{row: 2, pad0: 10, t0: 20, amp: 20}};
    run_event(b, 1);
    // two blobs on the same pads, apart in time, plus one in another row
    b = '{'{row: 3, pad0: 7, t0: 30, amp: 11}, '{row: 3, pad0: 7, t0: 60, amp: 40},
          '{row: 5, pad0: 30, t0: 100, amp: 9}};
    run_event(b, 1);
    // empty event
    b.delete();
    run_event(b, 0);
    // random events, no back-pressure
    for (int e = 0; e < 6; e++) begin
      random_blobs(12, 6, b);
      run_event(b, 1);
    end
    // random events with back-pressure
    bp_pct = 40;
    for (int e = 0; e < 6; e++) begin
      random_blobs(12, 6, b);
      run_event(b, 0);
    end
    check(cluster_cnt > 100, "cluster counter advanced");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
