// tb_hwcf_peakfinder: directed test of the time-direction peak finder.
//
// Pad 5 carries four sample runs: a plain peak; two peaks with a clear dip
// between them (must split into two candidates at the rise); a peak with a
// small wiggle on its falling edge (must stay one candidate); and a run
// whose peak is below PEAK_MIN (must be dropped). Pad 6 has no samples and
// ends the event. Expected candidates are summed in the testbench from the
// sample lists; random output back-pressure is applied.
module tb_hwcf_peakfinder;
  import hlt_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid, in_ready, out_valid, out_ready;
  sample_tok_t in_tok;
  cand_tok_t   out_tok;
  int checks = 0, failures = 0;

  hwcf_peakfinder #(.SPLIT_THR(3), .PEAK_MIN(4)) dut (.*);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  cand_tok_t exp[$], got[$];
  always @(posedge clk) if (out_valid && out_ready) got.push_back(out_tok);
  always @(negedge clk) out_ready <= ($urandom % 3) != 0;

  task automatic send(sample_tok_t t);
    @(negedge clk);
    in_valid = 1; in_tok = t;
    @(posedge clk);
    while (!in_ready) @(posedge clk);
    @(negedge clk) in_valid = 0;
  endtask

  // send a run of samples on pad p starting at t0 and return the candidate it should give
  task automatic run(int p, int t0, int qs[$], bit expect_it);
    cand_tok_t c;
    c = '0;
    c.ch = '{row: 8'd1, pad: 8'(p)};
    foreach (qs[i]) begin
      longint t = t0 + i;
      send('{eoc: 0, eoe: 0, ch: c.ch, t: 10'(t), q: 12'(qs[i])});
      c.q   += 24'(qs[i]);
      c.qt  += 40'(qs[i] * t);
      c.qt2 += 48'(qs[i] * t * t);
      if (12'(qs[i]) > c.qmax) begin c.qmax = 12'(qs[i]); c.tpk = 10'(t); end
    end
    if (expect_it) exp.push_back(c);
  endtask

  initial begin
    cand_tok_t e;
    in_valid = 0; in_tok = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run(5, 10, '{2, 8, 20, 8, 2}, 1);
    run(5, 20, '{3, 10, 25, 9, 4}, 1);     // first peak, falls to 4
    run(5, 25, '{12, 30, 11, 3}, 1);       // 12 > 4 + 3: new peak
    run(5, 40, '{5, 20, 10, 6, 8, 4, 2}, 1); // 8 is not > 6 + 3: one peak
    run(5, 60, '{2, 3}, 0);                // peak 3 < PEAK_MIN
    send('{eoc: 1, eoe: 0, ch: '{row: 8'd1, pad: 8'd5}, t: 0, q: 0});
    e = '0; e.eoc = 1; e.ch = '{row: 8'd1, pad: 8'd5}; exp.push_back(e);
    send('{eoc: 1, eoe: 1, ch: '{row: 8'd1, pad: 8'd6}, t: 0, q: 0});
    e = '0; e.eoc = 1; e.eoe = 1; e.ch = '{row: 8'd1, pad: 8'd6}; exp.push_back(e);
    repeat (20) @(posedge clk);
    check(got.size() == exp.size(), $sformatf("token count %0d exp %0d", got.size(), exp.size()));
    foreach (exp[i]) begin
      if (i < got.size()) begin
        check(got[i] == exp[i], $sformatf("token %0d", i));
        if (got[i] != exp[i]) $display("  got q=%0d tpk=%0d qmax=%0d eoc=%0d exp q=%0d tpk=%0d qmax=%0d eoc=%0d",
          got[i].q, got[i].tpk, got[i].qmax, got[i].eoc, exp[i].q, exp[i].tpk, exp[i].qmax, exp[i].eoc);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
