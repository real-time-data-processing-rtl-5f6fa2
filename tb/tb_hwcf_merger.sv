// tb_hwcf_merger: directed test of the pad-direction merger.
//
// Event 1, row 1: a cluster grows over pads 10-12 by time matching; two
// clusters end because the next pad has no match; on pad 13 the charge
// rises again after falling, so the cluster is split; a candidate with too
// little charge is dropped; a pad gap (13 -> 15) finishes all open clusters;
// the end of the event finishes the rest and sends the end-of-event token.
// Event 2 puts five candidates on one pad with room for four: the fifth
// leaves at once as its own cluster and the overflow counter counts it.
// Event 3 checks the time-match window: peaks exactly MATCH_DT bins apart on
// neighbouring pads merge, MATCH_DT+1 apart do not.
// Expected moments are summed in the testbench; random back-pressure.
module tb_hwcf_merger;
  import hlt_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid, in_ready, out_valid, out_ready;
  cand_tok_t in_tok;
  moments_t  out_tok;
  logic [15:0] overflow_cnt;
  int checks = 0, failures = 0;

  hwcf_merger #(.MAX_CAND(4), .MATCH_DT(2), .SPLIT_THR(3), .QTOT_MIN(8)) dut (.*);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  moments_t exp[$], got[$];
  always @(posedge clk) if (out_valid && out_ready) got.push_back(out_tok);
  always @(negedge clk) out_ready <= ($urandom % 3) != 0;

  function automatic cand_tok_t cand(int row, int pad, int tpk, int qmax, int q);
    cand_tok_t c;
    c = '0;
    c.ch  = '{row: 8'(row), pad: 8'(pad)};
    c.tpk = 10'(tpk); c.qmax = 12'(qmax); c.q = 24'(q);
    c.qt  = 40'(q * tpk); c.qt2 = 48'(longint'(q) * tpk * tpk);
    return c;
  endfunction

  function automatic cand_tok_t eoc(int row, int pad, bit eoe);
    cand_tok_t c;
    c = '0; c.eoc = 1; c.eoe = eoe; c.ch = '{row: 8'(row), pad: 8'(pad)};
    return c;
  endfunction

  // expected moments of a cluster made of the given candidates
  function automatic moments_t mom(cand_tok_t cs[$]);
    moments_t m;
    m = '0;
    foreach (cs[i]) begin
      m.row  = cs[i].ch.row;
      m.q   += cs[i].q;
      m.qp  += 40'(cs[i].q * cs[i].ch.pad);
      m.qp2 += 48'(cs[i].q * cs[i].ch.pad * cs[i].ch.pad);
      m.qt  += cs[i].qt;
      m.qt2 += cs[i].qt2;
      if (cs[i].qmax > m.qmax) m.qmax = cs[i].qmax;
    end
    return m;
  endfunction

  task automatic send(cand_tok_t t);
    @(negedge clk);
    in_valid = 1; in_tok = t;
    @(posedge clk);
    while (!in_ready) @(posedge clk);
    @(negedge clk) in_valid = 0;
  endtask

  initial begin
    cand_tok_t a0, a1, a2, a3, b, c, e, f;
    cand_tok_t ov[5];
    cand_tok_t g0, g1, g2;
    moments_t eoe_tok;
    eoe_tok = '0; eoe_tok.eoe = 1;
    in_valid = 0; in_tok = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    a0 = cand(1, 10, 20, 10, 30); b = cand(1, 10, 50, 6, 12);
    a1 = cand(1, 11, 21, 20, 60); c = cand(1, 11, 80, 9, 20);
    a2 = cand(1, 12, 22, 8, 25);
    a3 = cand(1, 13, 22, 15, 40); e = cand(1, 13, 100, 2, 5);
    f  = cand(1, 15, 22, 10, 30);
    send(a0); send(b); send(eoc(1, 10, 0));
    send(a1); send(c); send(eoc(1, 11, 0));
    send(a2); send(eoc(1, 12, 0));
    send(a3); send(e); send(eoc(1, 13, 0));
    send(f); send(eoc(1, 15, 1));
    exp.push_back(mom('{b}));
    exp.push_back(mom('{c}));
    exp.push_back(mom('{a0, a1, a2}));
    exp.push_back(mom('{a3}));
    exp.push_back(mom('{f}));
    exp.push_back(eoe_tok);
    // event 2: overflow
    for (int i = 0; i < 5; i++) begin
      ov[i] = cand(2, 0, 10 + 10 * i, 5, 10);
      send(ov[i]);
    end
    send(eoc(2, 0, 1));
    exp.push_back(mom('{ov[4]}));
    for (int i = 0; i < 4; i++) exp.push_back(mom('{ov[i]}));
    exp.push_back(eoe_tok);
    // event 3: peaks exactly MATCH_DT apart merge, MATCH_DT+1 apart do not
    g0 = cand(3, 5, 40, 10, 30);
    g1 = cand(3, 6, 42, 8, 20);
    g2 = cand(3, 7, 45, 5, 10);
    send(g0); send(eoc(3, 5, 0));
    send(g1); send(eoc(3, 6, 0));
    send(g2); send(eoc(3, 7, 1));
    exp.push_back(mom('{g0, g1}));
    exp.push_back(mom('{g2}));
    exp.push_back(eoe_tok);
    repeat (30) @(posedge clk);
    check(got.size() == exp.size(), $sformatf("token count %0d exp %0d", got.size(), exp.size()));
    foreach (exp[i])
      if (i < got.size()) check(got[i] == exp[i], $sformatf("token %0d: q %0d exp %0d", i, got[i].q, exp[i].q));
    check(overflow_cnt == 1, "overflow counted once");
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
