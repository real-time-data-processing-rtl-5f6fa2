// tb_hwcf_cog: test of the centre-of-gravity unit.
//
// Random clusters (a few charge deposits at random pad/time positions) are
// turned into moments; the testbench computes mean and width in the same
// fixed-point format with 64-bit integer division. The first clusters go in
// back to back with the output always ready: the latency must be 35 cycles
// (input taken to output taken, the result sits on the output after 34)
// and one cluster must leave per cycle. Later ones see random back-pressure.
// An end-of-event token must pass through with out_eoe set.
module tb_hwcf_cog;
  import hlt_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid, in_ready, out_valid, out_ready, out_eoe;
  moments_t in_tok;
  cluster_t out_cl;
  int checks = 0, failures = 0;
  int cyc = 0;
  int bp = 0;

  hwcf_cog dut (.*);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  typedef struct { cluster_t c; bit eoe; int t_in; } exp_t;
  exp_t exp[$];
  int first_out = -1, last_out = 0, n_out = 0;

  always @(posedge clk) cyc++;
  always @(negedge clk) out_ready <= bp ? (($urandom % 3) != 0) : 1'b1;
  always @(posedge clk) if (out_valid && out_ready) begin
    exp_t e;
    e = exp.pop_front();
    check(out_eoe == e.eoe, "eoe flag");
    if (!e.eoe) check(out_cl == e.c, $sformatf("cluster pad %0d/%0d t %0d/%0d s2p %0d/%0d s2t %0d/%0d",
                        out_cl.pad, e.c.pad, out_cl.t, e.c.t, out_cl.sig2_pad, e.c.sig2_pad, out_cl.sig2_t, e.c.sig2_t));
    if (first_out < 0) begin
      first_out = cyc;
      check(cyc - e.t_in == 35, $sformatf("latency %0d", cyc - e.t_in));
    end
    n_out++;
    if (n_out == 40) last_out = cyc;
  end

  task automatic send_random(bit eoe);
    moments_t m;
    exp_t e;
    longint unsigned q = 0, qp = 0, qp2 = 0, qt = 0, qt2 = 0, mx = 0;
    longint unsigned mp, mt, m2p, m2t;
    longint signed vp, vt;
    int n = 1 + $urandom % 6;
    int p0 = $urandom % 150, t0 = $urandom % 900;
    for (int i = 0; i < n; i++) begin
      longint unsigned qq = 1 + $urandom % 2000, p = p0 + $urandom % 4, t = t0 + $urandom % 8;
      q += qq; qp += qq * p; qp2 += qq * p * p; qt += qq * t; qt2 += qq * t * t;
      if (qq > mx) mx = qq;
    end
    m = '{eoe: eoe, row: 8'($urandom), qmax: 12'(mx), q: 24'(q), qp: 40'(qp), qp2: 48'(qp2), qt: 40'(qt), qt2: 48'(qt2)};
    mp = (qp << 6) / q; mt = (qt << 6) / q; m2p = (qp2 << 12) / q; m2t = (qt2 << 12) / q;
    vp = longint'(m2p) - longint'(mp * mp); vt = longint'(m2t) - longint'(mt * mt);
    e.eoe = eoe;
    e.c = '{row: m.row, pad: 14'(mp), t: 16'(mt), sig2_pad: vp < 0 ? 20'd0 : (vp > 20'hFFFFF ? 20'hFFFFF : 20'(vp)),
            sig2_t: vt < 0 ? 20'd0 : (vt > 20'hFFFFF ? 20'hFFFFF : 20'(vt)), q: 24'(q), qmax: 12'(mx)};
    @(negedge clk);
    in_valid = 1; in_tok = m;
    @(posedge clk);
    while (!in_ready) @(posedge clk);
    e.t_in = cyc;
    exp.push_back(e);
  endtask

  initial begin
    int start;
    in_valid = 0; in_tok = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);
    // back to back: keep in_valid high
    for (int i = 0; i < 40; i++) begin
      moments_t dummy;
      send_random(0);
    end
    @(negedge clk) in_valid = 0;
    repeat (60) @(posedge clk);
    check(last_out - first_out == 39, $sformatf("one cluster per cycle: %0d cycles for 40", last_out - first_out + 1));
    check(n_out == 40, $sformatf("all 40 out, got %0d", n_out));
    bp = 1;
    for (int i = 0; i < 100; i++) send_random(i == 50);
    @(negedge clk) in_valid = 0;
    repeat (200) @(posedge clk);
    check(n_out == 140 && exp.size() == 0, "all clusters out");
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
