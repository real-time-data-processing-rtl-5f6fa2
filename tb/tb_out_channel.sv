// tb_out_channel: test of one output channel with its discard mode.
//
// Random events are sent while the discard setting is toggled at random
// moments, also in the middle of events. For every event the testbench
// notes the setting at its first word; those events, and only those, must
// be missing at the link, whole, and the others must arrive word for word
// with their end-of-event flag. The link applies random back-pressure, and
// the event counters must match.
module tb_out_channel;
  import hlt_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic cfg_discard, in_valid, in_ready, in_last, link_valid, link_ready, link_last;
  logic [31:0] in_data, link_data, events_sent, events_discarded;
  int checks = 0, failures = 0;

  out_channel dut (.*);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  logic [32:0] expq[$];
  int n_disc = 0, n_sent = 0, mid_toggles = 0;
  bit in_ev = 0;

  always @(negedge clk) link_ready <= ($urandom % 3) != 0;
  always @(posedge clk) if (rst_n) begin
    if (link_valid && link_ready) begin
      check(expq.size() > 0, "unexpected link word");
      if (expq.size() > 0) begin
        logic [32:0] e;
        e = expq.pop_front();
        check({link_last, link_data} == e, $sformatf("link word %h exp %h", {link_last, link_data}, e));
      end
    end
  end

  initial begin
    in_valid = 0; in_data = 0; in_last = 0; cfg_discard = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int e = 0; e < 200; e++) begin
      int n;
      bit disc;
      n = 1 + $urandom % 12;
      for (int k = 0; k < n; k++) begin
        @(negedge clk);
        if (($urandom % 8) == 0) begin
          cfg_discard = !cfg_discard;
          if (k != 0) mid_toggles++;
        end
        if (k == 0) disc = cfg_discard;
        in_valid = 1; in_data = $urandom; in_last = (k == n - 1);
        if (!disc) expq.push_back({in_last, in_data});
        @(posedge clk);
        while (!in_ready) @(posedge clk);
      end
      if (disc) n_disc++; else n_sent++;
      @(negedge clk) in_valid = 0;
    end
    for (int k = 0; k < 1000 && expq.size() != 0; k++) @(posedge clk);
    check(expq.size() == 0, "all kept events reached the link");
    check(events_sent == 32'(n_sent), $sformatf("sent counter %0d exp %0d", events_sent, n_sent));
    check(events_discarded == 32'(n_disc), $sformatf("discard counter %0d exp %0d", events_discarded, n_disc));
    check(n_disc > 10 && n_sent > 10 && mid_toggles > 5, "both modes and mid-event switches exercised");
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
