// tb_replay_ctrl: test of the data replay unit against a behavioural
// on-board memory with a random response latency.
//
// The memory holds three events (length word + data). Pass 1 replays them
// once with a fixed event period and checks every word, the end-of-event
// flags, that no event starts sooner than the period after the previous one,
// and that the unit stops at the end of the region. Pass 2 sets the loop
// bit and checks that the events come again in order, under random output
// back-pressure.
module tb_replay_ctrl;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic cfg_enable, cfg_loop;
  logic [31:0] cfg_start, cfg_end, cfg_period;
  logic mem_req_valid, mem_req_ready, mem_resp_valid;
  logic [31:0] mem_req_addr, mem_resp_data;
  logic out_valid, out_ready, out_last;
  logic [31:0] out_data, events_sent;
  logic done;
  int checks = 0, failures = 0;
  int bp = 0, cyc = 0;

  replay_ctrl dut (.*);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // ---- behavioural memory: in-order responses, 2..6 cycles latency
  logic [31:0] mem [64];
  typedef struct { logic [31:0] d; int due; } resp_t;
  resp_t rq[$];
  always @(posedge clk) cyc++;
  always @(negedge clk) mem_req_ready <= ($urandom % 4) != 0;
  always @(posedge clk) begin
    mem_resp_valid <= 1'b0;
    if (rq.size() > 0 && rq[0].due <= cyc) begin
      mem_resp_valid <= 1'b1;
      mem_resp_data  <= rq[0].d;
      void'(rq.pop_front());
    end
    if (mem_req_valid && mem_req_ready) rq.push_back('{mem[mem_req_addr[5:0]], cyc + 2 + $urandom % 5});
  end
  always @(negedge clk) out_ready <= bp ? (($urandom % 2) != 0) : 1'b1;

  // ---- expected stream
  logic [32:0] exp[$];
  int starts[$];
  bit in_ev = 0;
  always @(posedge clk) if (out_valid && out_ready) begin
    logic [32:0] e;
    if (!in_ev) starts.push_back(cyc);
    in_ev = !out_last;
    e = exp.pop_front();
    check({out_last, out_data} == e, $sformatf("word %h last %0d exp %h", out_data, out_last, e));
  end

  initial begin
    int lens[3] = '{3, 1, 5};
    int a = 4;
    logic [32:0] evs[$];
    for (int i = 0; i < 64; i++) mem[i] = 32'hDEAD0000 + i;
    // events at words 4 .. 4+3+1+1+1+5+1
    foreach (lens[e]) begin
      mem[a++] = lens[e];
      for (int k = 0; k < lens[e]; k++) begin
        mem[a] = {8'(e), 8'(k), 16'hA5A5};
        evs.push_back({k == lens[e] - 1, mem[a]});
        a++;
      end
    end
    cfg_enable = 0; cfg_loop = 0; cfg_start = 4; cfg_end = a; cfg_period = 40;
    mem_resp_valid = 0; mem_resp_data = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    foreach (evs[i]) exp.push_back(evs[i]);
    cfg_enable = 1;
    repeat (400) @(posedge clk);
    check(exp.size() == 0, "pass 1 complete");
    check(events_sent == 3, "three events");
    check(done, "stopped at end of region");
    check(starts.size() == 3, "three starts");
    for (int i = 1; i < starts.size(); i++)
      check(starts[i] - starts[i-1] >= 40, $sformatf("event period %0d", starts[i] - starts[i-1]));
    // pass 2: loop
    @(negedge clk) cfg_enable = 0;
    repeat (5) @(posedge clk);
    for (int r = 0; r < 3; r++) foreach (evs[i]) exp.push_back(evs[i]);
    bp = 1; cfg_loop = 1; cfg_period = 0;
    @(negedge clk) cfg_enable = 1;
    while (exp.size() > 0) @(posedge clk);
    @(negedge clk) cfg_enable = 0;
    check(events_sent >= 12, "looped events");
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
