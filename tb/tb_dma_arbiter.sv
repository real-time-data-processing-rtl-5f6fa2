// tb_dma_arbiter: test of the round-robin host write arbiter.
//
// Four requesters (N overridden to 4 to keep the case analysis small) each
// send a fixed number of writes tagged with their port number and sequence
// number, raising and dropping their requests at random. The host port
// accepts at random. Checks: every write arrives exactly once, in order per
// port, with address and data from the granted port; a port that keeps its
// request up waits at most N-1 other grants (round-robin fairness); and
// while all ports request, the grants rotate strictly 0,1,2,3,0,...
module tb_dma_arbiter;
  import hlt_pkg::*;
  localparam int N = 4;
  localparam int NW = 200;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [N-1:0] req_valid, req_ready;
  logic [N-1:0][ADDR_W-1:0] req_addr;
  logic [N-1:0][HOST_W-1:0] req_data;
  logic wr_valid, wr_ready;
  logic [ADDR_W-1:0] wr_addr;
  logic [HOST_W-1:0] wr_data;
  int checks = 0, failures = 0;

  dma_arbiter #(.N(N)) dut (.*);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  int sent [N];        // writes handed over per port
  int rcvd [N];        // writes seen at the host per port
  int waitg [N];       // grants to others while this port waited
  int burst_mode = 0;  // 1: all ports request continuously
  int last_port = -1;
  int rotations = 0;

  // requesters: hold valid until accepted, then maybe drop for a while
  always @(negedge clk) begin
    for (int p = 0; p < N; p++) begin
      req_addr[p] = {32'(p), 32'(sent[p])};
      req_data[p] = {96'(p), 32'(sent[p])};
      if (sent[p] >= NW) req_valid[p] = 1'b0;
      else if (burst_mode != 0) req_valid[p] = 1'b1;
      else if (!req_valid[p]) req_valid[p] = ($urandom % 3) == 0;
    end
    wr_ready = (burst_mode != 0) ? 1'b1 : (($urandom % 4) != 0);
  end

  always @(posedge clk) if (rst_n) begin
    if (wr_valid && wr_ready) begin
      int p;
      p = int'(wr_addr[63:32]);
      check(p < N && req_ready[p] && req_valid[p], "granted port is requesting and sees ready");
      check($countones(req_ready) == 1, "exactly one ready");
      if (p < N) begin
        check(wr_addr[31:0] == 32'(rcvd[p]) && wr_data == {96'(p), 32'(rcvd[p])},
              $sformatf("port %0d write %0d in order", p, rcvd[p]));
        rcvd[p]++;
        sent[p]++;
        waitg[p] = 0;
        for (int o = 0; o < N; o++)
          if (o != p && req_valid[o]) begin
            waitg[o]++;
            check(waitg[o] <= N - 1, $sformatf("port %0d waited %0d grants", o, waitg[o]));
          end
        if (burst_mode != 0 && last_port >= 0 && req_valid == '1) begin
          check(p == (last_port + 1) % N, $sformatf("rotation %0d -> %0d", last_port, p));
          rotations++;
        end
        last_port = p;
      end
    end else begin
      check(req_ready == '0, "no ready without a transfer");
    end
  end

  initial begin
    req_valid = '0;
    for (int p = 0; p < N; p++) begin sent[p] = 0; rcvd[p] = 0; waitg[p] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int k = 0; k < 20000 && (sent[0] < NW/2 || sent[1] < NW/2 || sent[2] < NW/2 || sent[3] < NW/2); k++)
      @(posedge clk);
    @(negedge clk);
    burst_mode = 1;
    for (int k = 0; k < 20000 && (sent[0] < NW || sent[1] < NW || sent[2] < NW || sent[3] < NW); k++)
      @(posedge clk);
    for (int p = 0; p < N; p++) check(rcvd[p] == NW, $sformatf("port %0d got %0d writes", p, rcvd[p]));
    check(rotations > 100, "strict rotation observed under full load");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
