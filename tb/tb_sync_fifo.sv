// tb_sync_fifo: self-checking test of sync_fifo. Random pushes and pops
// against a queue model; checks order, full/empty behaviour and count.
module tb_sync_fifo;
  localparam int W = 16, D = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid, in_ready, out_valid, out_ready;
  logic [W-1:0] in_data, out_data;
  logic [$clog2(D):0] count;
  int checks = 0, failures = 0;
  logic [W-1:0] model[$];
  int full_seen = 0;

  sync_fifo #(.WIDTH(W), .DEPTH(D)) dut (.*);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    in_valid = 0; out_ready = 0; in_data = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    check(!out_valid && count == 0, "empty after reset");
    for (int i = 0; i < 2000; i++) begin
      @(negedge clk);
      // bias towards filling in the first half, draining in the second
      in_valid  = ($urandom % 4) < (i < 1000 ? 3 : 1);
      out_ready = ($urandom % 4) < (i < 1000 ? 1 : 3);
      in_data   = W'($urandom);
      #1;
      check(count == model.size(), "count matches model");
      check(out_valid == (model.size() != 0), "out_valid matches model");
      check(in_ready == (model.size() < D || out_ready), "in_ready rule");
      if (model.size() == D) full_seen++;
      if (out_valid && out_ready) check(out_data == model[0], "data order");
      @(posedge clk);
      if (out_valid && out_ready) void'(model.pop_front());
      if (in_valid && in_ready) model.push_back(in_data);
    end
    check(full_seen > 0, "FIFO became full at least once");
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
