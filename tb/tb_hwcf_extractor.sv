// tb_hwcf_extractor: random test of sample extraction and gain calibration.
//
// Random gain factors are written for a set of pads; random events of
// channel headers and samples follow, with random input gaps and output
// back-pressure. The testbench predicts every token: one sample token per
// sample word with q = (adc * gain) >> 12, an end-of-channel token before
// each new header, and an end-of-channel token with end-of-event after the
// event's last word.
module tb_hwcf_extractor;
  import hlt_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid, in_ready, in_last, out_valid, out_ready;
  logic [31:0] in_data;
  sample_tok_t out_tok;
  logic gain_we;
  logic [15:0] gain_addr;
  logic [12:0] gain_data;
  int checks = 0, failures = 0;

  hwcf_extractor dut (.*);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  sample_tok_t exp[$], got[$];
  logic [12:0] gains [16];
  always @(posedge clk) if (out_valid && out_ready) got.push_back(out_tok);
  always @(negedge clk) out_ready <= ($urandom % 4) != 0;

  task automatic send(logic [31:0] w, logic last);
    @(negedge clk);
    while (($urandom % 5) == 0) @(negedge clk);
    in_valid = 1; in_data = w; in_last = last;
    @(posedge clk);
    while (!in_ready) @(posedge clk);
    @(negedge clk) in_valid = 0;
  endtask

  initial begin
    in_valid = 0; in_data = 0; in_last = 0; gain_we = 0; gain_addr = 0; gain_data = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // pads 0..15 of row 4
    for (int p = 0; p < 16; p++) begin
      gains[p] = 13'(2048 + ($urandom % 4096));
      @(negedge clk);
      gain_we = 1; gain_addr = {8'd4, 8'(p)}; gain_data = gains[p];
    end
    @(negedge clk) gain_we = 0;
    for (int ev = 0; ev < 20; ev++) begin
      int nch;
      chan_t ch;
      nch = 1 + $urandom % 4;
      if (ev == 3) nch = 3;
      for (int c = 0; c < nch; c++) begin
        int ns, t;
        logic last;
        chan_t prev_ch;
        ns = (ev == 3 && c == nch - 1) ? 0 : 1 + $urandom % 6;  // one empty channel
        t  = $urandom % 100;
        if (c > 0) prev_ch = exp[exp.size()-1].ch;
        ch = '{row: 8'd4, pad: 8'($urandom % 16)};
        last = (c == nch - 1) && ns == 0;
        // a header closes the previous channel; a header that ends the event also closes the event
        if (c > 0) exp.push_back('{eoc: 1, eoe: last, ch: prev_ch, t: 0, q: 0});
        send({1'b1, ch.row, ch.pad, 15'd0}, last);
        for (int s = 0; s < ns; s++) begin
          logic [9:0] adc;
          logic [22:0] prod;
          adc  = 10'($urandom);
          prod = adc * gains[ch.pad[3:0]];
          last = (c == nch - 1) && (s == ns - 1);
          send({12'd0, 10'(t + s), adc}, last);
          exp.push_back('{eoc: 0, eoe: 0, ch: ch, t: 10'(t + s), q: 12'(prod >> 12)});
          if (last) exp.push_back('{eoc: 1, eoe: 1, ch: ch, t: 0, q: 0});
        end
      end
    end
    repeat (20) @(posedge clk);
    check(got.size() == exp.size(), $sformatf("token count %0d exp %0d", got.size(), exp.size()));
    foreach (exp[i])
      if (i < got.size()) check(got[i] == exp[i], $sformatf("token %0d eoc=%0d/%0d q=%0d/%0d", i, got[i].eoc, exp[i].eoc, got[i].q, exp[i].q));
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
