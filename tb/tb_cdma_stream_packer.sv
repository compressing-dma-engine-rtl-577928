// tb_cdma_stream_packer: checks that items of 0..8 words are packed without
// gaps into 8-word units.
//
// Random transfers of random items (counts 0..8, some of each extreme) are
// offered with random valid gaps while the output is stalled at random. The
// expected stream is the concatenation of all item words, cut into 8-word
// units with the last one zero-padded and marked o_last; the words counter
// must equal the number of item words. Rate check: with the output always
// ready and an input item of 8 words every cycle, one unit leaves per cycle (32 units in 32 consecutive cycles).
module tb_cdma_stream_packer;
  import cdma_pkg::*;

  logic clk = 0, rst_n = 1;
  always #5 clk = ~clk;

  logic    clear = 0, i_valid = 0, i_ready, i_last = 0, o_valid, o_ready = 0, o_last;
  sector_t i_words = '0, o_data;
  cnt8_t   i_cnt = '0;
  logic [BYTES_W-1:0] words;

  cdma_stream_packer dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  word_t   exp_w[$];
  sector_t got[$];
  int      got_last = 0, out_cycles = 0;
  bit      stall_out = 1;
  int      cyc = 0, first_t = -1, last_t = -1;
  always @(posedge clk) cyc <= cyc + 1;

  always @(negedge clk) o_ready = stall_out ? ($urandom() % 3 != 0) : 1'b1;
  always @(posedge clk) if (o_valid && o_ready) begin
    got.push_back(o_data); if (!stall_out) begin if (first_t < 0) first_t = cyc; last_t = cyc; end
    out_cycles++;
    if (o_last) got_last++;
  end

  task automatic transfer(int nitems, bit full_items);
    int total;
    exp_w = {}; got = {}; got_last = 0;
    clear = 1; @(negedge clk); clear = 0;
    total = 0;
    for (int k = 0; k < nitems; k++) begin
      int c;
      c = full_items ? 8 : int'($urandom() % 9);
      while (!full_items && $urandom() % 4 == 0) begin i_valid = 0; @(negedge clk); end
      i_valid = 1; i_cnt = cnt8_t'(c); i_last = (k == nitems - 1);
      for (int w = 0; w < 8; w++) i_words[w] = (w < c) ? $urandom() : '0;
      for (int w = 0; w < c; w++) exp_w.push_back(i_words[w]);
      total += c;
      #1;
      while (!i_ready) begin @(negedge clk); #1; end
      @(negedge clk);
    end
    i_valid = 0; i_last = 0;
    while (got_last == 0) @(negedge clk);
    check(int'(words) == total, $sformatf("words %0d, expected %0d", words, total));
    while (exp_w.size() % 8 != 0) exp_w.push_back('0);
    if (exp_w.size() == 0) exp_w = {'0, '0, '0, '0, '0, '0, '0, '0};
    check(got.size() == exp_w.size() / 8, $sformatf("%0d units, expected %0d", got.size(), exp_w.size() / 8));
    for (int u = 0; u < got.size() && u < exp_w.size() / 8; u++)
      for (int w = 0; w < 8; w++)
        check(got[u][w] == exp_w[u*8 + w], $sformatf("unit %0d word %0d", u, w));
  endtask

  initial begin
    int c0;
    #1 rst_n = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int t = 0; t < 60; t++) transfer(1 + int'($urandom() % 40), 0);
    // rate: 32 full items back to back with a ready output
    stall_out = 0;
    @(negedge clk);
    c0 = out_cycles;
    fork
      transfer(32, 1);
      begin
        repeat (40) @(posedge clk);
        check(out_cycles - c0 == 32, $sformatf("%0d units, expected 32", out_cycles - c0));
        check(last_t - first_t == 31, $sformatf("32 units took %0d cycles", last_t - first_t + 1));
      end
    join
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
