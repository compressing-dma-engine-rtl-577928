// tb_cdma_stream_unpacker: checks that a packed ZVC stream is split back into
// one packet per line.
//
// For each transfer random lines (some all zero, some dense) are turned into
// the packed stream independently here (mask word, then the non-zero words;
// raw: the 32 words; 8-word units, last one zero-padded) and fed with random
// gaps while the packet output is stalled at random. Every flit must carry
// the line's mask, the right index, first/last marks and the next payload
// words; done must pulse once and words must equal the stream's word count.
// Rate check: with no stalls a line costs one cycle for its mask plus one per
// flit (a raw line: 128B in 5 cycles, above the 16 GB/s of PCIe at any clock
// over 640 MHz).
module tb_cdma_stream_unpacker;
  import cdma_pkg::*;

  logic clk = 0, rst_n = 1;
  always #5 clk = ~clk;

  logic    start = 0, raw = 0, busy, done;
  logic [NLINES_W-1:0] nlines = '0;
  logic    i_valid = 0, i_ready, o_valid, o_ready = 0, o_first, o_last;
  sector_t i_data = '0, o_data;
  mask_t   o_mask;
  logic [1:0] o_idx;
  logic [BYTES_W-1:0] words;

  cdma_stream_unpacker dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  int  cyc = 0, ndone = 0, nflits = 0, first_t = -1, last_t = -1;
  bit  stall = 1;
  always @(posedge clk) cyc <= cyc + 1;
  always @(posedge clk) if (done) ndone++;
  always @(negedge clk) o_ready = stall ? ($urandom() % 3 != 0) : 1'b1;

  // expected flits
  typedef struct { mask_t m; logic [1:0] idx; logic first, last; sector_t d; } flit_t;
  flit_t exp_q[$];

  always @(posedge clk) if (o_valid && o_ready) begin
    flit_t e;
    nflits++;
    if (first_t < 0) first_t = cyc;
    last_t = cyc;
    if (exp_q.size() == 0) check(0, "unexpected flit");
    else begin
      e = exp_q.pop_front();
      check(o_mask == e.m && o_idx == e.idx && o_first == e.first && o_last == e.last && o_data == e.d,
            $sformatf("flit idx %0d: mask %h/%h data %h/%h", o_idx, o_mask, e.m, o_data, e.d));
    end
  end

  task automatic transfer(int nl, bit r, bit gaps);
    word_t ws[$];
    int nwords;
    for (int i = 0; i < nl; i++) begin
      line_t l;
      mask_t m;
      word_t pl[$];
      int d;
      d = (i % 5 == 0) ? 0 : (i % 7 == 1) ? 100 : int'($urandom() % 100);
      for (int w = 0; w < 32; w++) begin
        int unsigned r, v;   // separate statements: each call draws anew
        r = $urandom() % 100;
        v = $urandom();
        l[w] = (r < d) ? (v | 1) : '0;
      end
      m = '0;
      for (int w = 0; w < 32; w++) if (r || l[w] != '0) begin m[w] = 1; pl.push_back(l[w]); end
      if (!r) ws.push_back(m);
      foreach (pl[k]) ws.push_back(pl[k]);
      for (int f = 0; f == 0 || f * 8 < pl.size(); f++) begin
        flit_t e;
        e.m = m; e.idx = 2'(f); e.first = (f == 0); e.last = ((f + 1) * 8 >= pl.size());
        e.d = '0;
        for (int w = 0; w < 8; w++) if (f * 8 + w < pl.size()) e.d[w] = pl[f * 8 + w];
        exp_q.push_back(e);
      end
    end
    nwords = ws.size();
    while (ws.size() % 8 != 0) ws.push_back('0);
    ndone = 0;
    start = 1; nlines = NLINES_W'(nl); raw = r;
    @(negedge clk);
    start = 0;
    for (int k = 0; k < ws.size(); k += 8) begin
      while (gaps && $urandom() % 4 == 0) begin i_valid = 0; @(negedge clk); end
      i_valid = 1;
      for (int w = 0; w < 8; w++) i_data[w] = ws[k + w];
      #1;
      while (!i_ready) begin @(negedge clk); #1; end
      @(negedge clk);
    end
    i_valid = 0;
    while (busy) @(negedge clk);
    @(negedge clk);
    check(ndone == 1, $sformatf("done pulsed %0d times", ndone));
    check(exp_q.size() == 0, $sformatf("%0d flits missing", exp_q.size()));
    check(int'(words) == nwords, $sformatf("words %0d, expected %0d", words, nwords));
    exp_q = {};
  endtask

  initial begin
    #1 rst_n = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int t = 0; t < 40; t++) transfer(1 + int'($urandom() % 30), t % 4 == 3, 1);
    stall = 0;
    @(negedge clk);
    nflits = 0; first_t = -1;
    transfer(16, 1, 0);
    check(nflits == 64, $sformatf("%0d flits, expected 64", nflits));
    // one cycle to take each line's mask, then one per flit: 64 flits and 15 masks
    check(last_t - first_t + 1 == 79, $sformatf("64 raw flits took %0d cycles", last_t - first_t + 1));
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
