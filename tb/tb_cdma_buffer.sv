// tb_cdma_buffer: checks in-order reassembly of out-of-order line responses.
//
// A small buffer (SLOTS = 6) is used so that it fills. Slots are allocated at
// random times; for each allocated slot a random compressed line (mask, nnz,
// 1..4 flits) is written back after a random delay, so completions arrive out
// of order and flits of different lines interleave. The drain side, stalled at
// random, must deliver the lines in allocation order, each as its stream words
// (mask, then payload; raw: payload only) cut into items of min(8, words
// left), with o_line_end on the last item. alloc_ready must fall when all
// slots are taken and used must track the occupancy.
module tb_cdma_buffer;
  import cdma_pkg::*;

  localparam int SLOTS = 6;

  logic clk = 0, rst_n = 1;
  always #5 clk = ~clk;

  logic    alloc_ready, alloc = 0, w_valid = 0, raw_mode = 0, o_valid, o_ready = 0, o_line_end;
  tag_t    alloc_tag;
  xrsp_t   w = '0;
  sector_t o_words;
  cnt8_t   o_cnt;
  logic [$clog2(SLOTS+1)-1:0] used;

  cdma_buffer #(.SLOTS(SLOTS)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  typedef struct { mask_t m; int n; word_t pl[$]; } cl_t;
  cl_t    lines[$];          // allocated, in order (expected drain order)
  xrsp_t  pend[$];           // flits waiting to be written
  int     full_seen = 0, lines_out = 0;

  function automatic cl_t rand_line(bit raw);
    cl_t c;
    int d;
    d = ($urandom() % 6 == 0) ? 0 : int'($urandom() % 101);
    c.m = '0; c.n = 0;
    for (int k = 0; k < 32; k++) begin
      int unsigned r, v;
      r = $urandom() % 100;
      v = $urandom();
      if (raw || r < d) begin c.m[k] = 1; c.n++; c.pl.push_back(v); end
    end
    return c;
  endfunction

  // Expected drain items, built as lines are allocated.
  typedef struct { int cnt; sector_t d; bit line_end; } item_t;
  item_t exp_items[$];

  always @(negedge clk) o_ready = ($urandom() % 3 != 0);

  always @(posedge clk) if (rst_n && o_valid && o_ready) begin
    item_t e;
    if (exp_items.size() == 0) check(0, "unexpected item");
    else begin
      e = exp_items.pop_front();
      check(int'(o_cnt) == e.cnt && o_line_end == e.line_end, $sformatf("item cnt %0d/%0d end %0d/%0d", o_cnt, e.cnt, o_line_end, e.line_end));
      for (int k = 0; k < e.cnt; k++) check(o_words[k] == e.d[k], $sformatf("item word %0d", k));
      if (o_line_end) lines_out++;
    end
  end

  task automatic run(int nlines, bit raw);
    int issued = 0;
    raw_mode = raw;
    exp_items = {};
    lines_out = 0;
    while (lines_out < nlines) begin
      // allocate
      alloc = 0;
      if (issued < nlines && $urandom() % 2 == 0) begin
        if (!alloc_ready) full_seen++;
        else begin
          cl_t c;
          int nf;
          c = rand_line(raw);
          alloc = 1;
          nf = (c.n + 7) / 8;
          if (nf == 0) nf = 1;
          for (int f = 0; f < nf; f++) begin
            xrsp_t x;
            x = '0; x.tag = alloc_tag; x.mask = c.m; x.nnz = nnz_t'(c.n); x.idx = 2'(f);
            x.last = (f == nf - 1);
            for (int k = 0; k < 8; k++) if (f * 8 + k < c.n) x.data[k] = c.pl[f * 8 + k];
            pend.insert($urandom() % (pend.size() + 1), x);
          end
          begin
            word_t sw[$];        // stream words of the line: mask (not raw), payload
            sw = raw ? c.pl : {c.m, c.pl};
            for (int k = 0; k < sw.size(); k += 8) begin
              item_t it;
              it.d = '0;
              it.cnt = (sw.size() - k > 8) ? 8 : sw.size() - k;
              for (int j = 0; j < it.cnt; j++) it.d[j] = sw[k + j];
              it.line_end = (k + 8 >= sw.size());
              exp_items.push_back(it);
            end
          end
          issued++;
        end
      end
      // write a flit, keeping the last flit of each line after its others
      w_valid = 0;
      if (pend.size() != 0 && $urandom() % 3 != 0) begin
        int k;
        k = 0;
        while (pend[k].last && k + 1 < pend.size() && pend[k+1].tag == pend[k].tag) k++;
        w = pend[k];
        // a line's last flit must follow its other flits
        for (int j = 0; j < pend.size(); j++)
          if (w.last && j != k && pend[j].tag == w.tag) begin w = pend[j]; k = j; break; end
        pend.delete(k);
        w_valid = 1;
      end
      @(negedge clk);
      check(int'(used) <= SLOTS, "used above SLOTS");
    end
    alloc = 0; w_valid = 0;
    check(exp_items.size() == 0, "items missing");
  endtask

  initial begin
    #1 rst_n = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    run(300, 0);
    run(100, 1);
    repeat (5) @(negedge clk);
    check(used == '0 && alloc_ready, "buffer not empty at the end");
    check(full_seen > 0, "buffer never filled");
    $display("buffer full %0d times", full_seen);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
