// tb_cdma_cunit: tests one compression unit beside a memory controller.
//
// The memory controller and DRAM are the behavioural gpu_dram_model (one
// port, 20-cycle read latency, random back-pressure). Random line reads
// (compressed and raw, on lines of every density including all-zero and
// dense) and random compressed line writes are sent as crossbar request
// flits with random gaps, while the response side stalls at random. Every
// read must come back, in request order, as flits_for(nnz) flits carrying the
// line's mask, word count, index and non-zero words; every write must be
// stored exactly and acknowledged once with its tag. At most LINE_Q lines may
// be in flight, so the compressor never overflows the unit's line queue.
// Timing: with no stalls, the first flit of a read returns 1 + LAT + 6 + 1
// cycles after the request (the 6 being the compressor's line latency).
module tb_cdma_cunit;
  import cdma_pkg::*;

  logic clk = 0, rst_n = 1;
  always #5 clk = ~clk;

  logic req_valid = 0, req_ready, rsp_valid, rsp_ready = 0;
  xreq_t req = '0;
  xrsp_t rsp;
  logic [0:0] rd_valid, rd_ready, rd_rsp_valid, wr_valid, wr_ready;
  logic [0:0][LADDR_W+1:0] rd_addr, wr_addr;
  sector_t [0:0] rd_rsp_data, wr_data;
  bit stall = 1;

  cdma_cunit dut (.clk, .rst_n, .req_valid, .req_ready, .req, .rsp_valid, .rsp_ready, .rsp,
                  .rd_valid(rd_valid[0]), .rd_ready(rd_ready[0]), .rd_addr(rd_addr[0]),
                  .rd_rsp_valid(rd_rsp_valid[0]), .rd_rsp_data(rd_rsp_data[0]),
                  .wr_valid(wr_valid[0]), .wr_ready(wr_ready[0]), .wr_addr(wr_addr[0]),
                  .wr_data(wr_data[0]));

  gpu_dram_model #(.N(1), .LAT(20)) mem (.clk, .stall_en(stall), .rd_valid, .rd_ready, .rd_addr,
    .rd_rsp_valid, .rd_rsp_data, .wr_valid, .wr_ready, .wr_addr, .wr_data);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  function automatic line_t rand_line(int i);
    line_t l;
    int d;
    d = (i % 6 == 0) ? 0 : (i % 6 == 1) ? 100 : int'($urandom() % 100);
    for (int w = 0; w < 32; w++) begin
        int unsigned r, v;   // separate statements: each call draws anew
        r = $urandom() % 100;
        v = $urandom();
        l[w] = (r < d) ? (v | 1) : '0;
      end
    return l;
  endfunction

  function automatic void poke(longint la, line_t l);
    for (int s = 0; s < 4; s++) begin
      sector_t x;
      for (int w = 0; w < 8; w++) x[w] = l[s*8 + w];
      mem.mem[la * 4 + s] = x;
    end
  endfunction

  function automatic line_t peek_line(longint la);
    line_t l;
    for (int s = 0; s < 4; s++) begin
      sector_t x;
      x = mem.peek(la * 4 + s);
      for (int w = 0; w < 8; w++) l[s*8 + w] = x[w];
    end
    return l;
  endfunction

  // expected response flits, in order
  xrsp_t exp_rd[$];
  int    acks_exp[$];
  int    acks_got = 0, n_flits = 0;
  longint first_rsp = -1;

  always @(negedge clk) rsp_ready = stall ? ($urandom() % 3 != 0) : 1'b1;

  always @(posedge clk) if (rst_n && rsp_valid && rsp_ready) begin
    if (first_rsp < 0) first_rsp = cyc;
    if (rsp.ack) begin
      int k;
      k = -1;
      foreach (acks_exp[j]) if (acks_exp[j] == int'(rsp.tag)) k = j;
      check(k >= 0 && rsp.last, $sformatf("unexpected ack tag %0d", rsp.tag));
      if (k >= 0) acks_exp.delete(k);
      acks_got++;
    end else begin
      n_flits++;
      if (exp_rd.size() == 0) check(0, "unexpected read flit");
      else begin
        xrsp_t e;
        e = exp_rd.pop_front();
        check(rsp == e, $sformatf("read flit tag %0d idx %0d: got mask %h nnz %0d last %0d, expected mask %h nnz %0d last %0d",
              e.tag, e.idx, rsp.mask, rsp.nnz, rsp.last, e.mask, e.nnz, e.last));
      end
    end
    check(int'(dut.inflight) <= dut.LINE_Q, "more than LINE_Q lines in flight");
  end

  task automatic send(xreq_t r);
    req_valid = 1; req = r;
    #1;
    while (!req_ready) begin @(negedge clk); #1; end
    @(negedge clk);
    req_valid = 0;
  endtask

  task automatic do_read(int la, bit raw, int tag);
    line_t l;
    mask_t m;
    word_t pl[$];
    int nf;
    xreq_t r;
    l = peek_line(la);
    m = '0;
    for (int w = 0; w < 32; w++) if (raw || l[w] != '0) begin m[w] = 1; pl.push_back(l[w]); end
    nf = (pl.size() == 0) ? 1 : (pl.size() + 7) / 8;
    for (int f = 0; f < nf; f++) begin
      xrsp_t e;
      e = '0; e.tag = tag_t'(tag); e.mask = m; e.nnz = nnz_t'(pl.size()); e.idx = 2'(f);
      e.last = (f == nf - 1);
      for (int w = 0; w < 8; w++) if (f * 8 + w < pl.size()) e.data[w] = pl[f * 8 + w];
      exp_rd.push_back(e);
    end
    r = '0; r.laddr = laddr_t'(la); r.raw = raw; r.tag = tag_t'(tag); r.last = 1;
    send(r);
  endtask

  line_t wlines [int];

  task automatic do_write(int la, int tag);
    line_t l;
    mask_t m;
    word_t pl[$];
    int nf;
    l = rand_line(tag);
    wlines[la] = l;
    m = '0;
    for (int w = 0; w < 32; w++) if (l[w] != '0) begin m[w] = 1; pl.push_back(l[w]); end
    nf = (pl.size() == 0) ? 1 : (pl.size() + 7) / 8;
    acks_exp.push_back(tag);
    for (int f = 0; f < nf; f++) begin
      xreq_t r;
      r = '0; r.wr = 1; r.laddr = laddr_t'(la); r.tag = tag_t'(tag); r.mask = m; r.idx = 2'(f);
      r.last = (f == nf - 1);
      for (int w = 0; w < 8; w++) if (f * 8 + w < pl.size()) r.data[w] = pl[f * 8 + w];
      while ($urandom() % 4 == 0) @(negedge clk);
      send(r);
    end
  endtask

  initial begin
    int nw;
    for (int i = 0; i < 64; i++) poke(100 + i, rand_line(i));
    #1 rst_n = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    // latency of one read with no stalls
    stall = 0;
    @(negedge clk);
    first_rsp = -1;
    begin
      longint t0;
      t0 = cyc;
      do_read(101, 0, 1);
      while (first_rsp < 0) @(negedge clk);
      // 1 cycle to issue sector 0, LAT = 20 to its data, the compressor's 6
      // cycles from sector 0 to the line, 1 cycle through the line queue
      check(first_rsp - t0 == 1 + 20 + 6 + 1, $sformatf("read latency %0d cycles", first_rsp - t0));
      repeat (10) @(negedge clk);
    end
    stall = 1;
    nw = 0;
    for (int t = 0; t < 400; t++) begin
      while ($urandom() % 3 == 0) @(negedge clk);
      if ($urandom() % 3 == 0) begin do_write(2000 + nw, 300 + nw); nw++; end
      else do_read(100 + int'($urandom() % 64), $urandom() % 5 == 0, t % 1000);
    end
    repeat (300) @(negedge clk);
    check(exp_rd.size() == 0, $sformatf("%0d read flits missing", exp_rd.size()));
    check(acks_exp.size() == 0, $sformatf("%0d acks missing", acks_exp.size()));
    foreach (wlines[a]) check(peek_line(a) == wlines[a], $sformatf("written line %0d", a));
    $display("reads/writes done: %0d read flits, %0d acks", n_flits, acks_got);
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
