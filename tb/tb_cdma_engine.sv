// tb_cdma_engine: tests the DMA engine against a behavioural model of the
// crossbar and the six memory partitions with their compression units.
//
// The model accepts line requests (with random back-pressure), checks that
// each goes to partition line address mod 6, and answers a read after a
// random delay of 1..60 cycles with the line's ZVC flits, worked out here, so
// lines complete out of order. Write packets are collected, expanded from
// mask and payload and stored; each is acknowledged after a random delay.
// A small buffer (SLOTS = 8) makes the engine stall on a full buffer.
// Checked: the PCIe transmit stream equals the reference packed ZVC stream,
// done_bytes is its size, a prefetch of that stream rewrites every line
// exactly, raw copies, a zero-line command, and that at most SLOTS reads are
// ever outstanding.
module tb_cdma_engine;
  import cdma_pkg::*;

  localparam int SLOTS = 8;
  localparam int NL = 90;
  localparam int SRC = 777, DST = 3001;

  logic clk = 0, rst_n = 1;
  always #5 clk = ~clk;

  logic cmd_valid = 0, cmd_ready, cmd_dir = 0, cmd_raw = 0;
  laddr_t cmd_laddr = '0;
  logic [NLINES_W-1:0] cmd_nlines = '0;
  logic done_valid;
  logic [BYTES_W-1:0] done_bytes;
  logic x_req_valid, x_req_ready = 0, x_rsp_valid = 0, x_rsp_ready;
  xreq_t x_req;
  mcid_t x_req_dst;
  xrsp_t x_rsp = '0;
  logic tx_valid, tx_ready = 0, tx_last, rx_valid = 0, rx_ready;
  sector_t tx_data, rx_data = '0;
  logic [$clog2(SLOTS+1)-1:0] buf_used;
  logic buf_full_stall;

  cdma_engine #(.SLOTS(SLOTS)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  line_t mem [longint];
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  // ---- partition model ----
  typedef struct { longint due; xrsp_t f[$]; } pkt_t;
  pkt_t   pend[$];
  xrsp_t  cur[$];            // packet being sent
  int     outstanding = 0, max_out = 0, n_stall = 0, wrong_dst = 0;
  mask_t  wmask;
  word_t  wpl[$];

  function automatic void zvc(line_t l, bit raw, output mask_t m, output word_t pl[$]);
    m = '0; pl = {};
    for (int w = 0; w < 32; w++) if (raw || l[w] != '0) begin m[w] = 1; pl.push_back(l[w]); end
  endfunction

  always @(negedge clk) begin
    x_req_ready = ($urandom() % 4 != 0);
    x_rsp_valid = 0;
    if (cur.size() == 0) begin
      for (int k = 0; k < pend.size(); k++)
        if (pend[k].due <= cyc) begin cur = pend[k].f; pend.delete(k); break; end
    end
    if (cur.size() != 0) begin x_rsp_valid = 1; x_rsp = cur[0]; end
  end

  always @(posedge clk) if (rst_n) begin
    if (buf_full_stall) n_stall++;
    if (x_rsp_valid && x_rsp_ready) begin
      if (!x_rsp.ack) outstanding -= x_rsp.last;
      void'(cur.pop_front());
    end
    if (x_req_valid && x_req_ready) begin
      pkt_t p;
      if (int'(x_req_dst) != int'(x_req.laddr % NUM_MC)) wrong_dst++;
      p.f   = {};
      p.due = cyc + 1 + $urandom() % 60;
      if (!x_req.wr) begin
        mask_t m;
        word_t pl[$];
        int nf;
        zvc(mem.exists(x_req.laddr) ? mem[x_req.laddr] : '0, x_req.raw, m, pl);
        nf = (pl.size() == 0) ? 1 : (pl.size() + 7) / 8;
        for (int f = 0; f < nf; f++) begin
          xrsp_t r;
          r = '0; r.tag = x_req.tag; r.mask = m; r.nnz = nnz_t'(pl.size()); r.idx = 2'(f);
          r.last = (f == nf - 1);
          for (int w = 0; w < 8; w++) if (f * 8 + w < pl.size()) r.data[w] = pl[f * 8 + w];
          p.f.push_back(r);
        end
        pend.push_back(p);
        outstanding++;
        if (outstanding > max_out) max_out = outstanding;
      end else begin
        if (x_req.idx == 0) begin wmask = x_req.mask; wpl = {}; end
        for (int w = 0; w < 8; w++) wpl.push_back(x_req.data[w]);
        if (x_req.last) begin
          line_t l;
          xrsp_t r;
          int k;
          l = '0; k = 0;
          for (int w = 0; w < 32; w++) if (wmask[w]) begin l[w] = wpl[k]; k++; end
          mem[x_req.laddr] = l;
          r = '0; r.ack = 1; r.tag = x_req.tag; r.last = 1;
          p.f.push_back(r);
          pend.push_back(p);
        end
      end
    end
  end

  // ---- PCIe ----
  sector_t tx_cap[$];
  always @(negedge clk) tx_ready = ($urandom() % 3 != 0);
  always @(posedge clk) if (rst_n && tx_valid && tx_ready) tx_cap.push_back(tx_data);

  task automatic feed_rx(sector_t s[$]);
    foreach (s[i]) begin
      while ($urandom() % 4 == 0) begin rx_valid = 0; @(negedge clk); end
      rx_valid = 1; rx_data = s[i];
      #1;
      while (!rx_ready) begin @(negedge clk); #1; end
      @(negedge clk);
    end
    rx_valid = 0;
  endtask

  task automatic run_cmd(bit dir, bit raw, int la, int nl, output int bytes);
    cmd_valid = 1; cmd_dir = dir; cmd_raw = raw; cmd_laddr = laddr_t'(la); cmd_nlines = NLINES_W'(nl);
    #1;
    while (!cmd_ready) begin @(negedge clk); #1; end
    @(negedge clk);
    cmd_valid = 0;
    while (!done_valid) @(negedge clk);
    bytes = int'(done_bytes);
    @(negedge clk);
  endtask

  task automatic round(bit raw, int dst);
    word_t ws[$];
    sector_t got[$];
    int bytes, bytes2, nw;
    for (int i = 0; i < NL; i++) begin
      mask_t m;
      word_t pl[$];
      zvc(mem[SRC + i], raw, m, pl);
      if (!raw) ws.push_back(m);
      foreach (pl[k]) ws.push_back(pl[k]);
    end
    nw = ws.size();
    while (ws.size() % 8 != 0) ws.push_back('0);
    tx_cap = {};
    run_cmd(0, raw, SRC, NL, bytes);
    check(bytes == 4 * nw, $sformatf("offload size %0d, expected %0d", bytes, 4 * nw));
    check(tx_cap.size() == ws.size() / 8, $sformatf("%0d units, expected %0d", tx_cap.size(), ws.size() / 8));
    for (int u = 0; u < tx_cap.size() && u < ws.size() / 8; u++)
      for (int w = 0; w < 8; w++) check(tx_cap[u][w] == ws[u*8 + w], $sformatf("unit %0d word %0d", u, w));
    got = tx_cap;
    fork
      run_cmd(1, raw, dst, NL, bytes2);
      feed_rx(got);
    join
    check(bytes2 == bytes, "prefetch size");
    for (int i = 0; i < NL; i++) check(mem.exists(dst + i) && mem[dst + i] == mem[SRC + i], $sformatf("line %0d", i));
  endtask

  initial begin
    int b;
    for (int i = 0; i < NL; i++) begin
      line_t l;
      int d;
      d = (i % 7 == 0) ? 0 : (i % 10 == 3) ? 100 : int'($urandom() % 100);
      for (int w = 0; w < 32; w++) begin
        int unsigned r, v;   // separate statements: each call draws anew
        r = $urandom() % 100;
        v = $urandom();
        l[w] = (r < d) ? (v | 1) : '0;
      end
      mem[SRC + i] = l;
    end
    #1 rst_n = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    round(0, DST);
    round(1, DST + 1000);
    run_cmd(0, 0, SRC, 0, b);
    check(b == 0, "empty command size");
    check(wrong_dst == 0, "request sent to the wrong partition");
    check(max_out <= SLOTS, $sformatf("%0d reads outstanding, buffer has %0d slots", max_out, SLOTS));
    check(n_stall > 0, "buffer-full stall never happened");
    $display("outstanding max %0d, buffer-full stall cycles %0d", max_out, n_stall);
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
