// tb_cdma_top: end-to-end test of the compressing DMA subsystem.
//
// GPU memory (gpu_dram_model) is filled with NL lines of activations of mixed
// sparsity: all-zero lines, dense lines and lines of random density. Then:
//   1. compressed offload: the PCIe transmit stream is captured and compared
//      word for word with a reference ZVC stream built here (per line: mask,
//      then the non-zero words; packed into 8-word units, last one padded);
//      the reported size must be 4 x (words of that stream); the crossbar must
//      carry only the compressed flits;
//   2. compressed prefetch of that stream to another region, which must then
//      equal the original;
//   3. the same two steps as uncompressed (raw) copies.
// The buffer is made small (BUF_SLOTS_TB) and PCIe and DRAM stall at random, so
// that the buffer-full stall, PCIe back-pressure, DRAM back-pressure and
// crossbar contention all happen; each is counted and must occur.
module tb_cdma_top;
  import cdma_pkg::*;

  localparam int BUF_SLOTS_TB = 8;
  localparam int NL  = 120;              // lines per transfer
  localparam int SRC = 1000;             // line addresses of the regions
  localparam int DST = 5003;
  localparam int DST_RAW = 9007;

  logic clk = 0, rst_n = 1;
  always #5 clk = ~clk;

  logic                 cmd_valid = 0, cmd_ready, cmd_dir = 0, cmd_raw = 0;
  laddr_t               cmd_laddr = '0;
  logic [NLINES_W-1:0]  cmd_nlines = '0;
  logic                 done_valid;
  logic [BYTES_W-1:0]   done_bytes;
  logic                 tx_valid, tx_ready = 0, tx_last;
  sector_t              tx_data;
  logic                 rx_valid = 0, rx_ready;
  sector_t              rx_data = '0;
  logic    [NUM_MC-1:0]              mc_rd_valid, mc_rd_ready, mc_rd_rsp_valid;
  logic    [NUM_MC-1:0][LADDR_W+1:0] mc_rd_addr, mc_wr_addr;
  sector_t [NUM_MC-1:0]              mc_rd_rsp_data, mc_wr_data;
  logic    [NUM_MC-1:0]              mc_wr_valid, mc_wr_ready;
  logic [$clog2(BUF_SLOTS_TB+1)-1:0] buf_used;
  logic                 buf_full_stall;
  bit                   dram_stall = 1;

  cdma_top #(.SLOTS(BUF_SLOTS_TB)) dut (.*);

  gpu_dram_model #(.N(NUM_MC), .LAT(40)) mem (
    .clk, .stall_en(dram_stall),
    .rd_valid(mc_rd_valid), .rd_ready(mc_rd_ready), .rd_addr(mc_rd_addr),
    .rd_rsp_valid(mc_rd_rsp_valid), .rd_rsp_data(mc_rd_rsp_data),
    .wr_valid(mc_wr_valid), .wr_ready(mc_wr_ready), .wr_addr(mc_wr_addr), .wr_data(mc_wr_data));

  int checks = 0, failures = 0;
  longint cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  // ---------------- mechanism counters ----------------
  int n_buf_stall = 0, n_tx_bp = 0, n_rx_gap = 0, n_xbar_conflict = 0, n_dram_bp = 0;
  int n_zero_lines = 0, n_dense_lines = 0, n_raw_xfers = 0, n_comp_xfers = 0, n_acks = 0;
  int xbar_data_flits = 0;
  always @(posedge clk) if (rst_n) begin
    if (buf_full_stall) n_buf_stall++;
    if (tx_valid && !tx_ready) n_tx_bp++;
    if ($countones(dut.p_rsp_valid) > 1) n_xbar_conflict++;
    if ((mc_rd_valid & ~mc_rd_ready) != '0) n_dram_bp++;
    if (dut.x_rsp_valid && dut.x_rsp_ready && !dut.x_rsp.ack) xbar_data_flits++;
    if (dut.x_rsp_valid && dut.x_rsp_ready && dut.x_rsp.ack) n_acks++;
  end

  // ---------------- PCIe models ----------------
  sector_t tx_cap[$];
  bit      tx_stall = 1;
  int      tx_last_seen = 0;
  always @(negedge clk) tx_ready = tx_stall ? ($urandom() % 3 != 0) : 1'b1;
  always @(posedge clk) if (rst_n && tx_valid && tx_ready) begin
    tx_cap.push_back(tx_data);
    if (tx_last) tx_last_seen++;
  end

  task automatic feed_rx(sector_t s[$]);
    foreach (s[i]) begin
      while ($urandom() % 4 == 0) begin rx_valid = 0; n_rx_gap++; @(negedge clk); end
      rx_valid = 1;
      rx_data  = s[i];
      #1;
      while (!rx_ready) begin @(negedge clk); #1; end
      @(negedge clk);
    end
    rx_valid = 0;
  endtask

  // ---------------- data ----------------
  line_t src_lines[NL];

  function automatic line_t make_line(int i);
    line_t l;
    int d;
    d = (i % 9 == 0) ? 0 : (i % 11 == 1) ? 100 : int'($urandom() % 95) + 3;
    for (int w = 0; w < LINE_WORDS; w++)
      begin
        int unsigned r, v;   // separate statements: each call draws anew
        r = $urandom() % 100;
        v = $urandom();
        l[w] = (r < d) ? (v | 32'h1000) : '0;
      end
    return l;
  endfunction

  function automatic line_t read_line(longint la);
    line_t l;
    for (int s = 0; s < 4; s++) begin
      sector_t x;
      x = mem.peek(la * 4 + s);
      for (int w = 0; w < 8; w++) l[s*8 + w] = x[w];
    end
    return l;
  endfunction

  // Reference ZVC stream of the source region (raw: plain words).
  function automatic void ref_stream(bit raw, output sector_t units[$], output int words,
                                     output int xflits);
    word_t ws[$];
    units = {};
    xflits = 0;
    for (int i = 0; i < NL; i++) begin
      mask_t m;
      int n;
      m = '0; n = 0;
      for (int w = 0; w < LINE_WORDS; w++) if (raw || src_lines[i][w] != '0) begin m[w] = 1; n++; end
      if (!raw) ws.push_back(m);
      for (int w = 0; w < LINE_WORDS; w++) if (m[w]) ws.push_back(src_lines[i][w]);
      xflits += (n == 0) ? 1 : (n + 7) / 8;
    end
    words = ws.size();
    while (ws.size() % 8 != 0) ws.push_back('0);
    for (int k = 0; k < ws.size(); k += 8) begin
      sector_t u;
      for (int w = 0; w < 8; w++) u[w] = ws[k + w];
      units.push_back(u);
    end
  endfunction

  task automatic run_cmd(bit dir, bit raw, int laddr, output int bytes);
    @(negedge clk);
    cmd_valid = 1; cmd_dir = dir; cmd_raw = raw; cmd_laddr = laddr_t'(laddr);
    cmd_nlines = NLINES_W'(NL);
    #1;
    while (!cmd_ready) begin @(negedge clk); #1; end
    @(negedge clk);
    cmd_valid = 0;
    if (raw) n_raw_xfers++; else n_comp_xfers++;
    while (!done_valid) @(negedge clk);
    bytes = int'(done_bytes);
  endtask

  task automatic offload_and_back(bit raw, int dst);
    sector_t exp_units[$], got[$];
    int words, xflits, bytes, bytes2, flits0;
    ref_stream(raw, exp_units, words, xflits);
    tx_cap = {};
    flits0 = xbar_data_flits;
    run_cmd(0, raw, SRC, bytes);
    got = tx_cap;
    check(bytes == 4 * words, $sformatf("offload raw=%0d size %0d, expected %0d", raw, bytes, 4*words));
    check(got.size() == exp_units.size(),
          $sformatf("offload raw=%0d sent %0d units, expected %0d", raw, got.size(), exp_units.size()));
    for (int k = 0; k < exp_units.size() && k < got.size(); k++)
      check(got[k] == exp_units[k], $sformatf("offload raw=%0d unit %0d differs", raw, k));
    check(xbar_data_flits - flits0 == xflits,
          $sformatf("crossbar carried %0d flits, expected %0d", xbar_data_flits - flits0, xflits));
    // Prefetch the captured stream to dst.
    fork
      run_cmd(1, raw, dst, bytes2);
      feed_rx(got);
    join
    check(bytes2 == bytes, $sformatf("prefetch raw=%0d size %0d, expected %0d", raw, bytes2, bytes));
    for (int i = 0; i < NL; i++)
      check(read_line(dst + i) == src_lines[i], $sformatf("prefetched line %0d raw=%0d differs", i, raw));
    $display("raw=%0d: %0d lines, %0d bytes on PCIe (%0d uncompressed)", raw, NL, bytes, NL * 128);
  endtask

  initial begin
    #1 rst_n = 0;                // asynchronous reset before the first edge
    for (int i = 0; i < NL; i++) begin
      src_lines[i] = make_line(i);
      for (int s = 0; s < 4; s++) begin
        sector_t x;
        for (int w = 0; w < 8; w++) x[w] = src_lines[i][s*8 + w];
        mem.mem[longint'(SRC + i) * 4 + s] = x;
      end
      if (src_lines[i] == '0) n_zero_lines++;
      if (i % 11 == 1) n_dense_lines++;
    end
    repeat (4) @(negedge clk);
    rst_n = 1;
    offload_and_back(0, DST);
    offload_and_back(1, DST_RAW);
    check(mem.wrong_port == 0, "line routed to the wrong memory partition");
    check(tx_last_seen == 2, "transmit stream end markers");
    check(n_acks == 2 * NL, $sformatf("%0d write acks, expected %0d", n_acks, 2 * NL));
    $display("events: buffer-full stall %0d, PCIe tx back-pressure %0d, rx gaps %0d, crossbar contention %0d, DRAM back-pressure %0d, zero lines %0d, dense lines %0d, raw transfers %0d, compressed transfers %0d",
             n_buf_stall, n_tx_bp, n_rx_gap, n_xbar_conflict, n_dram_bp, n_zero_lines, n_dense_lines, n_raw_xfers, n_comp_xfers);
    check(n_buf_stall > 0, "buffer-full stall never happened");
    check(n_tx_bp > 0, "PCIe back-pressure never happened");
    check(n_rx_gap > 0, "PCIe receive gaps never happened");
    check(n_xbar_conflict > 0, "crossbar contention never happened");
    check(n_dram_bp > 0, "DRAM back-pressure never happened");
    check(n_zero_lines > 0 && n_dense_lines > 0, "no all-zero or dense lines");
    check(n_raw_xfers > 0 && n_comp_xfers > 0, "mode switch never happened");
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
