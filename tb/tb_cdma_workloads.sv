// tb_cdma_workloads: offload throughput and compression of activation data of
// the sparsity seen in training, on cdma_top at its default size.
//
// Three regions of NL lines are offloaded with PCIe and DRAM never stalling:
//   - "AlexNet average": 49.4% of the values are zero (about 2x compression);
//   - "most sparse layer": density chosen so ZVC reaches about 13.8x (1 to 2
//     non-zero words per 128B line, about 4% density);
//   - "dense": no zeros (pooling-like output), slightly expanded by the masks.
// Each stream is checked word for word against a reference encoding, and the
// achieved compression ratio is printed. Rate check: the engine reads one
// line per cycle and its output moves one 32B unit (8 words) per cycle, and a
// line occupies ceil((nnz + 1) / 8) units at the output (mask + non-zero
// words; one for the sparse lines, up to five for a dense line), so a region
// must leave within (sum of those units) + 200 cycles. The fixed 200 cycles
// cover pipeline fill and DRAM latency.
module tb_cdma_workloads;
  import cdma_pkg::*;

  localparam int NL = 1024;

  logic clk = 0, rst_n = 1;
  always #5 clk = ~clk;

  logic                 cmd_valid = 0, cmd_ready, cmd_dir = 0, cmd_raw = 0;
  laddr_t               cmd_laddr = '0;
  logic [NLINES_W-1:0]  cmd_nlines = '0;
  logic                 done_valid;
  logic [BYTES_W-1:0]   done_bytes;
  logic                 tx_valid, tx_ready = 1, tx_last;
  sector_t              tx_data;
  logic                 rx_valid = 0, rx_ready;
  sector_t              rx_data = '0;
  logic    [NUM_MC-1:0]              mc_rd_valid, mc_rd_ready, mc_rd_rsp_valid;
  logic    [NUM_MC-1:0][LADDR_W+1:0] mc_rd_addr, mc_wr_addr;
  sector_t [NUM_MC-1:0]              mc_rd_rsp_data, mc_wr_data;
  logic    [NUM_MC-1:0]              mc_wr_valid, mc_wr_ready;
  logic [$clog2(BUF_SLOTS+1)-1:0]    buf_used;
  logic                 buf_full_stall;

  cdma_top dut (.*);

  gpu_dram_model #(.N(NUM_MC), .LAT(40)) mem (
    .clk, .stall_en(1'b0),
    .rd_valid(mc_rd_valid), .rd_ready(mc_rd_ready), .rd_addr(mc_rd_addr),
    .rd_rsp_valid(mc_rd_rsp_valid), .rd_rsp_data(mc_rd_rsp_data),
    .wr_valid(mc_wr_valid), .wr_ready(mc_wr_ready), .wr_addr(mc_wr_addr), .wr_data(mc_wr_data));

  int checks = 0, failures = 0;
  longint cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  sector_t tx_cap[$];
  always @(posedge clk) if (rst_n && tx_valid && tx_ready) tx_cap.push_back(tx_data);

  // density in 1/1000; sparse_fixed places 1 non-zero word per line (2 in every
  // fourth line), which compresses to about 14x
  task automatic workload(string name, int base, int density, bit sparse_fixed, bit dense_limit);
    word_t ws[$];
    longint t0, t1;
    int nw, bytes, items;
    real ratio;
    items = 0;
    for (int i = 0; i < NL; i++) begin
      line_t l;
      mask_t m;
      for (int w = 0; w < LINE_WORDS; w++) begin
        int unsigned r, v;
        r = $urandom() % 1000;
        v = $urandom() | 32'h1;
        l[w] = (r < density) ? v : '0;
      end
      if (sparse_fixed) begin
        int unsigned p, q, v;
        p = $urandom() % 32;
        q = $urandom() % 32;
        v = $urandom() | 32'h1;
        l = '0;
        l[p] = v;
        if (i % 4 == 0) l[q] = v ^ 32'h5a5a_0000;
      end
      for (int s = 0; s < 4; s++) begin
        sector_t x;
        for (int w = 0; w < 8; w++) x[w] = l[s*8 + w];
        mem.mem[longint'(base + i) * 4 + s] = x;
      end
      m = '0;
      for (int w = 0; w < LINE_WORDS; w++) if (l[w] != '0) m[w] = 1;
      ws.push_back(m);
      for (int w = 0; w < LINE_WORDS; w++) if (m[w]) ws.push_back(l[w]);
      items += ($countones(m) + 1 + 7) / 8;   // 8-word units the line occupies at the output
    end
    nw = ws.size();
    while (ws.size() % 8 != 0) ws.push_back('0);
    tx_cap = {};
    @(negedge clk);
    cmd_valid = 1; cmd_dir = 0; cmd_raw = 0; cmd_laddr = laddr_t'(base); cmd_nlines = NLINES_W'(NL);
    t0 = cycle;
    @(negedge clk);
    cmd_valid = 0;
    while (!done_valid) @(negedge clk);
    t1 = cycle;
    bytes = int'(done_bytes);
    check(bytes == 4 * nw, $sformatf("%s: size %0d, expected %0d", name, bytes, 4 * nw));
    check(tx_cap.size() == ws.size() / 8, $sformatf("%s: %0d units, expected %0d", name, tx_cap.size(), ws.size() / 8));
    for (int u = 0; u < tx_cap.size() && u < ws.size() / 8; u++)
      for (int w = 0; w < 8; w++)
        check(tx_cap[u][w] == ws[u*8 + w], $sformatf("%s: unit %0d word %0d", name, u, w));
    ratio = real'(NL * 128) / real'(bytes);
    $display("%s: %0d lines, %0d bytes, ratio %.2f, %0d cycles, %.1f B of activations per cycle",
             name, NL, bytes, ratio, t1 - t0, real'(NL * 128) / real'(t1 - t0));
    check(t1 - t0 <= items + 200, $sformatf("%s: %0d cycles, limit %0d", name, t1 - t0, items + 200));
  endtask

  initial begin
    #1 rst_n = 0;
    repeat (4) @(negedge clk);
    rst_n = 1;
    workload("AlexNet average (49.4% zeros)", 1000, 506, 0, 0);
    workload("most sparse layer (~13.8x)", 4000, 0, 1, 0);
    workload("dense", 7000, 1000, 0, 1);
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
