// tb_cdma_xbar: checks request routing and the response arbiter.
//
// Requests with random destinations must appear only at their partition, with
// ready taken from that partition. On the response side all partitions offer
// multi-flit packets at random times while the engine side stalls at random;
// every packet must come out whole (its flits consecutive, never interleaved
// with another port's), in order per port, and no packet may be lost. With all
// ports busy, grants must rotate: no port may wait more than NUM_PORTS-1
// packets while it has one pending (round robin).
module tb_cdma_xbar;
  import cdma_pkg::*;

  localparam int N = NUM_MC;

  logic clk = 0, rst_n = 1;
  always #5 clk = ~clk;

  logic req_valid = 0, req_ready, rsp_valid, rsp_ready = 0;
  xreq_t req = '0;
  logic [$clog2(N)-1:0] req_dst = '0;
  xrsp_t rsp;
  logic [N-1:0] p_req_valid, p_req_ready = '0, p_rsp_valid = '0, p_rsp_ready;
  xreq_t p_req;
  xrsp_t [N-1:0] p_rsp = '0;

  cdma_xbar dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // ---- request side: combinational routing ----
  task automatic req_test();
    for (int t = 0; t < 500; t++) begin
      req_valid = $urandom() % 2;
      req_dst   = $clog2(N)'($urandom() % N);
      req       = '0;
      req.laddr = laddr_t'($urandom());
      p_req_ready = N'($urandom());
      #1;
      for (int p = 0; p < N; p++)
        check(p_req_valid[p] == (req_valid && p == int'(req_dst)), "request routed to wrong port");
      check(req_ready == p_req_ready[req_dst], "request ready");
      check(p_req == req, "request payload");
      @(negedge clk);
    end
    req_valid = 0;
  endtask

  // ---- response side ----
  int sent_pk[N], got_pk[N], flit_no[N], npk[N], wait_pk[N];
  int cur_port = -1, total = 0, max_wait = 0;
  localparam int PKTS = 200;

  // Port p sends packets of 1..4 flits; tag = packet number, data[0] = port.
  int len_of[N][PKTS];

  always @(negedge clk) begin
    rsp_ready = ($urandom() % 4 != 0);
    for (int p = 0; p < N; p++) begin
      if (!p_rsp_valid[p] && sent_pk[p] < PKTS && $urandom() % 3 == 0) begin
        p_rsp_valid[p] = 1;
        flit_no[p] = 0;
      end
      if (p_rsp_valid[p]) begin
        p_rsp[p] = '0;
        p_rsp[p].tag = tag_t'(sent_pk[p]);
        p_rsp[p].idx = 2'(flit_no[p]);
        p_rsp[p].data[0] = p;
        p_rsp[p].last = (flit_no[p] == len_of[p][sent_pk[p]] - 1);
      end
    end
  end

  always @(posedge clk) if (rst_n) begin
    for (int p = 0; p < N; p++)
      if (p_rsp_valid[p] && p_rsp_ready[p]) begin
        if (p_rsp[p].last) begin sent_pk[p]++; p_rsp_valid[p] <= 0; end
        else flit_no[p]++;
      end
    check($countones(p_rsp_ready) <= 1, "more than one port granted");
    if (rsp_valid && rsp_ready) begin
      int p;
      p = int'(rsp.data[0]);
      if (cur_port >= 0) check(p == cur_port, "packets interleaved");
      check(int'(rsp.tag) == got_pk[p], "packet order of a port");
      cur_port = rsp.last ? -1 : p;
      if (rsp.last) begin
        got_pk[p]++;
        total++;
        for (int q = 0; q < N; q++)
          if (q != p && p_rsp_valid[q]) begin
            wait_pk[q]++;
            if (wait_pk[q] > max_wait) max_wait = wait_pk[q];
          end
        wait_pk[p] = 0;
      end
    end
  end

  initial begin
    foreach (len_of[p, k]) len_of[p][k] = 1 + int'($urandom() % 4);
    #1 rst_n = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    req_test();
    while (total < N * PKTS) @(negedge clk);
    for (int p = 0; p < N; p++) check(got_pk[p] == PKTS, $sformatf("port %0d delivered %0d packets", p, got_pk[p]));
    check(max_wait <= N - 1, $sformatf("a port waited %0d packets", max_wait));
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
