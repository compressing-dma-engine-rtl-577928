// tb_zvc_decompressor: compressed lines through the ZVC decompression pipeline.
// The testbench compresses random lines itself (mask + packed non-zero words),
// cuts each into 1..4 flits (one flit for an all-zero line) and feeds them,
// sometimes back to back and sometimes with random gaps, while the output is
// sometimes stalled. Every sector is compared with the original line. In a
// phase without gaps or stalls the cycle of the last sector is checked: two
// edges after the edge at which the sector's stage-1 step could happen, which
// for a dense 4-flit line is two cycles after its last flit.
module tb_zvc_decompressor;
  import cdma_pkg::*;

  logic       clk = 0, rst_n = 0;
  logic       in_valid = 0, in_ready, in_first = 0;
  mask_t      in_mask = '0;
  laddr_t     in_laddr = '0;
  tag_t       in_tag = '0;
  sector_t    in_data = '0;
  logic       out_valid, out_ready = 1, out_last;
  sector_t    out_data;
  logic [1:0] out_sec;
  laddr_t     out_laddr;
  tag_t       out_tag;

  int checks = 0, failures = 0;
  longint cycle = 0;
  bit gaps = 0, stalls = 0, timing = 0;
  int lines_out = 0;

  zvc_decompressor dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  line_t  exp_line[$];
  laddr_t exp_addr[$];
  longint last_flit_cycle[$];

  function automatic line_t make_line(int density);
    line_t l;
    for (int i = 0; i < LINE_WORDS; i++)
      begin
        int unsigned r, v;   // separate statements: each call draws anew
        r = $urandom() % 100;
        v = $urandom();
        l[i] = (r < density) ? (v | 32'h40) : '0;
      end
    return l;
  endfunction

  task automatic send_line(line_t l, laddr_t a);
    mask_t m;
    int    n;
    line_t p;
    int    nf;
    longint acc[4];
    m = '0; n = 0; p = '0;
    for (int i = 0; i < LINE_WORDS; i++)
      if (l[i] != '0) begin m[i] = 1'b1; p[n] = l[i]; n++; end
    nf = (n == 0) ? 1 : (n + 7) / 8;
    exp_line.push_back(l);
    exp_addr.push_back(a);
    for (int f = 0; f < nf; f++) begin
      // Inputs change on the falling edge; a flit is taken at the next rising
      // edge if in_ready is high just before it.
      if (gaps) while ($urandom() % 3 == 0) begin in_valid = 1'b0; @(negedge clk); end
      in_valid = 1'b1;
      in_first = (f == 0);
      in_mask  = m;
      in_laddr = a;
      in_tag   = tag_t'(a);
      for (int w = 0; w < 8; w++) in_data[w] = (f*8 + w < n) ? p[f*8 + w] : 32'hDEAD_BEEF;
      #1;
      while (!in_ready) begin @(negedge clk); #1; end
      @(negedge clk);
      acc[f] = cycle;
    end
    // Expected hand-over edge of the last sector: sector s leaves stage 1 at
    // edge e_s = max(e_{s-1} + 1, edge that brought its last payload word),
    // and reaches the output two edges later.
    begin
      longint e;
      int w;
      e = 0; w = 0;
      for (int sct = 0; sct < 4; sct++) begin
        int fl;
        for (int b = 0; b < 8; b++) w += m[sct*8 + b];
        fl = (w == 0) ? 0 : (w - 1) / 8;
        e = (sct == 0) ? acc[fl] : ((e + 1 > acc[fl]) ? e + 1 : acc[fl]);
      end
      last_flit_cycle.push_back(e + 2);
    end
    in_valid = 1'b0;
  endtask

  always @(negedge clk) out_ready = stalls ? ($urandom() % 4 != 0) : 1'b1;

  // Checker: one sector per handshake.
  always @(posedge clk) begin
    if (rst_n && out_valid && out_ready) begin
      if (exp_line.size() == 0) begin
        failures++; $display("FAIL unexpected sector");
      end else begin
        sector_t e;
        for (int w = 0; w < 8; w++) e[w] = exp_line[0][int'(out_sec)*8 + w];
        checks++;
        if (out_data != e) begin
          failures++;
          $display("FAIL line %0d sector %0d: %h expected %h", lines_out, out_sec, out_data, e);
        end
        checks++;
        if (out_laddr != exp_addr[0] || out_tag != tag_t'(exp_addr[0])) begin
          failures++; $display("FAIL address/tag");
        end
        if (out_last) begin
          longint lf;
          void'(exp_line.pop_front());
          void'(exp_addr.pop_front());
          lf = last_flit_cycle.pop_front();
          if (timing) begin
            checks++;
            // This block reads the cycle count before this edge's update.
            if (cycle + 1 != lf) begin
              failures++;
              $display("FAIL line %0d done at edge %0d, expected %0d", lines_out, cycle + 1, lf);
            end
          end
          lines_out++;
        end
      end
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(negedge clk);
    // Phase 1: single lines, no gaps or stalls, latency checked.
    timing = 1;
    send_line(make_line(0), 1);   repeat (8) @(negedge clk);
    send_line(make_line(100), 2); repeat (8) @(negedge clk);
    for (int k = 0; k < 40; k++) begin
      send_line(make_line($urandom() % 101), laddr_t'(k + 3));
      repeat (8) @(negedge clk);
    end
    timing = 0;
    // Phase 2: back-to-back dense lines: 4 sectors per line, no bubbles.
    begin
      longint t0;
      t0 = cycle;
      for (int k = 0; k < 20; k++) send_line(make_line(100), laddr_t'(100 + k));
      while (exp_line.size() != 0) @(negedge clk);
      checks++;
      if (cycle - t0 > 80 + 4) begin
        failures++;
        $display("FAIL 20 dense lines took %0d cycles", cycle - t0);
      end
    end
    // Phase 3: random densities, gaps and stalls.
    gaps = 1; stalls = 1;
    for (int k = 0; k < 400; k++) send_line(make_line($urandom() % 101), laddr_t'(1000 + k));
    gaps = 0;
    for (int k = 0; k < 100; k++) send_line(make_line($urandom() % 101), laddr_t'(2000 + k));
    while (exp_line.size() != 0) @(negedge clk);
    checks++;
    if (lines_out != 562) begin failures++; $display("FAIL %0d lines out", lines_out); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
