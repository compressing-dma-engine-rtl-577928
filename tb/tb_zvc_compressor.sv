// tb_zvc_compressor: random 128B lines through the ZVC compression pipeline.
// Lines of several densities (all zero, all non-zero, the paper's example mask
// pattern, words with a single bit set, random 10%..90% density) are fed as 4 back-to-back sectors, some
// lines back to back and some with gaps, some in raw (uncompressed) mode. A
// reference model in the testbench forms the expected mask, count and packed
// words. The line latency (first sector in -> line out) must be six cycles.
module tb_zvc_compressor;
  import cdma_pkg::*;

  logic    clk = 0, rst_n = 0;
  logic    in_valid = 0;
  sector_t in_data = '0;
  logic    in_raw = 0;
  tag_t    in_tag = '0;
  logic    out_valid;
  mask_t   out_mask;
  nnz_t    out_nnz;
  line_t   out_line;
  tag_t    out_tag;
  logic    out_raw;

  int checks = 0, failures = 0;
  longint cycle = 0;

  zvc_compressor dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  // Expected results, queued in order.
  mask_t  exp_mask[$];
  nnz_t   exp_nnz[$];
  line_t  exp_line[$];
  tag_t   exp_tag[$];
  longint exp_start[$];

  function automatic line_t make_line(int kind);
    line_t l;
    // Paper's example mask, word 0 first: 1001101000010010001000000 01100010
    static string pat = "10011010000100100010000001100010";
    for (int i = 0; i < LINE_WORDS; i++) begin
      int unsigned r, v, b;   // separate statements: each call draws anew
      r = $urandom() % 100;
      v = $urandom();
      b = $urandom() % 32;
      case (kind)
        0: l[i] = '0;
        1: l[i] = v | 32'h1;
        2: l[i] = (pat[i] == "1") ? (v | 32'h100) : '0;
        3: l[i] = (r < 50) ? (32'h1 << b) : '0;   // single-bit words
        default: l[i] = (r < kind) ? (v | 32'h8) : '0;
      endcase
    end
    return l;
  endfunction

  task automatic send_line(line_t l, logic raw, tag_t tag);
    mask_t m;
    nnz_t  n;
    line_t p;
    m = '0; n = '0; p = '0;
    for (int i = 0; i < LINE_WORDS; i++)
      if (raw || l[i] != '0) begin
        m[i] = 1'b1;
        p[n] = l[i];
        n++;
      end
    exp_mask.push_back(m);
    exp_nnz.push_back(n);
    exp_line.push_back(p);
    exp_tag.push_back(tag);
    exp_start.push_back(cycle);
    // Inputs change on the falling edge, away from the sampling edge.
    for (int s = 0; s < LINE_SECTORS; s++) begin
      in_valid = 1'b1;
      in_raw   = raw;
      in_tag   = tag;
      for (int w = 0; w < SECTOR_WORDS; w++) in_data[w] = l[s*SECTOR_WORDS + w];
      @(negedge clk);
    end
    in_valid = 1'b0;
  endtask

  // Checker.
  int lines_seen = 0;
  always @(posedge clk) begin
    if (rst_n && out_valid) begin
      if (exp_mask.size() == 0) begin
        failures++;
        $display("FAIL unexpected output line");
      end else begin
        mask_t m; nnz_t n; line_t p; tag_t t; longint st;
        m = exp_mask.pop_front(); n = exp_nnz.pop_front(); p = exp_line.pop_front();
        t = exp_tag.pop_front(); st = exp_start.pop_front();
        checks += 4;
        if (out_mask != m) begin failures++; $display("FAIL mask %h exp %h line %0d", out_mask, m, lines_seen); end
        if (out_nnz != n) begin failures++; $display("FAIL nnz %0d exp %0d", out_nnz, n); end
        if (out_line != p) begin failures++; $display("FAIL packed words differ, line %0d", lines_seen); end
        if (out_tag != t) begin failures++; $display("FAIL tag"); end
        checks++;
        // Sector 0 is taken at clock edge st+1; the line is complete in the
        // output registers six edges later.
        if (cycle - st != 6) begin
          failures++;
          $display("FAIL latency %0d cycles, expected 6", cycle - st);
        end
      end
      lines_seen++;
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(negedge clk);
    send_line(make_line(0), 1'b0, tag_t'(1));
    send_line(make_line(1), 1'b0, tag_t'(2));
    send_line(make_line(2), 1'b0, tag_t'(3));
    for (int k = 0; k < 20; k++) send_line(make_line(3), 1'b0, tag_t'(5 + k));
    repeat (2) @(negedge clk);
    send_line(make_line(50), 1'b1, tag_t'(4));
    for (int k = 0; k < 300; k++) begin
      send_line(make_line(10 + ($urandom() % 90)), ($urandom() % 8) == 0, tag_t'(k));
      if ($urandom() % 3 == 0) repeat ($urandom() % 4) @(negedge clk);
    end
    repeat (10) @(posedge clk);
    checks++;
    if (exp_mask.size() != 0 || lines_seen != 324) begin
      failures++;
      $display("FAIL %0d lines missing, %0d seen", exp_mask.size(), lines_seen);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
