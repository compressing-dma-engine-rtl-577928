// zvc_compressor: zero-value compression (ZVC) engine for one memory controller.
//
// A 128B line arrives as four 32B sectors, one per cycle, in sector order. The
// line leaves as a 32-bit mask (bit i = word i of the line is non-zero), the
// count of non-zero words, and the non-zero words packed from word 0 upwards in
// their original order, the rest of the 32-word buffer being zero.
//
// Three pipeline stages, as in the paper's compression engine figure:
//   1. the 8 words are compared with zero in parallel, giving the sector's
//      8-bit mask segment; a prefix sum (zvc_prefix_sum) counts the zero words
//      in front of each word;
//   2. a bubble-collapsing shifter moves each non-zero word down by its count
//      of leading zeros, so the sector's non-zero words sit in words 0..n-1;
//   3. shift-and-append writes those n words into the 128B buffer at the
//      position held in the buffer length register, adds n to that register,
//      and appends the mask segment to the line's mask.
// Stages, widths and the six-cycle line latency follow the paper. The first
// sector of a line clears the buffer; bit/word ordering (word 0 at the low
// end) is this design's convention; the figures print word 0 leftmost.
//
// Timing: sectors accepted in cycles 0..3 (in_valid high, no gaps required but
// allowed); out_valid pulses for one cycle six cycles after sector 0 when the
// sectors come back to back, i.e. three cycles after sector 3. There is no
// back-pressure: the caller must take the line in the cycle out_valid is high.
//
// in_raw (sampled with sector 0) selects an uncompressed copy: every word is
// treated as non-zero, so the mask is all ones and the words pass unchanged.
// in_tag is carried alongside the line and returned with it.
module zvc_compressor
  import cdma_pkg::*;
(
  input  logic    clk,
  input  logic    rst_n,
  input  logic    in_valid,
  input  sector_t in_data,
  input  logic    in_raw,
  input  tag_t    in_tag,
  output logic    out_valid,
  output mask_t   out_mask,
  output nnz_t    out_nnz,
  output line_t   out_line,
  output tag_t    out_tag,
  output logic    out_raw
);

  // ---------------- sector counter at the input ----------------
  logic [1:0] in_sec;
  logic       line_raw;
  tag_t       line_tag;
  logic       cur_raw;
  tag_t       cur_tag;

  assign cur_raw = (in_sec == 2'd0) ? in_raw : line_raw;
  assign cur_tag = (in_sec == 2'd0) ? in_tag : line_tag;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      in_sec   <= '0;
      line_raw <= 1'b0;
      line_tag <= '0;
    end else if (in_valid) begin
      in_sec <= in_sec + 2'd1;
      if (in_sec == 2'd0) begin
        line_raw <= in_raw;
        line_tag <= in_tag;
      end
    end
  end

  // ---------------- stage 1: compare with zero, prefix sum ----------------
  seg_t            nz;
  logic [7:0][2:0] zb;
  cnt8_t           cnt;

  always_comb
    for (int i = 0; i < SECTOR_WORDS; i++)
      nz[i] = cur_raw | (in_data[i] != '0);

  zvc_prefix_sum u_psum (.nz(nz), .zeros_before(zb), .nnz(cnt));

  logic            s1_valid;
  sector_t         s1_data;
  seg_t            s1_seg;
  logic [7:0][2:0] s1_zb;
  cnt8_t           s1_cnt;
  logic [1:0]      s1_sec;
  logic            s1_raw;
  tag_t            s1_tag;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) s1_valid <= 1'b0;
    else        s1_valid <= in_valid;
  end
  always_ff @(posedge clk) begin
    if (in_valid) begin
      s1_data <= in_data;
      s1_seg  <= nz;
      s1_zb   <= zb;
      s1_cnt  <= cnt;
      s1_sec  <= in_sec;
      s1_raw  <= cur_raw;
      s1_tag  <= cur_tag;
    end
  end

  // ---------------- stage 2: bubble-collapsing shifter ----------------
  // Output word j takes input word i (i >= j) when word i is non-zero and has
  // exactly i - j zero words in front of it.
  sector_t col;
  always_comb begin
    col = '0;
    for (int j = 0; j < SECTOR_WORDS; j++)
      for (int i = j; i < SECTOR_WORDS; i++)
        if (s1_seg[i] && (int'(s1_zb[i]) == i - j)) col[j] = s1_data[i];
  end

  logic       s2_valid;
  sector_t    s2_col;
  seg_t       s2_seg;
  cnt8_t      s2_cnt;
  logic [1:0] s2_sec;
  logic       s2_raw;
  tag_t       s2_tag;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) s2_valid <= 1'b0;
    else        s2_valid <= s1_valid;
  end
  always_ff @(posedge clk) begin
    if (s1_valid) begin
      s2_col <= col;
      s2_seg <= s1_seg;
      s2_cnt <= s1_cnt;
      s2_sec <= s1_sec;
      s2_raw <= s1_raw;
      s2_tag <= s1_tag;
    end
  end

  // ---------------- stage 3: shift-and-append into the 128B buffer ----------------
  line_t buf_q, buf_d;
  mask_t mask_q, mask_d;
  nnz_t  len_q, len_d;      // buffer length register, in words

  always_comb begin
    nnz_t base;
    base   = (s2_sec == 2'd0) ? '0 : len_q;
    buf_d  = (s2_sec == 2'd0) ? '0 : buf_q;
    mask_d = (s2_sec == 2'd0) ? '0 : mask_q;
    for (int p = 0; p < LINE_WORDS; p++)
      for (int j = 0; j < SECTOR_WORDS; j++)
        if (j < int'(s2_cnt) && p == int'(base) + j) buf_d[p] = s2_col[j];
    mask_d[8*s2_sec +: 8] = s2_seg;
    len_d = base + nnz_t'(s2_cnt);
  end

  logic out_valid_q;
  tag_t out_tag_q;
  logic out_raw_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid_q <= 1'b0;
      len_q       <= '0;
      mask_q      <= '0;
      buf_q       <= '0;
      out_tag_q   <= '0;
      out_raw_q   <= 1'b0;
    end else begin
      out_valid_q <= s2_valid && (s2_sec == 2'd3);
      if (s2_valid) begin
        buf_q  <= buf_d;
        mask_q <= mask_d;
        len_q  <= len_d;
        if (s2_sec == 2'd3) begin
          out_tag_q <= s2_tag;
          out_raw_q <= s2_raw;
        end
      end
    end
  end

  assign out_valid = out_valid_q;
  assign out_mask  = mask_q;
  assign out_nnz   = len_q;
  assign out_line  = buf_q;
  assign out_tag   = out_tag_q;
  assign out_raw   = out_raw_q;

endmodule
