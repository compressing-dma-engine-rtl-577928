// zvc_decompressor: zero-value decompression engine for one memory controller.
//
// Expands one compressed line (32-bit mask + its non-zero words) back into four
// 32B sectors, one sector per cycle, as in the paper's decompression engine
// figure. Two pipeline stages:
//   1. the mask segment of the next sector is selected ("select byte"); its
//      pop-count says how many payload words this sector uses, and a small
//      prefix sum over the segment (zvc_prefix_sum on the inverted segment)
//      gives each set bit's position in the payload, i.e. the mux selects.
//      Payload words arriving from the crossbar are appended to a 16-word
//      staging register (shift-and-append); the first 8 staged words are
//      latched together with the segment and selects, and the staging
//      register shifts down by the pop-count;
//   2. a bubble-expanding shifter places payload word k at the position of the
//      k-th set mask bit and zero elsewhere, forming the 32B sector.
// A sector leaves two cycles after the payload words it needs arrive, so a
// line is complete two cycles after its last flit: the "two additional cycles"
// of the paper. Decompression of a line starts with its first flit.
//
// Input: a packet of flits, the first with in_first = 1. Every flit carries
// the line's mask, address and tag (only the first one's are used) and up to
// 8 payload words in order; only the first popcount(mask) payload words of the
// packet are used, the rest of the last flit is padding. An all-zero line is
// one flit with no payload. in_ready may depend on in_valid's companion
// signals (in_first) but not on in_valid.
// Output: valid/ready stream of sectors with their index (0..3) and the line's
// address and tag; out_last marks sector 3. A stalled output stalls the
// pipeline. The packet format and the staging-register size are this design's.
module zvc_decompressor
  import cdma_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       in_valid,
  output logic       in_ready,
  input  logic       in_first,
  input  mask_t      in_mask,
  input  laddr_t     in_laddr,
  input  tag_t       in_tag,
  input  sector_t    in_data,
  output logic       out_valid,
  input  logic       out_ready,
  output sector_t    out_data,
  output logic [1:0] out_sec,
  output logic       out_last,
  output laddr_t     out_laddr,
  output tag_t       out_tag
);

  localparam int STG = 2 * SECTOR_WORDS;

  // ---------------- line context ----------------
  logic       active_q;
  mask_t      mask_q;
  laddr_t     laddr_q;
  tag_t       tag_q;
  logic [1:0] sec_q;
  nnz_t       need_q;                      // payload words still to arrive
  logic [STG-1:0][WORD_W-1:0] stg_q;       // staging register
  logic [$clog2(STG+1)-1:0]   stg_len_q;

  logic adv;                               // stage 1 -> stage 2 -> output may move
  logic s1_valid;

  function automatic nnz_t popcount32(mask_t m);
    nnz_t c;
    c = '0;
    for (int i = 0; i < LINE_WORDS; i++) c = c + nnz_t'(m[i]);
    return c;
  endfunction

  function automatic cnt8_t min8(nnz_t n);
    return (n > nnz_t'(SECTOR_WORDS)) ? cnt8_t'(SECTOR_WORDS) : cnt8_t'(n);
  endfunction

  // ---------------- stage 1 ----------------
  logic        starting, cont_ok, next_ok;
  logic        c_valid;
  mask_t       c_mask;
  laddr_t      c_laddr;
  tag_t        c_tag;
  logic [1:0]  c_sec;
  nnz_t        c_need;
  cnt8_t       take;
  logic [STG-1:0][WORD_W-1:0] comb, shifted, stg_d;
  logic [$clog2(STG+1)-1:0]   comb_len, stg_len_d;
  seg_t        seg;
  logic [7:0][2:0] sel;
  cnt8_t       zeros_in_seg, cnt;
  logic        emit, last_sec;
  nnz_t        next_need;
  cnt8_t       take2;

  always_comb begin
    // A first flit starts a line when idle; a follow-on flit is taken while
    // the line still needs words and the staging register has room.
    starting = !active_q && in_first;
    cont_ok  = active_q && !in_first && (need_q != '0) && (int'(stg_len_q) <= SECTOR_WORDS);

    c_valid = active_q || (starting && in_valid);
    c_mask  = active_q ? mask_q  : in_mask;
    c_laddr = active_q ? laddr_q : in_laddr;
    c_tag   = active_q ? tag_q   : in_tag;
    c_sec   = active_q ? sec_q   : 2'd0;
    c_need  = active_q ? need_q  : popcount32(in_mask);
    take    = (in_valid && (starting || cont_ok)) ? min8(c_need) : '0;

    // Shift-and-append: incoming payload words go behind the staged ones.
    comb = stg_q;
    for (int p = 0; p < STG; p++)
      for (int j = 0; j < SECTOR_WORDS; j++)
        if (j < int'(take) && p == int'(stg_len_q) + j) comb[p] = in_data[j];
    comb_len = stg_len_q + ($bits(comb_len))'(take);
  end

  // Select byte + mux-select prefix sum over the segment.
  assign seg = c_mask[8*c_sec +: 8];
  zvc_prefix_sum u_sel (.nz(~seg), .zeros_before(sel), .nnz(zeros_in_seg));
  assign cnt = cnt8_t'(SECTOR_WORDS) - zeros_in_seg;

  always_comb begin
    emit     = c_valid && adv && (comb_len >= ($bits(comb_len))'(cnt));
    last_sec = emit && (c_sec == 2'd3);
    // Back-to-back lines: the next line's first flit is taken in the cycle
    // the current line's last sector is emitted.
    next_ok  = active_q && last_sec && in_first;
    next_need = popcount32(in_mask);
    take2    = (in_valid && next_ok) ? min8(next_need) : '0;

    shifted = '0;
    for (int p = 0; p < STG; p++)
      for (int k = 0; k <= SECTOR_WORDS; k++)
        if (k == int'(cnt) && p + k < STG) shifted[p] = comb[p + k];

    if (emit) begin
      stg_d     = shifted;
      stg_len_d = comb_len - ($bits(comb_len))'(cnt);
    end else begin
      stg_d     = comb;
      stg_len_d = comb_len;
    end
    if (take2 != '0) begin
      // The finished line left nothing behind, so the new words start at 0.
      for (int j = 0; j < SECTOR_WORDS; j++)
        if (j < int'(take2)) stg_d[j] = in_data[j];
      stg_len_d = ($bits(stg_len_d))'(take2);
    end
  end

  assign in_ready = starting || cont_ok || next_ok;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active_q  <= 1'b0;
      sec_q     <= '0;
      need_q    <= '0;
      stg_len_q <= '0;
      mask_q    <= '0;
      laddr_q   <= '0;
      tag_q     <= '0;
      stg_q     <= '0;
    end else begin
      stg_q     <= stg_d;
      stg_len_q <= stg_len_d;
      if (next_ok && in_valid) begin
        active_q <= 1'b1;
        mask_q   <= in_mask;
        laddr_q  <= in_laddr;
        tag_q    <= in_tag;
        sec_q    <= '0;
        need_q   <= next_need - nnz_t'(take2);
      end else if (c_valid) begin
        active_q <= !last_sec;
        mask_q   <= c_mask;
        laddr_q  <= c_laddr;
        tag_q    <= c_tag;
        sec_q    <= emit ? c_sec + 2'd1 : c_sec;
        need_q   <= c_need - nnz_t'(take);
      end
    end
  end

  // Stage-1 register.
  sector_t         s1_win;
  seg_t            s1_seg;
  logic [7:0][2:0] s1_sel;
  logic [1:0]      s1_sec;
  laddr_t          s1_laddr;
  tag_t            s1_tag;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) s1_valid <= 1'b0;
    else if (adv) s1_valid <= emit;
  end
  always_ff @(posedge clk) begin
    if (emit) begin
      for (int j = 0; j < SECTOR_WORDS; j++) s1_win[j] <= comb[j];
      s1_seg   <= seg;
      s1_sel   <= sel;
      s1_sec   <= c_sec;
      s1_laddr <= c_laddr;
      s1_tag   <= c_tag;
    end
  end

  // ---------------- stage 2: bubble-expanding shifter ----------------
  sector_t expd;
  always_comb begin
    expd = '0;
    for (int i = 0; i < SECTOR_WORDS; i++)
      if (s1_seg[i]) expd[i] = s1_win[s1_sel[i]];
  end

  logic o_valid_q;
  assign adv = !o_valid_q || out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      o_valid_q <= 1'b0;
      out_data  <= '0;
      out_sec   <= '0;
      out_laddr <= '0;
      out_tag   <= '0;
    end else if (adv) begin
      o_valid_q <= s1_valid;
      if (s1_valid) begin
        out_data  <= expd;
        out_sec   <= s1_sec;
        out_laddr <= s1_laddr;
        out_tag   <= s1_tag;
      end
    end
  end

  assign out_valid = o_valid_q;
  assign out_last  = (out_sec == 2'd3);

endmodule
