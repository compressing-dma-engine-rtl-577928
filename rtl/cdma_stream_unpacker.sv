// cdma_stream_unpacker: splits the packed PCIe receive stream back into one
// packet per compressed line for the decompression units.
//
// The stream is the one cdma_stream_packer produces: per line a 32-bit mask
// word and then popcount(mask) payload words (no mask word and 32 payload
// words per line in raw mode), packed into 8-word units. A transfer of
// `nlines` lines is started with start; received units go into a 16-word
// accumulator. For each line the unpacker takes the mask word, then emits
// 1..4 packet flits of up to 8 payload words (o_first on the first, o_last on
// the last; an all-zero line is one flit without payload), each flit carrying
// the mask. After the last line the padding of the final unit is dropped and
// done pulses. words counts the stream words consumed (mask + payload), i.e.
// the transfer's compressed size / 4. The format is this design's (see the
// packer); the paper gives the ZVC line format itself.
module cdma_stream_unpacker
  import cdma_pkg::*;
(
  input  logic    clk,
  input  logic    rst_n,
  input  logic    start,
  input  logic [NLINES_W-1:0] nlines,
  input  logic    raw,
  output logic    busy,
  output logic    done,
  // PCIe receive stream
  input  logic    i_valid,
  output logic    i_ready,
  input  sector_t i_data,
  // line packets
  output logic    o_valid,
  input  logic    o_ready,
  output logic    o_first,
  output logic    o_last,
  output mask_t   o_mask,
  output logic [1:0] o_idx,
  output sector_t o_data,
  output logic [BYTES_W-1:0] words
);

  localparam int ACC = 2 * SECTOR_WORDS;

  logic [ACC-1:0][WORD_W-1:0] acc_q, acc_d;
  logic [$clog2(ACC+1)-1:0]   len_q, len_d;
  logic                       raw_q;
  logic [NLINES_W-1:0]        left_q;     // lines still to emit
  logic                       have_mask_q;
  mask_t                      mask_q;
  nnz_t                       rem_q;      // payload words of this line still to emit
  logic [1:0]                 idx_q;

  function automatic nnz_t popcount32(mask_t m);
    nnz_t c;
    c = '0;
    for (int i = 0; i < LINE_WORDS; i++) c = c + nnz_t'(m[i]);
    return c;
  endfunction

  cnt8_t n;          // payload words in the flit being offered
  logic  take_mask;  // consume a mask word this cycle
  logic  o_fire, i_fire;
  logic  finish;
  cnt8_t consumed;

  assign n        = (rem_q > nnz_t'(SECTOR_WORDS)) ? cnt8_t'(SECTOR_WORDS) : cnt8_t'(rem_q);
  // Words leaving in the same cycle make room for a new unit.
  assign i_ready  = busy && !finish && (int'(len_q) - int'(consumed) <= SECTOR_WORDS);
  assign i_fire   = i_valid && i_ready;
  assign take_mask = busy && !have_mask_q && (raw_q || len_q != '0);
  assign o_valid  = busy && have_mask_q && (int'(len_q) >= int'(n));
  assign o_first  = (idx_q == 2'd0);
  assign o_last   = (rem_q <= nnz_t'(SECTOR_WORDS));
  assign o_mask   = mask_q;
  assign o_idx    = idx_q;
  assign o_fire   = o_valid && o_ready;
  assign finish   = o_fire && o_last && (left_q == NLINES_W'(1));

  // Words leaving the accumulator this cycle: a flit's payload or a mask.
  assign consumed = o_fire ? n : (take_mask && !raw_q) ? cnt8_t'(1) : '0;

  always_comb
    for (int w = 0; w < SECTOR_WORDS; w++)
      o_data[w] = (w < int'(n)) ? acc_q[w] : '0;

  always_comb begin
    logic [$clog2(ACC+1)-1:0] base;
    acc_d = acc_q;
    for (int p = 0; p < ACC; p++)
      for (int k = 0; k <= SECTOR_WORDS; k++)
        if (k == int'(consumed)) acc_d[p] = (p + k < ACC) ? acc_q[p + k] : '0;
    base  = len_q - ($bits(len_q))'(consumed);
    len_d = base;
    if (i_fire) begin
      for (int p = 0; p < ACC; p++)
        for (int j = 0; j < SECTOR_WORDS; j++)
          if (p == int'(base) + j) acc_d[p] = i_data[j];
      len_d = base + ($bits(len_q))'(SECTOR_WORDS);
    end
    if (finish) len_d = '0;        // padding after the last line
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy        <= 1'b0;
      done        <= 1'b0;
      acc_q       <= '0;
      len_q       <= '0;
      raw_q       <= 1'b0;
      left_q      <= '0;
      have_mask_q <= 1'b0;
      mask_q      <= '0;
      rem_q       <= '0;
      idx_q       <= '0;
      words       <= '0;
    end else begin
      done <= finish;
      if (start && !busy) begin
        busy        <= (nlines != '0);
        raw_q       <= raw;
        left_q      <= nlines;
        have_mask_q <= 1'b0;
        len_q       <= '0;
        words       <= '0;
      end else begin
        acc_q <= acc_d;
        len_q <= len_d;
        words <= words + BYTES_W'(consumed);
        if (take_mask) begin
          have_mask_q <= 1'b1;
          mask_q      <= raw_q ? '1 : acc_q[0];
          rem_q       <= raw_q ? nnz_t'(LINE_WORDS) : popcount32(acc_q[0]);
          idx_q       <= '0;
        end else if (o_fire) begin
          rem_q <= rem_q - nnz_t'(n);
          idx_q <= idx_q + 2'd1;
          if (o_last) begin
            have_mask_q <= 1'b0;
            left_q      <= left_q - 1'b1;
            if (finish) busy <= 1'b0;
          end
        end
      end
    end
  end

endmodule
