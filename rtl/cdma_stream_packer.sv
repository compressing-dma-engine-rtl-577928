// cdma_stream_packer: packs compressed lines back to back into the PCIe
// transmit stream.
//
// Each compressed line is the ZVC format of the paper: its 32-bit mask
// followed by its non-zero words (or, for an uncompressed copy, just its 32
// words). Lines have different lengths, so to turn the compression into fewer
// PCIe bytes they are packed with no gaps into 32B (8-word) transfer units.
// Items of 0..8 words come in (i_*); a 16-word accumulator appends them
// (shift-and-append) and a full 8-word unit is sent out (o_*) as soon as more
// than 8 words are waiting; an item can enter in the same cycle, so 8-word
// items pass at one unit per cycle. The item marked i_last ends the transfer: what is
// left is sent as a final, zero-padded unit with o_last = 1. words counts the
// meaningful words of the transfer (its compressed size is 4 x words bytes);
// clear resets it. The 32B unit width and the packing rule are this design's;
// the paper only says compressed data is streamed out over PCIe.
module cdma_stream_packer
  import cdma_pkg::*;
(
  input  logic    clk,
  input  logic    rst_n,
  input  logic    clear,
  input  logic    i_valid,
  output logic    i_ready,
  input  sector_t i_words,
  input  cnt8_t   i_cnt,
  input  logic    i_last,
  output logic    o_valid,
  input  logic    o_ready,
  output sector_t o_data,
  output logic    o_last,
  output logic [BYTES_W-1:0] words
);

  localparam int ACC = 2 * SECTOR_WORDS;

  logic [ACC-1:0][WORD_W-1:0] acc_q, acc_d;
  logic [$clog2(ACC+1)-1:0]   len_q, len_d;
  logic                       flush_q;
  logic                       o_fire, i_fire;

  // A full unit leaving in the same cycle makes room for a new item.
  assign i_ready = !flush_q && ((int'(len_q) <= SECTOR_WORDS) || o_ready);
  assign i_fire  = i_valid && i_ready;
  assign o_valid = (int'(len_q) > SECTOR_WORDS) || (flush_q && len_q != '0);
  assign o_last  = flush_q && (int'(len_q) <= SECTOR_WORDS);
  assign o_fire  = o_valid && o_ready;

  always_comb
    for (int w = 0; w < SECTOR_WORDS; w++)
      o_data[w] = (w < int'(len_q)) ? acc_q[w] : '0;

  always_comb begin
    logic [$clog2(ACC+1)-1:0] base;
    acc_d = acc_q;
    base  = len_q;
    if (o_fire) begin
      for (int p = 0; p < ACC; p++) acc_d[p] = (p + SECTOR_WORDS < ACC) ? acc_q[p + SECTOR_WORDS] : '0;
      base = (int'(len_q) > SECTOR_WORDS) ? len_q - ($bits(len_q))'(SECTOR_WORDS) : '0;
    end
    len_d = base;
    if (i_fire) begin
      for (int p = 0; p < ACC; p++)
        for (int j = 0; j < SECTOR_WORDS; j++)
          if (j < int'(i_cnt) && p == int'(base) + j) acc_d[p] = i_words[j];
      len_d = base + ($bits(len_q))'(i_cnt);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc_q   <= '0;
      len_q   <= '0;
      flush_q <= 1'b0;
      words   <= '0;
    end else begin
      acc_q <= acc_d;
      len_q <= len_d;
      if (i_fire && i_last)      flush_q <= 1'b1;
      else if (o_fire && o_last) flush_q <= 1'b0;
      if (clear)       words <= '0;
      else if (i_fire) words <= words + BYTES_W'(i_cnt);
    end
  end

endmodule
