// cdma_buffer: the DMA engine's staging buffer (box "B" of the paper).
//
// The paper sizes it at the bandwidth-delay product of the reads the engine
// keeps in flight: 200 GB/s x 350 ns = 70,000 bytes. The engine cannot know in
// advance how well a line will compress, so it must be able to hold every
// outstanding line uncompressed; the buffer is therefore organised as SLOTS
// line slots of 128B (ceil(70000/128) = 547 by default), each with its mask
// and word count.
//
// Slots are handed out in order (alloc / alloc_tag) when a line read is sent,
// and the slot number travels with the read as its tag. Response flits may
// come back in any order across memory controllers and are written to their
// slot (w_*). The drain side walks the slots in allocation order, waits until
// the head slot's line is complete, and emits its stream words (the 32-bit
// mask, then the non-zero words; in raw mode just the 32 words) as items of up
// to 8 words, one item per cycle, then frees the slot. Putting the mask in the
// first item lets a line with up to 7 non-zero words leave in one cycle, so
// sparse data drains at one line per cycle. This in-order
// reassembly is this design's choice, needed so that the stream sent over PCIe
// lists the lines in address order.
//
// Interface timing: alloc_ready is high while a slot is free; o_* is a
// valid/ready stream whose data is read combinationally from the slot array.
module cdma_buffer
  import cdma_pkg::*;
#(
  parameter int SLOTS = BUF_SLOTS
) (
  input  logic   clk,
  input  logic   rst_n,
  // slot allocation (read issue)
  output logic   alloc_ready,
  input  logic   alloc,
  output tag_t   alloc_tag,
  // response flits
  input  logic   w_valid,
  input  xrsp_t  w,
  // drain towards the PCIe packer
  input  logic   raw_mode,
  output logic   o_valid,
  input  logic   o_ready,
  output sector_t o_words,
  output cnt8_t  o_cnt,
  output logic   o_line_end,
  output logic [$clog2(SLOTS+1)-1:0] used
);

  localparam int SW = $clog2(SLOTS);

  sector_t data_mem [SLOTS*LINE_SECTORS];
  mask_t   mask_mem [SLOTS];
  nnz_t    nnz_mem  [SLOTS];
  logic [SLOTS-1:0] done_q;

  logic [SW-1:0] tail, head;
  logic [2:0]    item;        // next item of the head line, 0..4

  function automatic logic [SW-1:0] inc(logic [SW-1:0] p);
    return (int'(p) == SLOTS - 1) ? '0 : p + 1'b1;
  endfunction

  assign alloc_ready = (int'(used) < SLOTS);
  assign alloc_tag   = tag_t'(tail);

  // ---------------- write side ----------------
  always_ff @(posedge clk) begin
    if (w_valid) begin
      data_mem[int'(w.tag[SW-1:0]) * LINE_SECTORS + int'(w.idx)] <= w.data;
      if (w.idx == 2'd0) begin
        mask_mem[w.tag[SW-1:0]] <= w.mask;
        nnz_mem[w.tag[SW-1:0]]  <= w.nnz;
      end
    end
  end

  // ---------------- drain side ----------------
  // The line's stream words are S = {mask, p0 .. p(n-1)} (raw: {p0 .. p31}).
  // Item k carries S[8k .. 8k+7]; in compressed mode that is word 7 of payload
  // flit k-1 (or the mask for k = 0) followed by words 0..6 of flit k.
  nnz_t       h_nnz;
  nnz_t       h_total;       // stream words of the head line
  logic [2:0] h_items;       // items of the head line (1..5)
  logic       h_done;
  logic       free_slot;
  nnz_t       words_before;
  sector_t    cur_f, prev_f;

  assign h_nnz   = nnz_mem[head];
  assign h_total = raw_mode ? h_nnz : h_nnz + nnz_t'(1);
  assign h_items = 3'((h_total + nnz_t'(SECTOR_WORDS - 1)) >> 3);
  assign h_done  = done_q[head];

  always_comb begin
    cur_f  = (item < 3'(LINE_SECTORS)) ? data_mem[int'(head) * LINE_SECTORS + int'(item)] : '0;
    prev_f = (item != 3'd0) ? data_mem[int'(head) * LINE_SECTORS + int'(item) - 1] : '0;
    words_before = nnz_t'({item, 3'b000});
    if (raw_mode) begin
      o_words = cur_f;
    end else begin
      o_words[0] = (item == 3'd0) ? mask_mem[head] : prev_f[SECTOR_WORDS-1];
      for (int j = 1; j < SECTOR_WORDS; j++) o_words[j] = cur_f[j-1];
    end
    o_cnt      = (h_total - words_before > nnz_t'(SECTOR_WORDS)) ? cnt8_t'(SECTOR_WORDS)
                                                                : cnt8_t'(h_total - words_before);
    o_line_end = (item == h_items - 3'd1);
  end

  assign o_valid   = (used != '0) && h_done;
  assign free_slot = o_valid && o_ready && o_line_end;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tail   <= '0;
      head   <= '0;
      used   <= '0;
      item   <= '0;
      done_q <= '0;
    end else begin
      if (alloc && alloc_ready) tail <= inc(tail);
      used <= used + ($bits(used))'(alloc && alloc_ready) - ($bits(used))'(free_slot);
      if (w_valid && w.last) done_q[w.tag[SW-1:0]] <= 1'b1;
      if (free_slot) begin
        done_q[head] <= 1'b0;
        head         <= inc(head);
        item         <= 3'd0;
      end else if (o_valid && o_ready) begin
        item <= item + 3'd1;
      end
    end
  end

  always_ff @(posedge clk) begin
      assert (!(alloc && !alloc_ready)) else $error("cdma_buffer: alloc while full");
      assert (!(w_valid && !w.ack && done_q[w.tag[SW-1:0]])) else $error("cdma_buffer: write to a completed slot");
    end

endmodule
