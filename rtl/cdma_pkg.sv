// cdma_pkg: sizes and packet types shared by the compressing DMA engine.
//
// A word is one 32-bit activation value. The (de)compression datapath works on
// a 32B sector of 8 words per cycle, which is one DRAM burst, and compresses a
// 128B (cache-line sized) window of 4 sectors = 32 words. A compressed line is
// a 32-bit mask (bit i set = word i of the line is non-zero) plus the non-zero
// words in their original order. The 8-word sector, the 4-sector line, the
// 32-bit mask, the six memory controllers and the 70,000-byte DMA buffer
// (200 GB/s x 350 ns) are the paper's numbers; address widths, tag widths and
// the packet formats on the crossbar are this design's own choices.
package cdma_pkg;

  localparam int WORD_W       = 32;                      // one activation value
  localparam int SECTOR_WORDS = 8;                       // 32B sector / DRAM burst
  localparam int LINE_SECTORS = 4;                       // 128B compression window
  localparam int LINE_WORDS   = SECTOR_WORDS * LINE_SECTORS;
  localparam int NUM_MC       = 6;                       // memory controllers, one C unit each
  localparam int LADDR_W      = 27;                      // line address: 12 GB / 128 B
  localparam int BUF_BYTES    = 70000;                   // DMA buffer "B": 200 GB/s x 350 ns
  localparam int BUF_SLOTS    = (BUF_BYTES + 127) / 128; // 547 line slots of 128B
  localparam int TAG_W        = 10;                      // enough to name every buffer slot
  localparam int NLINES_W     = LADDR_W;                 // lines per transfer: up to all of GPU memory
  localparam int BYTES_W      = 34;                      // byte counters: 12 GB plus masks

  typedef logic [WORD_W-1:0]                    word_t;
  typedef logic [SECTOR_WORDS-1:0][WORD_W-1:0]  sector_t;   // word 0 in [0]
  typedef logic [LINE_WORDS-1:0][WORD_W-1:0]    line_t;
  typedef logic [LINE_WORDS-1:0]                mask_t;     // bit i = word i non-zero
  typedef logic [SECTOR_WORDS-1:0]              seg_t;      // one sector's mask segment
  typedef logic [$clog2(LINE_WORDS+1)-1:0]      nnz_t;      // 0..32
  typedef logic [$clog2(SECTOR_WORDS+1)-1:0]    cnt8_t;     // 0..8
  typedef logic [LADDR_W-1:0]                   laddr_t;
  typedef logic [TAG_W-1:0]                     tag_t;
  typedef logic [$clog2(NUM_MC)-1:0]            mcid_t;

  // Request flit, DMA engine -> crossbar -> C unit.
  // Read: one flit, asks the C unit to fetch and (unless raw) compress a line.
  // Write: 1..4 flits carrying one compressed line; mask repeated on each flit.
  typedef struct packed {
    logic    wr;      // 1 = write (decompress into DRAM), 0 = read (compress)
    logic    raw;     // uncompressed copy: every word treated as non-zero
    laddr_t  laddr;   // 128B line address in GPU memory
    tag_t    tag;     // returned with the response
    mask_t   mask;    // write only: the line's mask
    logic [1:0] idx;  // flit number inside the line
    logic    last;    // last flit of the packet
    sector_t data;    // write only: up to 8 payload words
  } xreq_t;

  // Response flit, C unit -> crossbar -> DMA engine.
  // Read data: 1..4 flits of one compressed line. Write ack: one flit, ack = 1.
  typedef struct packed {
    logic    ack;     // write completed (no data)
    tag_t    tag;
    mask_t   mask;
    nnz_t    nnz;     // number of payload words in the line
    logic [1:0] idx;
    logic    last;
    sector_t data;
  } xrsp_t;

  // Flits needed on the crossbar for a line with n payload words (at least one,
  // so that an all-zero line still delivers its mask).
  function automatic logic [2:0] flits_for(nnz_t n);
    logic [2:0] f;
    f = 3'((n + nnz_t'(SECTOR_WORDS - 1)) >> 3);
    return (f == 3'd0) ? 3'd1 : f;
  endfunction

endpackage
