// cdma_engine: the compressing DMA engine at the GPU's PCIe interface.
//
// One command moves `nlines` consecutive 128B lines between GPU memory and the
// PCIe link (the hardware side of a compressed memcpy):
//   offload  (dir = 0): line reads are sent over the crossbar to the memory
//            partitions, whose C units return the lines compressed. Every read
//            first takes a slot in the 70KB buffer B (cdma_buffer); while free
//            slots remain, reads keep being issued, so enough requests are in
//            flight to keep PCIe busy even when lines compress well, and the
//            buffer still has room if they do not. Lines leave B in address
//            order and are packed into the PCIe transmit stream.
//   prefetch (dir = 1): the PCIe receive stream is split into line packets
//            (cdma_stream_unpacker) and written to the partitions, whose C
//            units decompress them into GPU memory; the command ends when
//            every line's write ack has returned.
// raw = 1 makes either direction an ordinary, uncompressed copy.
// At the end done pulses with the compressed size of the region in bytes
// (mask + non-zero words, 4 bytes each), the value the paper's software
// interface returns.
//
// Lines are interleaved over the NUM_MC partitions line by line
// (partition = line address mod NUM_MC); this mapping, the command interface
// and the packet formats are this design's choices. One command runs at a
// time; cmd_ready is high when idle. A command of zero lines completes at
// once with done_bytes = 0.
module cdma_engine
  import cdma_pkg::*;
#(
  parameter int SLOTS = BUF_SLOTS
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // command / completion
  input  logic                 cmd_valid,
  output logic                 cmd_ready,
  input  logic                 cmd_dir,        // 0 offload GPU->CPU, 1 prefetch CPU->GPU
  input  logic                 cmd_raw,        // 1 = no compression
  input  laddr_t               cmd_laddr,
  input  logic [NLINES_W-1:0]  cmd_nlines,
  output logic                 done_valid,
  output logic [BYTES_W-1:0]   done_bytes,
  // crossbar port
  output logic                 x_req_valid,
  input  logic                 x_req_ready,
  output xreq_t                x_req,
  output mcid_t                x_req_dst,
  input  logic                 x_rsp_valid,
  output logic                 x_rsp_ready,
  input  xrsp_t                x_rsp,
  // PCIe link, 32B units
  output logic                 tx_valid,
  input  logic                 tx_ready,
  output sector_t              tx_data,
  output logic                 tx_last,
  input  logic                 rx_valid,
  output logic                 rx_ready,
  input  sector_t              rx_data,
  // status
  output logic [$clog2(SLOTS+1)-1:0] buf_used,
  output logic                 buf_full_stall   // a read waits for a free slot
);

  typedef enum logic [1:0] {IDLE, OFFLOAD, PREFETCH} state_e;
  state_e state;

  logic                raw_q;
  laddr_t              addr_q;        // next line to request / write
  mcid_t               mc_q;          // its partition
  logic [NLINES_W-1:0] nlines_q;
  logic [NLINES_W-1:0] issued_q;      // offload: reads sent; prefetch: packets sent
  logic [NLINES_W-1:0] drained_q;     // offload: lines handed to the packer
  logic [NLINES_W-1:0] acked_q;       // prefetch: write acks received

  assign cmd_ready = (state == IDLE);
  wire cmd_fire = cmd_valid && cmd_ready;

  function automatic mcid_t next_mc(mcid_t m);
    return (int'(m) == NUM_MC - 1) ? '0 : m + 1'b1;
  endfunction

  // ---------------- buffer B ----------------
  logic    alloc_ready, alloc;
  tag_t    alloc_tag;
  logic    b_valid, b_ready, b_line_end;
  sector_t b_words;
  cnt8_t   b_cnt;

  cdma_buffer #(.SLOTS(SLOTS)) u_buf (
    .clk, .rst_n,
    .alloc_ready, .alloc, .alloc_tag,
    .w_valid(x_rsp_valid && x_rsp_ready && !x_rsp.ack), .w(x_rsp),
    .raw_mode(raw_q),
    .o_valid(b_valid), .o_ready(b_ready), .o_words(b_words), .o_cnt(b_cnt),
    .o_line_end(b_line_end), .used(buf_used));

  // ---------------- PCIe packer ----------------
  logic p_last;
  logic [BYTES_W-1:0] tx_words;
  assign p_last = b_line_end && (drained_q == nlines_q - 1'b1);

  cdma_stream_packer u_pack (
    .clk, .rst_n, .clear(cmd_fire),
    .i_valid(b_valid && state == OFFLOAD), .i_ready(b_ready), .i_words(b_words),
    .i_cnt(b_cnt), .i_last(p_last),
    .o_valid(tx_valid), .o_ready(tx_ready), .o_data(tx_data), .o_last(tx_last),
    .words(tx_words));

  // ---------------- PCIe unpacker ----------------
  logic       u_valid, u_first, u_last, u_done, u_busy;
  mask_t      u_mask;
  logic [1:0] u_idx;
  sector_t    u_data;
  logic [BYTES_W-1:0] rx_words;

  cdma_stream_unpacker u_unpack (
    .clk, .rst_n,
    .start(cmd_fire && cmd_dir), .nlines(cmd_nlines), .raw(cmd_raw),
    .busy(u_busy), .done(u_done),
    .i_valid(rx_valid), .i_ready(rx_ready), .i_data(rx_data),
    .o_valid(u_valid), .o_ready(x_req_ready && state == PREFETCH),
    .o_first(u_first), .o_last(u_last), .o_mask(u_mask), .o_idx(u_idx), .o_data(u_data),
    .words(rx_words));

  // ---------------- crossbar requests ----------------
  logic rd_issue;
  assign rd_issue = (state == OFFLOAD) && (issued_q != nlines_q);
  assign alloc    = rd_issue && alloc_ready && x_req_ready;
  assign buf_full_stall = rd_issue && !alloc_ready;

  always_comb begin
    x_req       = '0;
    x_req.laddr = addr_q;
    x_req.raw   = raw_q;
    x_req_dst   = mc_q;
    if (state == PREFETCH) begin
      x_req_valid = u_valid;
      x_req.wr    = 1'b1;
      x_req.tag   = tag_t'(issued_q);
      x_req.mask  = u_mask;
      x_req.idx   = u_idx;
      x_req.last  = u_last;
      x_req.data  = u_data;
    end else begin
      x_req_valid = rd_issue && alloc_ready;
      x_req.tag   = alloc_tag;
      x_req.last  = 1'b1;
    end
  end

  assign x_rsp_ready = 1'b1;       // buffer space was reserved at issue

  wire req_line_done = x_req_valid && x_req_ready && x_req.last;
  wire ack_fire      = x_rsp_valid && x_rsp.ack;

  // ---------------- control ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= IDLE;
      raw_q      <= 1'b0;
      addr_q     <= '0;
      mc_q       <= '0;
      nlines_q   <= '0;
      issued_q   <= '0;
      drained_q  <= '0;
      acked_q    <= '0;
      done_valid <= 1'b0;
      done_bytes <= '0;
    end else begin
      done_valid <= 1'b0;
      case (state)
        IDLE: if (cmd_fire && cmd_nlines == '0) begin
          done_valid <= 1'b1;      // empty copy: nothing to move
          done_bytes <= '0;
        end else if (cmd_fire) begin
          state     <= cmd_dir ? PREFETCH : OFFLOAD;
          raw_q     <= cmd_raw;
          addr_q    <= cmd_laddr;
          mc_q      <= mcid_t'(cmd_laddr % LADDR_W'(NUM_MC));
          nlines_q  <= cmd_nlines;
          issued_q  <= '0;
          drained_q <= '0;
          acked_q   <= '0;
        end
        OFFLOAD: begin
          if (req_line_done) begin
            issued_q <= issued_q + 1'b1;
            addr_q   <= addr_q + 1'b1;
            mc_q     <= next_mc(mc_q);
          end
          if (b_valid && b_ready && b_line_end) drained_q <= drained_q + 1'b1;
          if (tx_valid && tx_ready && tx_last) begin
            state      <= IDLE;
            done_valid <= 1'b1;
            done_bytes <= tx_words << 2;
          end
        end
        PREFETCH: begin
          if (req_line_done) begin
            issued_q <= issued_q + 1'b1;
            addr_q   <= addr_q + 1'b1;
            mc_q     <= next_mc(mc_q);
          end
          if (ack_fire) acked_q <= acked_q + 1'b1;
          if (ack_fire && acked_q == nlines_q - 1'b1) begin
            state      <= IDLE;
            done_valid <= 1'b1;
            done_bytes <= rx_words << 2;
          end
        end
        default: state <= IDLE;
      endcase
    end
  end

  // A prefetch ends only after the unpacker has emitted its last line.
  always_ff @(posedge clk)
    assert (!(state == PREFETCH && ack_fire && acked_q == nlines_q - 1'b1 && u_busy))
      else $error("cdma_engine: prefetch acknowledged before the stream was unpacked");

endmodule
