// cdma_cunit: the (de)compression unit placed beside one GPU memory controller
// (box "C" of the paper's architecture figure).
//
// Read direction (offload, GPU -> CPU): a read request names a 128B line. The
// unit fetches its four 32B sectors from the memory controller, compresses
// them with zvc_compressor and returns the compressed line over the crossbar
// as 1..4 response flits (mask + non-zero words; one flit for an all-zero
// line). Compressing here, before the crossbar, is the paper's point: the
// crossbar then carries compressed data, so the DMA engine can be fed at
// PCIe rate x compression ratio without a wider crossbar port.
// Write direction (prefetch, CPU -> GPU): a write packet carries a compressed
// line; zvc_decompressor expands it into four sectors that are written to the
// memory controller, and a one-flit ack with the packet's tag is returned.
// With raw = 1 a read returns the line uncompressed (mask all ones); a raw
// write simply carries an all-ones mask.
//
// Interfaces (all valid/ready, except rd_rsp which cannot be stalled):
//   req  : xreq_t flits from the crossbar.
//   rsp  : xrsp_t flits to the crossbar.
//   rd   : sector read requests to the memory controller (sector address =
//          line address * 4 + sector); rd_rsp returns the sectors in order.
//   wr   : sector writes to the memory controller.
// Flow control: a read is accepted only while fewer than LINE_Q lines are in
// flight inside the unit, so every compressed line has a place in the output
// queue and the compressor never has to stall. Acks have priority over read
// data at packet boundaries. One unit must supply about 1/6 of a line per
// cycle while each line spends roughly DRAM latency + 10 cycles in the unit,
// so LINE_Q = 16 keeps the unit at full rate for read latencies up to about
// 85 cycles; a memory system with a longer latency needs a larger LINE_Q.
// The queueing and flow control are this design's; the paper gives only the
// unit's function and its place.
module cdma_cunit
  import cdma_pkg::*;
#(
  parameter int LINE_Q = 16         // lines in flight in the unit (covers the DRAM latency)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // crossbar side
  input  logic                 req_valid,
  output logic                 req_ready,
  input  xreq_t                req,
  output logic                 rsp_valid,
  input  logic                 rsp_ready,
  output xrsp_t                rsp,
  // memory-controller side
  output logic                 rd_valid,
  input  logic                 rd_ready,
  output logic [LADDR_W+1:0]   rd_addr,
  input  logic                 rd_rsp_valid,
  input  sector_t              rd_rsp_data,
  output logic                 wr_valid,
  input  logic                 wr_ready,
  output logic [LADDR_W+1:0]   wr_addr,
  output sector_t              wr_data
);

  typedef struct packed {
    laddr_t laddr;
    tag_t   tag;
    logic   raw;
  } rdq_t;

  typedef struct packed {
    tag_t  tag;
    logic  raw;
  } tagq_t;

  typedef struct packed {
    tag_t  tag;
    mask_t mask;
    nnz_t  nnz;
    line_t line;
  } cline_t;

  // ---------------- read path ----------------
  logic [$clog2(LINE_Q+1)-1:0] inflight;
  logic  rd_accept, line_sent;
  rdq_t  rq_head;
  logic  rq_full, rq_empty, rq_pop;
  tagq_t tq_head;
  logic  tq_full, tq_empty, tq_pop, tq_push;
  logic [1:0] iss_sec, rsp_sec;

  assign rd_accept = req_valid && req_ready && !req.wr;

  cdma_fifo #(.T(rdq_t), .DEPTH(LINE_Q)) u_rq (
    .clk, .rst_n, .push(rd_accept), .wr_data('{laddr: req.laddr, tag: req.tag, raw: req.raw}),
    .pop(rq_pop), .rd_data(rq_head), .full(rq_full), .empty(rq_empty), .count());

  // Sector reads of the head line, one per cycle.
  assign rd_valid = !rq_empty && !(iss_sec == 2'd0 && tq_full);
  assign rd_addr  = {rq_head.laddr, iss_sec};
  assign rq_pop   = rd_valid && rd_ready && (iss_sec == 2'd3);
  assign tq_push  = rd_valid && rd_ready && (iss_sec == 2'd0);

  cdma_fifo #(.T(tagq_t), .DEPTH(LINE_Q)) u_tq (
    .clk, .rst_n, .push(tq_push), .wr_data('{tag: rq_head.tag, raw: rq_head.raw}),
    .pop(tq_pop), .rd_data(tq_head), .full(tq_full), .empty(tq_empty), .count());

  assign tq_pop = rd_rsp_valid && (rsp_sec == 2'd3);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      iss_sec <= '0;
      rsp_sec <= '0;
    end else begin
      if (rd_valid && rd_ready) iss_sec <= iss_sec + 2'd1;
      if (rd_rsp_valid)         rsp_sec <= rsp_sec + 2'd1;
    end
  end

  logic   c_valid;
  mask_t  c_mask;
  nnz_t   c_nnz;
  line_t  c_line;
  tag_t   c_tag;
  logic   c_raw;

  zvc_compressor u_comp (
    .clk, .rst_n,
    .in_valid(rd_rsp_valid), .in_data(rd_rsp_data), .in_raw(tq_head.raw), .in_tag(tq_head.tag),
    .out_valid(c_valid), .out_mask(c_mask), .out_nnz(c_nnz), .out_line(c_line),
    .out_tag(c_tag), .out_raw(c_raw));

  cline_t lq_head;
  logic   lq_full, lq_empty;

  cdma_fifo #(.T(cline_t), .DEPTH(LINE_Q)) u_lq (
    .clk, .rst_n, .push(c_valid),
    .wr_data('{tag: c_tag, mask: c_mask, nnz: c_nnz, line: c_line}),
    .pop(line_sent), .rd_data(lq_head), .full(lq_full), .empty(lq_empty), .count());

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) inflight <= '0;
    else inflight <= inflight + ($bits(inflight))'(rd_accept) - ($bits(inflight))'(line_sent);
  end

  // ---------------- write path ----------------
  logic       d_in_valid, d_in_ready;
  logic       d_valid, d_ready, d_last;
  sector_t    d_data;
  logic [1:0] d_sec;
  laddr_t     d_laddr;
  tag_t       d_tag;
  logic       aq_full, aq_empty, aq_pop;
  tag_t       aq_head;

  assign d_in_valid = req_valid && req.wr;

  zvc_decompressor u_decomp (
    .clk, .rst_n,
    .in_valid(d_in_valid), .in_ready(d_in_ready), .in_first(req.idx == 2'd0),
    .in_mask(req.mask), .in_laddr(req.laddr), .in_tag(req.tag), .in_data(req.data),
    .out_valid(d_valid), .out_ready(d_ready), .out_data(d_data), .out_sec(d_sec),
    .out_last(d_last), .out_laddr(d_laddr), .out_tag(d_tag));

  assign wr_valid = d_valid && !(d_last && aq_full);
  assign wr_addr  = {d_laddr, d_sec};
  assign wr_data  = d_data;
  assign d_ready  = wr_ready && !(d_last && aq_full);

  cdma_fifo #(.T(tag_t), .DEPTH(4)) u_aq (
    .clk, .rst_n, .push(d_valid && d_ready && d_last), .wr_data(d_tag),
    .pop(aq_pop), .rd_data(aq_head), .full(aq_full), .empty(aq_empty), .count());

  assign req_ready = req.wr ? d_in_ready : (int'(inflight) < LINE_Q);

  // ---------------- response serializer ----------------
  logic [1:0] fidx;          // next flit of the head line
  logic       send_ack;
  logic [2:0] nflits;

  assign nflits   = flits_for(lq_head.nnz);
  assign send_ack = (fidx == 2'd0) && !aq_empty;

  always_comb begin
    rsp = '0;
    if (send_ack) begin
      rsp.ack  = 1'b1;
      rsp.tag  = aq_head;
      rsp.last = 1'b1;
    end else begin
      rsp.tag  = lq_head.tag;
      rsp.mask = lq_head.mask;
      rsp.nnz  = lq_head.nnz;
      rsp.idx  = fidx;
      rsp.last = ({1'b0, fidx} == nflits - 3'd1);
      for (int w = 0; w < SECTOR_WORDS; w++) rsp.data[w] = lq_head.line[int'(fidx)*SECTOR_WORDS + w];
    end
  end

  assign rsp_valid = send_ack || !lq_empty;
  assign aq_pop    = rsp_valid && rsp_ready && send_ack;
  assign line_sent = rsp_valid && rsp_ready && !send_ack && rsp.last;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) fidx <= '0;
    else if (rsp_valid && rsp_ready && !send_ack) fidx <= rsp.last ? 2'd0 : fidx + 2'd1;
  end

  // The credit scheme keeps the compressed-line queue from overflowing.
  // The credit scheme also bounds the request and tag queues, and read data
  // only ever returns for a line whose tag was queued.
  always_ff @(posedge clk) begin
    assert (!(c_valid && lq_full))      else $error("cdma_cunit: line queue overflow");
    assert (!(rd_accept && rq_full))    else $error("cdma_cunit: request queue overflow");
    assert (!(rd_rsp_valid && tq_empty)) else $error("cdma_cunit: read data without a request");
    assert (!(c_valid && c_raw && c_nnz != nnz_t'(LINE_WORDS)))
      else $error("cdma_cunit: raw line not returned whole");
  end

endmodule
