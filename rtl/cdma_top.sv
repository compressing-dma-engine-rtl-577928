// cdma_top: the compressing DMA (cDMA) subsystem of one GPU.
//
// The cDMA engine (with its buffer B) sits at the PCIe interface; the six
// GPU memory controllers each get a (de)compression unit C; a crossbar slice
// connects them, as in the paper's architecture figure. Offloaded activation
// lines are compressed next to DRAM, cross the crossbar compressed, are
// reassembled in B and leave over PCIe packed back to back; prefetched lines
// travel the other way and are decompressed just before they are written to
// DRAM.
//
// What lies outside this design comes out as ports: the six memory
// controllers / GPU DRAM (per partition a sector read port with in-order
// returns and a sector write port), the PCIe link (32B transmit and receive
// streams) and the command interface the driver would program.
module cdma_top
  import cdma_pkg::*;
#(
  parameter int SLOTS  = BUF_SLOTS,   // buffer B: 547 x 128B = 70KB
  parameter int LINE_Q = 16           // lines in flight in each C unit
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // command / completion
  input  logic                 cmd_valid,
  output logic                 cmd_ready,
  input  logic                 cmd_dir,
  input  logic                 cmd_raw,
  input  laddr_t               cmd_laddr,
  input  logic [NLINES_W-1:0]  cmd_nlines,
  output logic                 done_valid,
  output logic [BYTES_W-1:0]   done_bytes,
  // PCIe link
  output logic                 tx_valid,
  input  logic                 tx_ready,
  output sector_t              tx_data,
  output logic                 tx_last,
  input  logic                 rx_valid,
  output logic                 rx_ready,
  input  sector_t              rx_data,
  // memory controllers (one port set per partition)
  output logic    [NUM_MC-1:0]              mc_rd_valid,
  input  logic    [NUM_MC-1:0]              mc_rd_ready,
  output logic    [NUM_MC-1:0][LADDR_W+1:0] mc_rd_addr,
  input  logic    [NUM_MC-1:0]              mc_rd_rsp_valid,
  input  sector_t [NUM_MC-1:0]              mc_rd_rsp_data,
  output logic    [NUM_MC-1:0]              mc_wr_valid,
  input  logic    [NUM_MC-1:0]              mc_wr_ready,
  output logic    [NUM_MC-1:0][LADDR_W+1:0] mc_wr_addr,
  output sector_t [NUM_MC-1:0]              mc_wr_data,
  // status
  output logic [$clog2(SLOTS+1)-1:0] buf_used,
  output logic                 buf_full_stall
);

  logic  x_req_valid, x_req_ready, x_rsp_valid, x_rsp_ready;
  xreq_t x_req;
  mcid_t x_req_dst;
  xrsp_t x_rsp;

  logic [NUM_MC-1:0] p_req_valid, p_req_ready, p_rsp_valid, p_rsp_ready;
  xreq_t             p_req;
  xrsp_t [NUM_MC-1:0] p_rsp;

  cdma_engine #(.SLOTS(SLOTS)) u_engine (
    .clk, .rst_n,
    .cmd_valid, .cmd_ready, .cmd_dir, .cmd_raw, .cmd_laddr, .cmd_nlines,
    .done_valid, .done_bytes,
    .x_req_valid, .x_req_ready, .x_req, .x_req_dst,
    .x_rsp_valid, .x_rsp_ready, .x_rsp,
    .tx_valid, .tx_ready, .tx_data, .tx_last,
    .rx_valid, .rx_ready, .rx_data,
    .buf_used, .buf_full_stall);

  cdma_xbar #(.NUM_PORTS(NUM_MC)) u_xbar (
    .clk, .rst_n,
    .req_valid(x_req_valid), .req_ready(x_req_ready), .req(x_req), .req_dst(x_req_dst),
    .rsp_valid(x_rsp_valid), .rsp_ready(x_rsp_ready), .rsp(x_rsp),
    .p_req_valid, .p_req_ready, .p_req, .p_rsp_valid, .p_rsp_ready, .p_rsp);

  for (genvar g = 0; g < NUM_MC; g++) begin : g_c
    cdma_cunit #(.LINE_Q(LINE_Q)) u_c (
      .clk, .rst_n,
      .req_valid(p_req_valid[g]), .req_ready(p_req_ready[g]), .req(p_req),
      .rsp_valid(p_rsp_valid[g]), .rsp_ready(p_rsp_ready[g]), .rsp(p_rsp[g]),
      .rd_valid(mc_rd_valid[g]), .rd_ready(mc_rd_ready[g]), .rd_addr(mc_rd_addr[g]),
      .rd_rsp_valid(mc_rd_rsp_valid[g]), .rd_rsp_data(mc_rd_rsp_data[g]),
      .wr_valid(mc_wr_valid[g]), .wr_ready(mc_wr_ready[g]), .wr_addr(mc_wr_addr[g]),
      .wr_data(mc_wr_data[g]));
  end

endmodule
