// cdma_xbar: the slice of the GPU crossbar that connects the DMA engine with
// the memory-controller partitions.
//
// Requests from the DMA engine go to the partition named by req_dst (a plain
// demultiplexer; a multi-flit write packet is sent flit after flit to one
// partition). Responses from the NUM_PORTS partitions are merged onto the
// single DMA port by a round-robin arbiter that keeps its grant until the
// granted packet's last flit has passed, so packets never interleave.
// Purely combinational apart from the arbiter state; one flit per cycle each
// way. The paper only names the crossbar; this minimal structure is this
// design's choice.
module cdma_xbar
  import cdma_pkg::*;
#(
  parameter int NUM_PORTS = NUM_MC
) (
  input  logic                       clk,
  input  logic                       rst_n,
  // DMA engine side
  input  logic                       req_valid,
  output logic                       req_ready,
  input  xreq_t                      req,
  input  logic [$clog2(NUM_PORTS)-1:0] req_dst,
  output logic                       rsp_valid,
  input  logic                       rsp_ready,
  output xrsp_t                      rsp,
  // memory-partition side
  output logic [NUM_PORTS-1:0]       p_req_valid,
  input  logic [NUM_PORTS-1:0]       p_req_ready,
  output xreq_t                      p_req,
  input  logic [NUM_PORTS-1:0]       p_rsp_valid,
  output logic [NUM_PORTS-1:0]       p_rsp_ready,
  input  xrsp_t [NUM_PORTS-1:0]      p_rsp
);

  localparam int PW = $clog2(NUM_PORTS);

  // ---------------- requests: demultiplex ----------------
  always_comb begin
    p_req_valid = '0;
    p_req_valid[req_dst] = req_valid;
  end
  assign p_req     = req;
  assign req_ready = p_req_ready[req_dst];

  // ---------------- responses: round-robin with packet lock ----------------
  logic [PW-1:0] last_q;      // most recently granted port
  logic [PW-1:0] lock_port;
  logic          locked;
  logic [PW-1:0] grant;
  logic          any;

  always_comb begin
    logic [PW:0] cand;
    grant = last_q;
    any   = 1'b0;
    cand  = '0;
    if (locked) begin
      grant = lock_port;
      any   = p_rsp_valid[lock_port];
    end else begin
      // Search the ports after the last granted one, wrapping around.
      for (int k = 1; k <= NUM_PORTS; k++) begin
        cand = (PW+1)'((int'(last_q) + k) % NUM_PORTS);
        if (!any && p_rsp_valid[cand[PW-1:0]]) begin
          grant = cand[PW-1:0];
          any   = 1'b1;
        end
      end
    end
  end

  assign rsp_valid = any;
  assign rsp       = p_rsp[grant];

  always_comb begin
    p_rsp_ready = '0;
    p_rsp_ready[grant] = any && rsp_ready;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      last_q    <= '0;
      lock_port <= '0;
      locked    <= 1'b0;
    end else if (rsp_valid && rsp_ready) begin
      last_q    <= grant;
      lock_port <= grant;
      locked    <= !rsp.last;
    end
  end

endmodule
