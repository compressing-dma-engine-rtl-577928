// gpu_dram_model: behavioural model of the GPU memory controllers and their
// DRAM, as seen by the six (de)compression units. Not synthesizable; for
// simulation only.
//
// One sparse memory of 32B sectors is shared by N partition ports. Each port
// takes sector reads (rd_valid/rd_ready) and returns the data LAT cycles
// later, in order, one sector per cycle, without back-pressure; and takes
// sector writes (wr_valid/wr_ready). With stall_en set, ready signals drop at
// random. Inputs are sampled on the rising edge, outputs change on the
// falling edge. reads/writes count the sectors moved; wrong_port counts
// accesses that arrived at a partition other than line address mod N.
module gpu_dram_model
  import cdma_pkg::*;
#(
  parameter int N   = NUM_MC,
  parameter int LAT = 40
) (
  input  logic                         clk,
  input  bit                           stall_en,
  input  logic    [N-1:0]              rd_valid,
  output logic    [N-1:0]              rd_ready,
  input  logic    [N-1:0][LADDR_W+1:0] rd_addr,
  output logic    [N-1:0]              rd_rsp_valid,
  output sector_t [N-1:0]              rd_rsp_data,
  input  logic    [N-1:0]              wr_valid,
  output logic    [N-1:0]              wr_ready,
  input  logic    [N-1:0][LADDR_W+1:0] wr_addr,
  input  sector_t [N-1:0]              wr_data
);

  sector_t mem [longint];
  longint  cycle = 0;
  int      reads = 0, writes = 0, wrong_port = 0;

  typedef struct {
    longint addr;
    longint due;
  } pend_t;
  pend_t q [N][$];

  function automatic sector_t peek(longint a);
    return mem.exists(a) ? mem[a] : '0;
  endfunction

  initial begin
    rd_ready     = '0;
    wr_ready     = '0;
    rd_rsp_valid = '0;
    rd_rsp_data  = '0;
  end

  always @(posedge clk) begin
    cycle <= cycle + 1;
    for (int p = 0; p < N; p++) begin
      if (rd_valid[p] && rd_ready[p]) begin
        pend_t e;
        e.addr = longint'(rd_addr[p]);
        e.due  = cycle + LAT;
        q[p].push_back(e);
        reads++;
        if ((rd_addr[p] >> 2) % N != p) wrong_port++;
      end
      if (wr_valid[p] && wr_ready[p]) begin
        mem[longint'(wr_addr[p])] = wr_data[p];
        writes++;
        if ((wr_addr[p] >> 2) % N != p) wrong_port++;
      end
    end
  end

  always @(negedge clk) begin
    for (int p = 0; p < N; p++) begin
      rd_ready[p] = stall_en ? ($urandom() % 4 != 0) : 1'b1;
      wr_ready[p] = stall_en ? ($urandom() % 4 != 0) : 1'b1;
      rd_rsp_valid[p] = 1'b0;
      if (q[p].size() != 0 && q[p][0].due <= cycle) begin
        pend_t e;
        e = q[p].pop_front();
        rd_rsp_valid[p] = 1'b1;
        rd_rsp_data[p]  = peek(e.addr);
      end
    end
  end

endmodule
