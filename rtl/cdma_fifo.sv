// cdma_fifo: small synchronous FIFO used throughout the engine.
//
// Holds up to DEPTH entries of type T. Write when push and not full; read the
// head (always visible on rd_data when not empty) and drop it with pop.
// full/empty and the entry count are registered. This helper is this design's
// own; the paper names no FIFOs.
module cdma_fifo #(
  parameter type T     = logic [7:0],
  parameter int  DEPTH = 4
) (
  input  logic clk,
  input  logic rst_n,
  input  logic push,
  input  T     wr_data,
  input  logic pop,
  output T     rd_data,
  output logic full,
  output logic empty,
  output logic [$clog2(DEPTH+1)-1:0] count
);

  localparam int AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  T mem [DEPTH];
  logic [AW-1:0] wp, rp;

  function automatic logic [AW-1:0] inc(logic [AW-1:0] p);
    return (int'(p) == DEPTH - 1) ? '0 : p + 1'b1;
  endfunction

  assign rd_data = mem[rp];
  assign full    = (int'(count) == DEPTH);
  assign empty   = (count == '0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp    <= '0;
      rp    <= '0;
      count <= '0;
    end else begin
      if (push && !full) wp <= inc(wp);
      if (pop && !empty) rp <= inc(rp);
      count <= count + ($bits(count))'(push && !full) - ($bits(count))'(pop && !empty);
    end
  end

  always_ff @(posedge clk)
    if (push && !full) mem[wp] <= wr_data;

  // The users never push into a full FIFO or pop an empty one.
  always_ff @(posedge clk) begin
      assert (!(push && full))  else $error("cdma_fifo: push while full");
      assert (!(pop && empty))  else $error("cdma_fifo: pop while empty");
    end

endmodule
