// tb_zvc_prefix_sum: exhaustive check of the 8-word zero-count prefix sum.
// All 256 non-zero patterns are applied; for each, the zeros in front of every
// word and the non-zero count are recomputed by a plain loop and compared.
module tb_zvc_prefix_sum;
  import cdma_pkg::*;

  seg_t            nz;
  logic [7:0][2:0] zb;
  cnt8_t           nnz;
  int checks = 0, failures = 0;

  zvc_prefix_sum dut (.nz(nz), .zeros_before(zb), .nnz(nnz));

  initial begin
    for (int v = 0; v < 256; v++) begin
      int zeros, ones;
      nz = seg_t'(v);
      #1;
      zeros = 0;
      ones  = 0;
      for (int i = 0; i < 8; i++) begin
        checks++;
        if (int'(zb[i]) != zeros) begin
          failures++;
          $display("FAIL nz=%b word %0d zeros_before=%0d expected %0d", nz, i, zb[i], zeros);
        end
        if (nz[i]) ones++; else zeros++;
      end
      checks++;
      if (int'(nnz) != ones) begin
        failures++;
        $display("FAIL nz=%b nnz=%0d expected %0d", nz, nnz, ones);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
