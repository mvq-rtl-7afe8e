// tb_mask_lut: every 16-bit value with exactly four ones, taken in
// increasing order, must be returned for its rank as code; codes past
// C(16,4)-1 = 1819 must give an all-zero mask.
module tb_mask_lut;
  logic [10:0] code;
  logic [15:0] mask;
  int checks = 0, failures = 0;

  mask_lut #(.MGRP(16), .NKEEP(4)) dut (.code, .mask);

  initial begin
    int rank;
    rank = 0;
    for (int v = 0; v < 65536; v++) begin
      if ($countones(16'(v)) == 4) begin
        code = 11'(rank);
        #1;
        checks++;
        if (mask != 16'(v)) begin
          failures++;
          if (failures < 5) $display("code %0d mask %h exp %h", rank, mask, v);
        end
        rank++;
      end
    end
    checks++;
    if (rank != 1820) failures++;
    for (int c = 1820; c < 2048; c++) begin
      code = 11'(c);
      #1;
      checks++;
      if (mask != 0) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
