// tb_cascaded_lzc: random 4-of-16 masks, and masks with fewer ones, are
// encoded; positions must be the set bits in descending order, unused stages
// must report valid = 0.
module tb_cascaded_lzc;
  logic [15:0] mask;
  logic [3:0][3:0] pos;
  logic [3:0] valid;
  int checks = 0, failures = 0;

  cascaded_lzc #(.DVEC(16), .Q(4)) dut (.mask, .pos, .valid);

  initial begin
    for (int t = 0; t < 4000; t++) begin
      int n, want;
      logic [15:0] m;
      want = (t % 5 == 0) ? $urandom_range(0, 3) : 4;
      m = '0; n = 0;
      while (n < want) begin
        int b; b = $urandom_range(0, 15);
        if (!m[b]) begin m[b] = 1'b1; n++; end
      end
      mask = m;
      #1;
      n = 0;
      for (int i = 15; i >= 0; i--) if (m[i]) begin
        checks++;
        if (!valid[n] || pos[n] != 4'(i)) begin
          failures++;
          if (failures < 5) $display("mask=%h stage %0d pos=%0d exp=%0d", m, n, pos[n], i);
        end
        n++;
      end
      for (int k = n; k < 4; k++) begin
        checks++;
        if (valid[k]) failures++;
      end
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
