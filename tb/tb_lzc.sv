// tb_lzc: exhaustive check of the 16-bit leading-zero counter against a
// behavioural scan (count, position, one-hot, valid) for all 65536 inputs.
module tb_lzc;
  logic [15:0] in, onehot;
  logic [4:0]  count;
  logic [3:0]  pos;
  logic        valid;
  int checks = 0, failures = 0;

  lzc #(.WIDTH(16)) dut (.in, .count, .pos, .onehot, .valid);

  initial begin
    for (int v = 0; v < 65536; v++) begin
      int exp_cnt;
      in = 16'(v);
      #1;
      exp_cnt = 16;
      for (int i = 15; i >= 0; i--) if (v[i]) begin exp_cnt = 15 - i; break; end
      checks++;
      if (v == 0) begin
        if (valid || count != 0 || onehot != 0) failures++;
      end else if (!valid || count != 5'(exp_cnt) || pos != 4'(15 - exp_cnt)
                   || onehot != (16'd1 << (15 - exp_cnt))) begin
        failures++;
        if (failures < 5) $display("mismatch in=%h count=%0d exp=%0d", in, count, exp_cnt);
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
