// tb_prf: random sequences of first-writes and accumulations into random rows,
// checked against a shadow model after every operation.
module tb_prf;
  logic clk = 0, acc_en, acc_first;
  logic [3:0] acc_addr, raddr;
  logic [63:0][31:0] acc_data, rdata;
  logic [63:0][31:0] shadow [16];
  logic [15:0] init;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  prf #(.L(64), .DEPTH(16)) dut (.*);

  initial begin
    acc_en = 0; acc_first = 0; acc_addr = 0; raddr = 0; acc_data = '0; init = '0;
    for (int t = 0; t < 1000; t++) begin
      @(negedge clk);
      acc_addr = 4'($urandom_range(0, 15));
      acc_first = !init[acc_addr] || ($urandom_range(0, 3) == 0);
      for (int c = 0; c < 64; c++) acc_data[c] = 32'($signed($urandom_range(0, 2000)) - 1000);
      acc_en = 1;
      for (int c = 0; c < 64; c++)
        shadow[acc_addr][c] = acc_first ? acc_data[c] : shadow[acc_addr][c] + acc_data[c];
      init[acc_addr] = 1'b1;
      @(negedge clk);
      acc_en = 0;
      raddr = acc_addr;
      #1; checks++;
      if (rdata != shadow[raddr]) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
