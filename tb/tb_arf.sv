// tb_arf: writes random activation vectors into all entries, then checks
// random reads against a shadow copy, including a rewrite of one entry.
module tb_arf;
  logic clk = 0, we;
  logic [3:0] waddr, raddr;
  logic [63:0][7:0] wdata, rdata;
  logic [63:0][7:0] shadow [16];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  arf #(.H(64), .DEPTH(16)) dut (.*);

  function automatic logic [511:0] rnd();
    logic [511:0] v;
    for (int i = 0; i < 16; i++) v[i*32 +: 32] = $urandom;
    return v;
  endfunction

  initial begin
    we = 0; waddr = 0; raddr = 0; wdata = '0;
    for (int round = 0; round < 3; round++) begin
      for (int i = 0; i < 16; i++) begin
        shadow[i] = rnd();
        @(negedge clk); we = 1; waddr = 4'(i); wdata = shadow[i];
      end
      @(negedge clk); we = 0;
      for (int t = 0; t < 64; t++) begin
        raddr = 4'($urandom_range(0, 15));
        #1; checks++;
        if (rdata != shadow[raddr]) failures++;
        @(negedge clk);
      end
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
