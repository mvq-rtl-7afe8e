// tb_codebook_rf: fills all 512 codewords with random data, then reads random
// addresses on all four ports at once and compares with a shadow copy.
module tb_codebook_rf;
  logic clk = 0, we;
  logic [8:0] waddr;
  logic [127:0] wdata;
  logic [3:0][8:0] raddr;
  logic [3:0][127:0] rdata;
  logic [127:0] shadow [512];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  codebook_rf #(.KCW(512), .DVEC(16), .QC(8), .NPORT(4)) dut (.*);

  initial begin
    we = 0; waddr = 0; wdata = 0; raddr = '0;
    for (int i = 0; i < 512; i++) begin
      shadow[i] = {$urandom, $urandom, $urandom, $urandom};
      @(negedge clk); we = 1; waddr = 9'(i); wdata = shadow[i];
    end
    @(negedge clk); we = 0;
    for (int t = 0; t < 2000; t++) begin
      for (int p = 0; p < 4; p++) raddr[p] = 9'($urandom_range(0, 511));
      #1;
      for (int p = 0; p < 4; p++) begin
        checks++;
        if (rdata[p] != shadow[raddr[p]]) failures++;
      end
      @(negedge clk);
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
