// tb_l2_sram: host writes scattered words of the full 2 MB array; reads must
// return them with rd_valid exactly one cycle after the request.
module tb_l2_sram;
  logic clk = 0, rst_n = 0;
  logic host_we, rd_req, rd_valid;
  logic [17:0] host_addr, rd_addr;
  logic [63:0] host_wdata, rd_data;
  logic [17:0] addrs [256];
  logic [63:0] vals [256];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  l2_sram #(.WORDS(262144)) dut (.*);

  initial begin
    host_we = 0; rd_req = 0; host_addr = 0; rd_addr = 0; host_wdata = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int i = 0; i < 256; i++) begin
      addrs[i] = 18'(i * 1021 + 7);
      vals[i] = {$urandom, $urandom};
      @(negedge clk); host_we = 1; host_addr = addrs[i]; host_wdata = vals[i];
    end
    @(negedge clk); host_we = 0;
    checks++;
    if (rd_valid) failures++;
    for (int t = 0; t < 500; t++) begin
      int i;
      i = $urandom_range(0, 255);
      rd_req = 1; rd_addr = addrs[i];
      @(negedge clk); rd_req = 0;
      checks += 2;
      if (!rd_valid) failures++;
      if (rd_data != vals[i]) failures++;
      @(negedge clk);
      checks++;
      if (rd_valid) failures++;
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
