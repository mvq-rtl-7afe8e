// tb_l1_buffer: host writes ifmap words, the ifmap read port must return them
// one cycle later; psum writes must be returned by both the psum read port and
// the host read port one cycle after the read.
module tb_l1_buffer;
  logic clk = 0;
  logic ifm_re, ps_re, ps_we, host_ifm_we, host_ps_re;
  logic [10:0] ifm_raddr, host_ifm_addr;
  logic [8:0] ps_raddr, ps_waddr, host_ps_addr;
  logic [63:0][7:0] ifm_rdata, host_ifm_wdata;
  logic [63:0][31:0] ps_rdata, ps_wdata, host_ps_rdata;
  logic [511:0] ishadow [64];
  logic [2047:0] pshadow [32];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  l1_buffer #(.H(64), .L(64), .IFM_WORDS(2048), .PS_WORDS(512)) dut (.*);

  initial begin
    ifm_re = 0; ps_re = 0; ps_we = 0; host_ifm_we = 0; host_ps_re = 0;
    ifm_raddr = 0; host_ifm_addr = 0; ps_raddr = 0; ps_waddr = 0; host_ps_addr = 0;
    host_ifm_wdata = '0; ps_wdata = '0;
    for (int i = 0; i < 64; i++) begin
      for (int k = 0; k < 16; k++) ishadow[i][k*32 +: 32] = $urandom;
      @(negedge clk); host_ifm_we = 1; host_ifm_addr = 11'(i * 31); host_ifm_wdata = ishadow[i];
    end
    for (int i = 0; i < 32; i++) begin
      for (int k = 0; k < 64; k++) pshadow[i][k*32 +: 32] = $urandom;
      @(negedge clk); host_ifm_we = 0; ps_we = 1; ps_waddr = 9'(i * 15); ps_wdata = pshadow[i];
    end
    @(negedge clk); ps_we = 0;
    for (int t = 0; t < 200; t++) begin
      int a, p;
      a = $urandom_range(0, 63); p = $urandom_range(0, 31);
      ifm_re = 1; ifm_raddr = 11'(a * 31);
      ps_re = 1; ps_raddr = 9'(p * 15);
      host_ps_re = 1; host_ps_addr = 9'(((p + 1) % 32) * 15);
      @(negedge clk);
      ifm_re = 0; ps_re = 0; host_ps_re = 0;
      checks += 3;
      if (ifm_rdata != ishadow[a]) failures++;
      if (ps_rdata != pshadow[p]) failures++;
      if (host_ps_rdata != pshadow[(p + 1) % 32]) failures++;
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
