// tb_zg_pe: loads the WRF with random weights (a quarter of them zero), then
// streams random (address, activation) pairs, a quarter of activations zero,
// presenting each pair first as `next` and one cycle later as the current
// operands. Every cycle the product must equal weight*activation; the zero
// flag must be set exactly in the cycles whose product is zero, and gating
// must occur.
module tb_zg_pe;
  logic clk = 0, rst_n = 0, wr_en;
  logic [3:0] wr_addr, rd_addr, rd_addr_next;
  logic signed [7:0] wr_data, ia, ia_next;
  logic signed [15:0] psum;
  logic gated;
  logic signed [7:0] wref [16];
  int checks = 0, failures = 0, ngated = 0;
  always #5 clk = ~clk;

  zg_pe #(.DEPTH(16), .W_W(8), .A_W(8)) dut (.*);

  function automatic logic signed [7:0] rnd8();
    return ($urandom_range(0, 3) == 0) ? 8'sd0 : 8'($urandom);
  endfunction

  initial begin
    wr_en = 0; wr_addr = 0; wr_data = 0;
    rd_addr = 0; rd_addr_next = 0; ia = 0; ia_next = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 16; i++) begin
      wref[i] = rnd8();
      @(negedge clk); wr_en = 1; wr_addr = 4'(i); wr_data = wref[i];
    end
    @(negedge clk); wr_en = 0;
    // prime the pipeline
    rd_addr_next = 4'($urandom); ia_next = rnd8();
    @(negedge clk);
    for (int t = 0; t < 3000; t++) begin
      rd_addr = rd_addr_next; ia = ia_next;
      rd_addr_next = 4'($urandom); ia_next = rnd8();
      #1;
      checks++;
      if (psum != 16'(wref[rd_addr] * ia)) begin
        failures++;
        if (failures < 5) $display("t=%0d psum=%0d exp=%0d", t, psum, wref[rd_addr] * ia);
      end
      checks++;
      if (gated != (wref[rd_addr] == 0 || ia == 0)) failures++;
      if (gated) ngated++;
      @(negedge clk);
    end
    checks++;
    if (ngated == 0) failures++;
    $display("gated cycles: %0d", ngated);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
