// tb_ofmap_storer: PRF and L1 modelled in the testbench. For several pixels
// and A values it checks the L1 words written (address and data) in three
// modes: plain store, accumulate onto the old L1 contents, and accumulate with
// ReLU; and the cycle count (A cycles, or 2A with accumulation, plus one).
module tb_ofmap_storer;
  localparam int LL = 64;
  logic clk = 0, rst_n = 0, start, busy, done, accumulate, relu;
  logic [7:0] oy, ox, ow, kg, kg0;
  logic [4:0] a;
  logic [15:0] ofm_base;
  logic [3:0] prf_raddr;
  logic [LL-1:0][31:0] prf_rdata, l1_rdata, l1_wdata;
  logic l1_re, l1_we;
  logic [8:0] l1_raddr, l1_waddr;
  logic [31:0] relu_count;
  logic [LL-1:0][31:0] prf [16];
  logic [LL-1:0][31:0] l1 [512], l1_exp [512];
  int checks = 0, failures = 0;
  longint cyc = 0;
  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  ofmap_storer #(.L(LL), .DEPTH(16), .PAW(9)) dut (.*);

  assign prf_rdata = prf[prf_raddr];
  always_ff @(posedge clk) begin
    if (l1_re) l1_rdata <= l1[l1_raddr];
    if (l1_we) l1[l1_waddr] <= l1_wdata;
  end

  task automatic run(input int y, x, w, aa, g, g0, base, acc, rl);
    longint t0;
    oy = 8'(y); ox = 8'(x); ow = 8'(w); a = 5'(aa); kg = 8'(g); kg0 = 8'(g0);
    ofm_base = 16'(base); accumulate = 1'(acc); relu = 1'(rl);
    for (int s = 0; s < aa; s++)
      for (int c = 0; c < LL; c++) prf[s][c] = 32'($signed($urandom_range(0, 20000)) - 10000);
    for (int i = 0; i < 512; i++) l1_exp[i] = l1[i];
    for (int s = 0; s < aa; s++) begin
      int ad;
      ad = base + (y * w + x) * g + g0 + s;
      for (int c = 0; c < LL; c++) begin
        logic signed [31:0] v;
        v = $signed(prf[s][c]) + (acc ? $signed(l1[ad][c]) : 0);
        l1_exp[ad][c] = (rl && v < 0) ? 0 : v;
      end
    end
    start = 1; t0 = cyc;
    @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    checks++;
    if (cyc - t0 != (acc ? 2 * aa : aa) + 1) begin failures++; $display("took %0d", cyc - t0); end
    for (int i = 0; i < 512; i++) begin
      checks++;
      if (l1[i] != l1_exp[i]) begin failures++; if (failures < 5) $display("word %0d differs", i); end
    end
  endtask

  initial begin
    start = 0; accumulate = 0; relu = 0; oy = 0; ox = 0; ow = 1; kg = 1; kg0 = 0; a = 1; ofm_base = 0;
    for (int i = 0; i < 512; i++)
      for (int c = 0; c < LL; c++) l1[i][c] = 32'($signed($urandom_range(0, 20000)) - 10000);
    repeat (2) @(negedge clk); rst_n = 1;
    @(negedge clk);
    run(0, 0, 4, 4, 4, 0, 0, 0, 0);
    run(1, 2, 4, 3, 8, 4, 10, 1, 0);
    run(3, 3, 4, 16, 16, 0, 100, 1, 1);
    run(0, 1, 5, 1, 1, 0, 7, 0, 1);
    checks++;
    if (relu_count == 0) failures++;
    $display("relu-clamped outputs: %0d", relu_count);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
