// tb_weight_loader: L2 and the codebook RF are modelled in the testbench.
// 1) codebook init: all 512 codewords (2 words each) must be written to the
//    CRF with the right address and data, one per two cycles.
// 2) assignment load with 3 WRF entries per row: every array write must carry
//    the right row/entry and, per 16-channel group, the codeword selected by
//    the index with the pruned elements zeroed by the mask that the mask code
//    ranks among all 4-of-16 masks (reference enumeration in the testbench).
// Both jobs must finish within beats + 3 cycles.
module tb_weight_loader;
  localparam int HH = 64, LL = 64, D = 16, NP = 4, NE = 3;
  logic clk = 0, rst_n = 0;
  logic cb_start, asg_start, busy, done;
  logic [17:0] cb_base, asg_base;
  logic [4:0] n_entries;
  logic l2_req, l2_valid;
  logic [17:0] l2_addr;
  logic [63:0] l2_data;
  logic crf_we;
  logic [8:0] crf_waddr;
  logic [127:0] crf_wdata;
  logic [NP-1:0][8:0] crf_raddr;
  logic [NP-1:0][127:0] crf_rdata;
  logic arr_we;
  logic [5:0] arr_row;
  logic [3:0] arr_addr;
  logic [LL-1:0][7:0] arr_vec;
  logic [LL-1:0] arr_mask;

  logic [63:0] l2 [1 << 18];
  logic [127:0] crf [512];
  logic [127:0] cbook [512];
  logic [15:0] masks [1820];
  logic [8:0] idx [HH][NE][NP];
  logic [10:0] mcode [HH][NE][NP];
  int checks = 0, failures = 0, nwrites = 0;
  longint cyc = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  weight_loader #(.H(HH), .L(LL), .DVEC(D), .NPORT(NP), .KCW(512), .QC(8),
                  .MGRP(16), .NKEEP(4), .DEPTH(16), .L2_AW(18)) dut (.*);

  // L2 model: one cycle latency
  always_ff @(posedge clk) begin
    l2_valid <= l2_req;
    if (l2_req) l2_data <= l2[l2_addr];
  end
  // CRF model
  always_ff @(posedge clk) if (crf_we) crf[crf_waddr] <= crf_wdata;
  for (genvar p = 0; p < NP; p++) begin : g_crf
    assign crf_rdata[p] = crf[crf_raddr[p]];
  end

  // checkers
  always @(negedge clk) if (rst_n) begin
    if (crf_we) begin
      checks++;
      if (crf_wdata != cbook[crf_waddr] || crf_waddr != 9'(nwrites)) failures++;
      nwrites++;
    end
    if (arr_we) begin
      int h, e;
      h = nwrites / NE; e = nwrites % NE;
      checks++;
      if (arr_row != 6'(h) || arr_addr != 4'(e)) failures++;
      for (int p = 0; p < NP; p++) begin
        logic [15:0] m;
        m = masks[mcode[h][e][p]];
        checks++;
        if (arr_mask[p*D +: D] != m) failures++;
        for (int i = 0; i < D; i++) begin
          logic [7:0] w;
          w = m[i] ? cbook[idx[h][e][p]][i*8 +: 8] : 8'd0;
          checks++;
          if (arr_vec[p*D + i] != w) begin
            failures++;
            if (failures < 5) $display("h%0d e%0d p%0d i%0d got %h exp %h", h, e, p, i, arr_vec[p*D+i], w);
          end
        end
      end
      nwrites++;
    end
  end

  initial begin
    int r;
    longint t0;
    r = 0;
    for (int v = 0; v < 65536; v++) if ($countones(16'(v)) == 4) begin masks[r] = 16'(v); r++; end
    cb_base = 18'd1000; asg_base = 18'd5000; n_entries = 5'(NE);
    cb_start = 0; asg_start = 0;
    for (int k = 0; k < 512; k++) begin
      cbook[k] = {$urandom, $urandom, $urandom, $urandom};
      l2[1000 + 2*k] = cbook[k][63:0];
      l2[1000 + 2*k + 1] = cbook[k][127:64];
    end
    for (int h = 0; h < HH; h++)
      for (int e = 0; e < NE; e++) begin
        logic [127:0] row;
        row = '0;
        for (int p = 0; p < NP; p++) begin
          idx[h][e][p] = 9'($urandom_range(0, 511));
          mcode[h][e][p] = 11'($urandom_range(0, 1819));
          row[p*20 +: 20] = {mcode[h][e][p], idx[h][e][p]};
        end
        l2[5000 + 2*(h*NE + e)] = row[63:0];
        l2[5000 + 2*(h*NE + e) + 1] = row[127:64];
      end
    repeat (2) @(negedge clk); rst_n = 1;
    @(negedge clk);
    cb_start = 1; t0 = cyc;
    @(negedge clk); cb_start = 0;
    while (!done) @(negedge clk);
    checks += 2;
    if (nwrites != 512) failures++;
    if (cyc - t0 > 1024 + 3) begin failures++; $display("codebook took %0d", cyc - t0); end
    @(negedge clk);
    nwrites = 0;
    asg_start = 1; t0 = cyc;
    @(negedge clk); asg_start = 0;
    while (!done) @(negedge clk);
    checks += 2;
    if (nwrites != HH * NE) failures++;
    if (cyc - t0 > HH * NE * 2 + 3) begin failures++; $display("assign took %0d", cyc - t0); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
