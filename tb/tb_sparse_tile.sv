// tb_sparse_tile: a full-height tile (64 rows, 16 output channels). Writes
// 16 entries of random 4:16 sparse weights into every row, then streams
// random entries and 64-wide activation vectors and checks the 16 column sums
// against a dot-product reference.
module tb_sparse_tile;
  localparam int HH = 64, D = 16;
  logic clk = 0, rst_n = 0, wr_en;
  logic [5:0] wr_row;
  logic [3:0] wr_addr, rd_addr, rd_addr_next;
  logic [D-1:0][7:0] wr_vec;
  logic [D-1:0] wr_mask;
  logic [HH-1:0][7:0] ia, ia_next;
  logic [D-1:0][31:0] psum_out;
  logic [HH-1:0][3:0] gated;
  logic signed [7:0] wref [HH][16][D];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  sparse_tile #(.H(HH), .DVEC(D), .Q(4), .DEPTH(16)) dut (.*);

  function automatic logic [HH*8-1:0] rnd_act();
    logic [HH*8-1:0] v;
    for (int h = 0; h < HH; h++) v[h*8 +: 8] = ($urandom_range(0, 3) == 0) ? 8'd0 : 8'($urandom);
    return v;
  endfunction

  initial begin
    wr_en = 0; wr_row = 0; wr_addr = 0; wr_vec = '0; wr_mask = '0;
    rd_addr = 0; rd_addr_next = 0; ia = '0; ia_next = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int h = 0; h < HH; h++)
      for (int e = 0; e < 16; e++) begin
        logic [D-1:0] m;
        int n;
        @(negedge clk);
        m = '0; n = 0;
        while (n < 4) begin
          int b; b = $urandom_range(0, D-1);
          if (!m[b]) begin m[b] = 1; n++; end
        end
        for (int i = 0; i < D; i++) begin
          wref[h][e][i] = m[i] ? 8'($urandom) : 8'sd0;
          wr_vec[i] = wref[h][e][i];
        end
        wr_mask = m;
        wr_en = 1; wr_row = 6'(h); wr_addr = 4'(e);
      end
    @(negedge clk); wr_en = 0;
    rd_addr_next = 4'($urandom); ia_next = rnd_act();
    @(negedge clk);
    for (int t = 0; t < 300; t++) begin
      rd_addr = rd_addr_next; ia = ia_next;
      rd_addr_next = 4'($urandom); ia_next = rnd_act();
      #1;
      for (int c = 0; c < D; c++) begin
        logic [31:0] exp_v;
        exp_v = 0;
        for (int h = 0; h < HH; h++) exp_v += 32'(wref[h][rd_addr][c] * $signed(ia[h]));
        checks++;
        if (psum_out[c] != exp_v) begin
          failures++;
          if (failures < 5) $display("t=%0d c=%0d out=%0d exp=%0d", t, c, psum_out[c], exp_v);
        end
      end
      @(negedge clk);
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
