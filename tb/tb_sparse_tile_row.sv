// tb_sparse_tile_row: writes 16 WRF entries, each a random 4:16 sparse weight
// vector with its mask (some masks with fewer ones), then streams random
// entries and activations with a random psum input and checks all 16 psum
// outputs against psum_in + activation * weight, computed from the dense
// vectors kept by the testbench.
module tb_sparse_tile_row;
  localparam int D = 16;
  logic clk = 0, rst_n = 0, wr_en;
  logic [3:0] wr_addr, rd_addr, rd_addr_next;
  logic [D-1:0][7:0] wr_vec;
  logic [D-1:0] wr_mask;
  logic signed [7:0] ia, ia_next;
  logic [D-1:0][31:0] psum_in, psum_out;
  logic [3:0] gated;
  logic signed [7:0] wref [16][D];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  sparse_tile_row #(.DVEC(D), .Q(4), .DEPTH(16)) dut (.*);

  initial begin
    wr_en = 0; wr_addr = 0; wr_vec = '0; wr_mask = '0;
    rd_addr = 0; rd_addr_next = 0; ia = 0; ia_next = 0; psum_in = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int e = 0; e < 16; e++) begin
      logic [D-1:0] m;
      int n, want;
      m = '0; n = 0; want = (e == 5) ? 2 : 4;
      while (n < want) begin
        int b; b = $urandom_range(0, D-1);
        if (!m[b]) begin m[b] = 1; n++; end
      end
      for (int i = 0; i < D; i++) begin
        // pruned positions carry garbage on the dense side; the sparse
        // vector the loader produces is already zero there
        wref[e][i] = m[i] ? 8'($urandom) : 8'sd0;
        wr_vec[i] = wref[e][i];
      end
      wr_mask = m;
      @(negedge clk); wr_en = 1; wr_addr = 4'(e);
      @(negedge clk); wr_en = 0;
    end
    rd_addr_next = 4'($urandom); ia_next = 8'($urandom);
    @(negedge clk);
    for (int t = 0; t < 1000; t++) begin
      rd_addr = rd_addr_next; ia = ia_next;
      rd_addr_next = 4'($urandom);
      ia_next = ($urandom_range(0, 4) == 0) ? 8'sd0 : 8'($urandom);
      for (int c = 0; c < D; c++) psum_in[c] = $urandom;
      #1;
      for (int c = 0; c < D; c++) begin
        checks++;
        if (psum_out[c] != psum_in[c] + 32'(wref[rd_addr][c] * ia)) begin
          failures++;
          if (failures < 5) $display("t=%0d c=%0d out=%0d exp=%0d", t, c, psum_out[c],
                                     psum_in[c] + 32'(wref[rd_addr][c] * ia));
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
