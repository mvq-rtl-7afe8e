// tb_ews_array: the full 64x64 sparse array (4 tiles of 16 channels, 4 PEs
// per row and tile). Loads random 4:16 sparse weights into all rows and WRF
// entries, then streams samples (with random gaps) and checks for each that
// its 64 psums and its tag leave exactly NT = 4 cycles after it entered, and
// that they equal the reference dot products. Zero gating must occur.
module tb_ews_array;
  localparam int HH = 64, LL = 64, D = 16, NT = LL / D;
  logic clk = 0, rst_n = 0;
  logic wr_en;
  logic [5:0] wr_row;
  logic [3:0] wr_addr;
  logic [LL-1:0][7:0] wr_vec;
  logic [LL-1:0] wr_mask;
  logic in_valid, out_valid;
  logic [3:0] in_addr;
  logic [HH-1:0][7:0] in_act;
  logic [4:0] in_tag, out_tag;
  logic [LL-1:0][31:0] out_psum;
  logic [31:0] gated_count;
  logic signed [7:0] wref [HH][16][LL];
  int checks = 0, failures = 0;
  longint cyc = 0;

  typedef struct { longint t; logic [4:0] tag; logic [31:0] ps [LL]; } exp_t;
  exp_t q [$];

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  ews_array #(.H(HH), .L(LL), .DVEC(D), .Q(4), .DEPTH(16), .TAG_W(5)) dut (.*);

  // compare on every cycle
  always @(negedge clk) if (rst_n) begin
    if (out_valid) begin
      checks++;
      if (q.size() == 0) failures++;
      else begin
        exp_t e;
        e = q.pop_front();
        if (cyc - e.t != NT || out_tag != e.tag) begin
          failures++;
          $display("latency %0d tag %0d exp %0d", cyc - e.t, out_tag, e.tag);
        end
        for (int c = 0; c < LL; c++) begin
          checks++;
          if (out_psum[c] != e.ps[c]) begin
            failures++;
            if (failures < 5) $display("c=%0d out=%0d exp=%0d", c, out_psum[c], e.ps[c]);
          end
        end
      end
    end
  end

  initial begin
    wr_en = 0; wr_row = 0; wr_addr = 0; wr_vec = '0; wr_mask = '0;
    in_valid = 0; in_addr = 0; in_act = '0; in_tag = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int h = 0; h < HH; h++)
      for (int e = 0; e < 16; e++) begin
        for (int j = 0; j < NT; j++) begin
          int n;
          n = 0;
          for (int i = 0; i < D; i++) wr_mask[j*D + i] = 0;
          while (n < 4) begin
            int b; b = $urandom_range(0, D-1);
            if (!wr_mask[j*D + b]) begin wr_mask[j*D + b] = 1; n++; end
          end
        end
        for (int c = 0; c < LL; c++) begin
          wref[h][e][c] = wr_mask[c] ? (($urandom_range(0, 5) == 0) ? 8'sd0 : 8'($urandom)) : 8'sd0;
          wr_vec[c] = wref[h][e][c];
        end
        @(negedge clk); wr_en = 1; wr_row = 6'(h); wr_addr = 4'(e);
        @(negedge clk); wr_en = 0;
      end
    for (int t = 0; t < 400; t++) begin
      @(negedge clk);
      in_valid = ($urandom_range(0, 4) != 0);
      in_addr = 4'($urandom);
      for (int h = 0; h < HH; h++) in_act[h] = ($urandom_range(0, 3) == 0) ? 8'd0 : 8'($urandom);
      in_tag = 5'($urandom);
      if (in_valid) begin
        exp_t e;
        e.t = cyc; e.tag = in_tag;
        for (int c = 0; c < LL; c++) begin
          e.ps[c] = 0;
          for (int h = 0; h < HH; h++) e.ps[c] += 32'(wref[h][in_addr][c] * $signed(in_act[h]));
        end
        q.push_back(e);
      end
    end
    @(negedge clk); in_valid = 0;
    repeat (NT + 2) @(negedge clk);
    checks++;
    if (q.size() != 0) failures++;
    checks++;
    if (gated_count == 0) failures++;
    $display("gated multiplier-cycles: %0d", gated_count);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #10000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
