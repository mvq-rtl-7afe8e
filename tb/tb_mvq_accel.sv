// tb_mvq_accel: end-to-end test of the accelerator at its default size
// (64x64 array, d = 16, k = 512, 4:16 masks, 2 MB L2, 256 KB L1).
// Layer: 3x3 convolution, 128 input channels (two groups of 64), 128 output
// channels (two groups of 64), 4x4 ifmap, 2x2 ofmap, stride 1, then ReLU.
// The testbench draws a random codebook, and for every array row and WRF
// entry a random codeword index and mask code per 16 output channels; it
// stores them in L2 in the layout the weight loader reads, stores the ifmap
// (with zeros, so zero gating occurs) in L1, and runs the layer in three
// passes over the kernel plane: positions 0-3 (codebook init, plain store),
// 4-7 (accumulate) and 8 (accumulate and ReLU), each with A = 2 output-
// channel subsets and B = 2 input-channel subsets. The reference result is
// computed from the decoded weights (own enumeration of the 4-of-16 masks).
// Checks: every ofmap value, the compute-cycle count (pixels x A x B x D per
// pass), and that each mechanism occurred: codebook init, sparse weight
// decode, zero gating, stalls, PRF overwrite/accumulate, L1 accumulation and
// ReLU clamping.
module tb_mvq_accel;
  import mvq_pkg::*;
  localparam int HH = 64, LL = 64, D = 16, NP = 4;
  localparam int IH = 4, IW = 4, OH = 2, OW = 2, KS = 3, CG = 2, KG = 2;

  logic clk = 0, rst_n = 0;
  layer_cfg_t cfg;
  logic start, busy, done;
  logic host_l2_we;
  logic [17:0] host_l2_addr;
  logic [63:0] host_l2_wdata;
  logic host_ifm_we, host_ps_re;
  logic [10:0] host_ifm_addr;
  logic [HH-1:0][7:0] host_ifm_wdata;
  logic [8:0] host_ps_addr;
  logic [LL-1:0][31:0] host_ps_rdata;
  logic [31:0] compute_cycles, stall_cycles, gated_count, relu_count;

  mvq_accel dut (.*);

  always #5 clk = ~clk;

  logic [127:0] cbook [512];
  logic [15:0]  masks [1820];
  logic signed [7:0] wt [KS*KS][CG*HH][KG*LL];   // decoded weights
  logic signed [7:0] ifm [IH][IW][CG*HH];
  int checks = 0, failures = 0;
  int n_cb = 0, n_gate = 0, n_stall = 0, n_acc = 0, n_relu = 0, n_sparse = 0;
  int exp_compute = 0;

  task automatic l2_write(input int addr, input logic [63:0] v);
    @(negedge clk);
    host_l2_we = 1; host_l2_addr = 18'(addr); host_l2_wdata = v;
    @(negedge clk);
    host_l2_we = 0;
  endtask

  // write the assignment rows of one pass: kernel positions q0..q0+d-1,
  // input groups 0..b-1, output groups 0..a-1
  task automatic put_pass(input int base, input int a, input int b, input int d, input int q0);
    int ne;
    ne = a * b * d;
    for (int h = 0; h < HH; h++)
      for (int e = 0; e < ne; e++) begin
        int s, r, q;
        logic [127:0] row;
        s = e % a; r = (e / a) % b; q = e / (a * b);
        row = '0;
        for (int j = 0; j < NP; j++) begin
          int idx, mc;
          idx = $urandom_range(0, 511); mc = $urandom_range(0, 1819);
          row[j*20 +: 20] = {11'(mc), 9'(idx)};
          for (int i = 0; i < D; i++)
            wt[q0 + q][r*HH + h][s*LL + j*D + i] =
              masks[mc][i] ? $signed(cbook[idx][i*8 +: 8]) : 8'sd0;
        end
        l2_write(base + 2*(h*ne + e), row[63:0]);
        l2_write(base + 2*(h*ne + e) + 1, row[127:64]);
      end
  endtask

  task automatic run_pass(input int cbi, input int base, input int a, input int b,
                          input int d, input int q0, input int acc, input int rl);
    int g0, s0, r0;
    g0 = gated_count; s0 = stall_cycles; r0 = relu_count;
    cfg = '0;
    cfg.cb_init = 1'(cbi); cfg.cb_base = 22'd0; cfg.asg_base = 22'(base);
    cfg.a = 5'(a); cfg.b = 5'(b); cfg.d = 5'(d);
    cfg.oh = 8'(OH); cfg.ow = 8'(OW); cfg.iw = 8'(IW); cfg.ks = 4'(KS); cfg.stride = 4'd1;
    cfg.q0 = 8'(q0); cfg.cg = 8'(CG); cfg.r0 = 0; cfg.kg = 8'(KG); cfg.kg0 = 0;
    cfg.ifm_base = 16'd0; cfg.ofm_base = 16'd0; cfg.accumulate = 1'(acc); cfg.relu = 1'(rl);
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    exp_compute += OH * OW * a * b * d;
    if (cbi) n_cb++;
    if (acc) n_acc++;
    if (gated_count != g0) n_gate++;
    if (stall_cycles != s0) n_stall++;
    if (relu_count != r0) n_relu++;
  endtask

  initial begin
    int r;
    start = 0; cfg = '0;
    host_l2_we = 0; host_l2_addr = 0; host_l2_wdata = 0;
    host_ifm_we = 0; host_ifm_addr = 0; host_ifm_wdata = '0;
    host_ps_re = 0; host_ps_addr = 0;
    r = 0;
    for (int v = 0; v < 65536; v++) if ($countones(16'(v)) == 4) begin masks[r] = 16'(v); r++; end
    repeat (3) @(negedge clk); rst_n = 1;
    // codebook: small values, so sums stay readable
    for (int k = 0; k < 512; k++) begin
      for (int i = 0; i < D; i++) cbook[k][i*8 +: 8] = 8'($signed($urandom_range(0, 40)) - 20);
      if (k % 7 == 0) cbook[k][7:0] = 8'd0;
      l2_write(2*k, cbook[k][63:0]);
      l2_write(2*k + 1, cbook[k][127:64]);
    end
    // ifmap, channel-first, a quarter zeros
    for (int y = 0; y < IH; y++)
      for (int x = 0; x < IW; x++)
        for (int g = 0; g < CG; g++) begin
          for (int h = 0; h < HH; h++) begin
            ifm[y][x][g*HH + h] = ($urandom_range(0, 3) == 0) ? 8'sd0 : 8'($signed($urandom_range(0, 60)) - 30);
            host_ifm_wdata[h] = ifm[y][x][g*HH + h];
          end
          @(negedge clk); host_ifm_we = 1; host_ifm_addr = 11'((y*IW + x)*CG + g);
          @(negedge clk); host_ifm_we = 0;
        end
    put_pass(4096, 2, 2, 4, 0);
    put_pass(8192, 2, 2, 4, 4);
    put_pass(12288, 2, 2, 1, 8);
    for (int k = 0; k < KS*KS; k++) for (int i = 0; i < CG*HH; i++) for (int o = 0; o < KG*LL; o++)
      if (wt[k][i][o] != 0) n_sparse++;

    run_pass(1, 4096, 2, 2, 4, 0, 0, 0);
    run_pass(0, 8192, 2, 2, 4, 4, 1, 0);
    run_pass(0, 12288, 2, 2, 1, 8, 1, 1);

    // read back and compare
    for (int y = 0; y < OH; y++)
      for (int x = 0; x < OW; x++)
        for (int g = 0; g < KG; g++) begin
          @(negedge clk); host_ps_re = 1; host_ps_addr = 9'((y*OW + x)*KG + g);
          @(negedge clk); host_ps_re = 0;
          for (int c = 0; c < LL; c++) begin
            int acc;
            acc = 0;
            for (int k = 0; k < KS*KS; k++)
              for (int i = 0; i < CG*HH; i++)
                acc += int'(wt[k][i][g*LL + c]) * int'(ifm[y + k / KS][x + k % KS][i]);
            if (acc < 0) acc = 0;
            checks++;
            if ($signed(host_ps_rdata[c]) != acc) begin
              failures++;
              if (failures < 6) $display("y%0d x%0d oc%0d got %0d exp %0d", y, x, g*LL + c,
                                         $signed(host_ps_rdata[c]), acc);
            end
          end
        end
    checks++;
    if (compute_cycles != 32'(exp_compute)) begin
      failures++; $display("compute cycles %0d exp %0d", compute_cycles, exp_compute);
    end
    $display("mechanisms: codebook_init=%0d nonzero_sparse_weights=%0d gated_passes=%0d gated_mults=%0d stall_passes=%0d accumulate_passes=%0d relu_passes=%0d relu_clamped=%0d",
             n_cb, n_sparse, n_gate, gated_count, n_stall, n_acc, n_relu, relu_count);
    $display("cycles: compute=%0d stall=%0d", compute_cycles, stall_cycles);
    checks += 6;
    if (n_cb == 0) failures++;
    if (n_sparse == 0 || n_sparse > KS*KS*CG*HH*KG*LL / 4) failures++;
    if (n_gate == 0) failures++;
    if (n_stall == 0) failures++;
    if (n_acc == 0) failures++;
    if (n_relu == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #50000000; failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
