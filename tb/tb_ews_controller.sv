// tb_ews_controller: the loaders and the storer are replaced by responders
// that answer each start pulse after a few cycles. For two layer settings
// (with and without codebook init) the testbench checks the phase order,
// that each pixel is visited once in row-major order, that the compute stream
// of every pixel is exactly the EWS loop (q, r, s) with WRF entry
// (q*B+r)*A+s, ARF entry q*B+r, tag {q==0&&r==0, s}, issued back to back in
// A*B*D cycles, and the compute/stall counters.
module tb_ews_controller;
  import mvq_pkg::*;
  logic clk = 0, rst_n = 0, start, busy, done;
  layer_cfg_t cfg;
  logic cb_start, asg_start, wl_done, il_start, il_done, st_start, st_done;
  logic [4:0] n_entries;
  logic [7:0] oy, ox;
  logic arr_valid;
  logic [3:0] arr_addr, arf_raddr;
  logic [4:0] arr_tag;
  logic [31:0] compute_cycles, stall_cycles;
  int checks = 0, failures = 0;
  int ncb, nasg, nil, nst, nsamp, exp_samp;
  int pix_y, pix_x;
  bit wl_pending, il_pending, st_pending;
  always #5 clk = ~clk;

  ews_controller #(.DEPTH(16), .NT(4), .TAG_W(5)) dut (.*);

  // responders
  int wl_t, il_t, st_t;
  always_ff @(posedge clk) begin
    wl_done <= 0; il_done <= 0; st_done <= 0;
    if (cb_start || asg_start) wl_t <= 5;
    else if (wl_t > 0) begin wl_t <= wl_t - 1; if (wl_t == 1) wl_done <= 1; end
    if (il_start) il_t <= 3;
    else if (il_t > 0) begin il_t <= il_t - 1; if (il_t == 1) il_done <= 1; end
    if (st_start) st_t <= 2;
    else if (st_t > 0) begin st_t <= st_t - 1; if (st_t == 1) st_done <= 1; end
  end

  // stream checker
  always @(negedge clk) if (rst_n) begin
    if (cb_start) ncb++;
    if (asg_start) begin nasg++; checks++; if (n_entries != 5'(cfg.a * cfg.b * cfg.d)) failures++; end
    if (il_start) begin
      nil++;
      checks++;
      if (oy != 8'(pix_y) || ox != 8'(pix_x)) begin failures++; $display("pixel %0d,%0d exp %0d,%0d", oy, ox, pix_y, pix_x); end
      exp_samp = 0;
    end
    if (arr_valid) begin
      int s, r, q;
      s = exp_samp % cfg.a; r = (exp_samp / cfg.a) % cfg.b; q = exp_samp / (cfg.a * cfg.b);
      checks++;
      if (arr_addr != 4'((q * cfg.b + r) * cfg.a + s) || arf_raddr != 4'(q * cfg.b + r)
          || arr_tag != {q == 0 && r == 0, 4'(s)}) begin
        failures++;
        $display("sample %0d: addr %0d arf %0d tag %h", exp_samp, arr_addr, arf_raddr, arr_tag);
      end
      exp_samp++; nsamp++;
    end
    if (st_start) begin
      nst++;
      checks++;
      if (exp_samp != cfg.a * cfg.b * cfg.d) failures++;
      if (pix_x == cfg.ow - 1) begin pix_x = 0; pix_y++; end else pix_x++;
    end
  end

  task automatic run(input int a, b, d, oh, ow, cbi);
    cfg = '0;
    cfg.a = 5'(a); cfg.b = 5'(b); cfg.d = 5'(d); cfg.oh = 8'(oh); cfg.ow = 8'(ow); cfg.cb_init = 1'(cbi);
    ncb = 0; nasg = 0; nil = 0; nst = 0; nsamp = 0; pix_y = 0; pix_x = 0;
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    checks += 5;
    if (ncb != cbi) failures++;
    if (nasg != 1) failures++;
    if (nil != oh * ow || nst != oh * ow) failures++;
    if (nsamp != oh * ow * a * b * d) failures++;
    if (compute_cycles != 32'(nsamp)) failures++;
    $display("pass A=%0d B=%0d D=%0d: compute %0d stall %0d", a, b, d, compute_cycles, stall_cycles);
  endtask

  initial begin
    start = 0; cfg = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    run(2, 2, 4, 3, 3, 1);
    @(negedge clk); rst_n = 0; @(negedge clk); rst_n = 1;
    run(4, 1, 3, 2, 5, 0);
    checks++;
    if (stall_cycles == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
