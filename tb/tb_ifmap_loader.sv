// tb_ifmap_loader: L1 is modelled with a word = address pattern. For several
// pixels, strides (1 and 2) and EWS settings (B, D, first kernel position) the loader must write
// ARF entry q*B + r with word ifm_base + ((oy*S+ky)*IW + ox*S+kx)*CG + r0 + r,
// (ky, kx) = kernel position q0+q on a KSxKS plane, and finish with `done`
// exactly B*D + 2 cycles after `start`.
module tb_ifmap_loader;
  logic clk = 0, rst_n = 0, start, busy, done;
  logic [7:0] oy, ox, q0, iw, cg, r0;
  logic [4:0] b, d;
  logic [3:0] ks, stride;
  logic [15:0] ifm_base;
  logic l1_re, arf_we;
  logic [10:0] l1_addr;
  logic [63:0][7:0] l1_data, arf_wdata;
  logic [3:0] arf_waddr;
  logic [10:0] got [16];
  logic [15:0] written;
  int checks = 0, failures = 0;
  longint cyc = 0;
  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  ifmap_loader #(.H(64), .DEPTH(16), .IAW(11)) dut (.*);

  // L1 model: word content encodes its address
  always_ff @(posedge clk) if (l1_re) l1_data <= {32{5'd0, l1_addr}};
  always @(negedge clk) if (arf_we) begin
    got[arf_waddr] = arf_wdata[1:0];
    written[arf_waddr] = 1'b1;
  end

  task automatic run(input int y, x, bb, dd, qq, kk, w, c, rr, base, st);
    longint t0;
    oy = 8'(y); ox = 8'(x); b = 5'(bb); d = 5'(dd); q0 = 8'(qq); ks = 4'(kk);
    iw = 8'(w); cg = 8'(c); r0 = 8'(rr); ifm_base = 16'(base); stride = 4'(st);
    written = '0;
    start = 1; t0 = cyc;
    @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    checks++;
    if (cyc - t0 != bb * dd + 2) begin failures++; $display("took %0d", cyc - t0); end
    for (int q = 0; q < dd; q++)
      for (int r = 0; r < bb; r++) begin
        int ky, kx, a;
        ky = (qq + q) / kk; kx = (qq + q) % kk;
        a = base + ((y * st + ky) * w + x * st + kx) * c + rr + r;
        checks++;
        if (!written[q*bb + r] || got[q*bb + r] != 11'(a)) begin
          failures++;
          $display("q%0d r%0d got %0d exp %0d", q, r, got[q*bb + r], a);
        end
      end
  endtask

  initial begin
    start = 0; oy = 0; ox = 0; b = 1; d = 1; q0 = 0; ks = 3; stride = 1; iw = 8; cg = 1; r0 = 0; ifm_base = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    @(negedge clk);
    run(0, 0, 2, 3, 0, 3, 10, 2, 0, 0, 1);
    run(2, 3, 1, 9, 0, 3, 10, 1, 0, 100, 2);
    run(1, 1, 4, 4, 5, 3, 8, 4, 0, 7, 1);
    run(3, 2, 2, 2, 1, 2, 9, 3, 1, 33, 2);
    run(0, 7, 16, 1, 0, 1, 8, 16, 0, 0, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
