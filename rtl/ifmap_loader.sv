// ifmap_loader: fetches from L1 the activation vectors one ofmap pixel needs
// for the current EWS weight subset and writes them into the ARF.
// Position control: for ofmap pixel (oy, ox), kernel-plane positions
// q0 .. q0+D-1 (position kp = ky*KS + kx) and input-channel groups
// r0 .. r0+B-1, the ifmap word address is
//     ifm_base + ((oy*S+ky)*IW + (ox*S+kx))*CG + r        (channel-first layout,
// stride S, no padding: padded ifmaps are stored already padded). Word
// (q, r) goes to ARF entry q*B + r. Load control: one L1 read per cycle, the
// data arrive one cycle later and are written to the ARF; `done` pulses after
// the last write, B*D+2 cycles after `start`. The loader and its two parts
// are named by the paper; the address formula, the absence of padding logic
// and timing are this implementation's choices. The activation data path
// is a plain wire from the L1 read port to the ARF write port (only the
// address and strobes are generated here), so a synthesis tool sees the
// data outputs as driven by no logic of this module.
module ifmap_loader #(
  parameter int H     = mvq_pkg::H,
  parameter int A_W   = mvq_pkg::ACT_W,
  parameter int DEPTH = mvq_pkg::ARF_DEPTH,
  parameter int IAW   = 11,
  localparam int AW   = $clog2(DEPTH)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  start,
  input  logic [7:0]            oy, ox,
  input  logic [4:0]            b, d,
  input  logic [7:0]            q0,
  input  logic [3:0]            ks,
  input  logic [3:0]            stride,
  input  logic [7:0]            iw,
  input  logic [7:0]            cg,
  input  logic [7:0]            r0,
  input  logic [15:0]           ifm_base,
  output logic                  busy,
  output logic                  done,
  // L1 ifmap read port
  output logic                  l1_re,
  output logic [IAW-1:0]        l1_addr,
  input  logic [H-1:0][A_W-1:0] l1_data,
  // ARF write port
  output logic                  arf_we,
  output logic [AW-1:0]         arf_waddr,
  output logic [H-1:0][A_W-1:0] arf_wdata
);
  logic        active;
  logic [4:0]  q, r;
  logic [7:0]  ky, kx;
  logic        rd_q;           // a read was issued last cycle
  logic [AW-1:0] rd_slot_q;
  logic        last_q;
  logic        last_issue;

  assign last_issue = (q == d - 1'b1) && (r == b - 1'b1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active <= 1'b0; q <= '0; r <= '0; ky <= '0; kx <= '0;
      rd_q <= 1'b0; rd_slot_q <= '0; last_q <= 1'b0; done <= 1'b0;
    end else begin
      done   <= rd_q && last_q;
      rd_q   <= active;
      last_q <= active && last_issue;
      rd_slot_q <= AW'(q * b + r);
      if (start && !active) begin
        active <= 1'b1; q <= '0; r <= '0;
        ky <= 8'(q0 / 8'(ks));
        kx <= 8'(q0 % 8'(ks));
      end else if (active) begin
        if (r == b - 1'b1) begin
          r <= '0;
          if (q == d - 1'b1) active <= 1'b0;
          else begin
            q <= q + 1'b1;
            if (kx == 8'(ks) - 1) begin kx <= '0; ky <= ky + 1'b1; end
            else kx <= kx + 1'b1;
          end
        end else r <= r + 1'b1;
      end
    end
  end

  assign busy    = active || rd_q;
  assign l1_re   = active;
  assign l1_addr = IAW'(32'(ifm_base)
                        + ((32'(oy) * 32'(stride) + 32'(ky)) * 32'(iw) + 32'(ox) * 32'(stride) + 32'(kx)) * 32'(cg)
                        + 32'(r0) + 32'(r));
  assign arf_we    = rd_q;
  assign arf_waddr = rd_slot_q;
  assign arf_wdata = l1_data;
endmodule
