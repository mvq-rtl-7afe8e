// sparse_tile: a combinational tile of H rows by d output channels.
// H sparse_tile_row instances are chained through their psum inputs, so the
// tile reduces the products of all H input channels for its d output channels
// in one cycle (a combinational tile in the manner of Gemmini; the resource
// table of the paper counts one tile as H x d). Row `wr_row` is written when
// wr_en is high. All rows share the WRF read addresses; each row has its own
// input activation. Timing: psum_out is combinational from the compute
// inputs; the WRF/MRF writes and the PEs' zero flags are clocked.
module sparse_tile #(
  parameter int H      = mvq_pkg::H,
  parameter int DVEC   = mvq_pkg::DVEC,
  parameter int Q      = mvq_pkg::Q,
  parameter int DEPTH  = mvq_pkg::WRF_DEPTH,
  parameter int W_W    = mvq_pkg::QC,
  parameter int A_W    = mvq_pkg::ACT_W,
  parameter int PSUM_W = mvq_pkg::PSUM_W,
  localparam int AW    = $clog2(DEPTH),
  localparam int RW    = (H > 1) ? $clog2(H) : 1
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         wr_en,
  input  logic [RW-1:0]                wr_row,
  input  logic [AW-1:0]                wr_addr,
  input  logic [DVEC-1:0][W_W-1:0]     wr_vec,
  input  logic [DVEC-1:0]              wr_mask,
  input  logic [AW-1:0]                rd_addr,
  input  logic [AW-1:0]                rd_addr_next,
  input  logic [H-1:0][A_W-1:0]        ia,
  input  logic [H-1:0][A_W-1:0]        ia_next,
  output logic [DVEC-1:0][PSUM_W-1:0]  psum_out,
  output logic [H-1:0][Q-1:0]          gated
);
  logic [H:0][DVEC-1:0][PSUM_W-1:0] chain;
  assign chain[0] = '0;

  for (genvar h = 0; h < H; h++) begin : g_row
    sparse_tile_row #(
      .DVEC(DVEC), .Q(Q), .DEPTH(DEPTH), .W_W(W_W), .A_W(A_W), .PSUM_W(PSUM_W)
    ) u_row (
      .clk, .rst_n,
      .wr_en       (wr_en && (32'(wr_row) == h)),
      .wr_addr, .wr_vec, .wr_mask,
      .rd_addr, .rd_addr_next,
      .ia          (ia[h]),
      .ia_next     (ia_next[h]),
      .psum_in     (chain[h]),
      .psum_out    (chain[h+1]),
      .gated       (gated[h])
    );
  end

  assign psum_out = chain[H];
endmodule
