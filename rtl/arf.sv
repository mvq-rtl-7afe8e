// arf: Activation Register File. Holds up to DEPTH activation vectors of H
// signed 8-bit values (one per input channel row) for the ofmap pixel being
// computed: entry q*B + r is kernel-plane position q, input-channel subset r
// of the EWS loop. The ifmap loader writes it; the controller reads one vector
// per compute cycle, and the same vector is reused for A consecutive cycles.
// One write port (clocked), one combinational read port, not reset (every
// entry read is written first). The register file is named by the paper; its
// depth and ports are this implementation's choice.
module arf #(
  parameter int H     = mvq_pkg::H,
  parameter int A_W   = mvq_pkg::ACT_W,
  parameter int DEPTH = mvq_pkg::ARF_DEPTH,
  localparam int AW   = $clog2(DEPTH)
) (
  input  logic                   clk,
  input  logic                   we,
  input  logic [AW-1:0]          waddr,
  input  logic [H-1:0][A_W-1:0]  wdata,
  input  logic [AW-1:0]          raddr,
  output logic [H-1:0][A_W-1:0]  rdata
);
  logic [H-1:0][A_W-1:0] mem [DEPTH];
  always_ff @(posedge clk) if (we) mem[waddr] <= wdata;
  assign rdata = mem[raddr];
endmodule
