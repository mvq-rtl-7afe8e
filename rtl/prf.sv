// prf: Partial Sum Register File. Holds DEPTH rows of L psums, one row per
// output-channel subset s (< A) of the EWS loop, so that psums are
// accumulated over the B input-channel subsets and D kernel positions without
// touching the on-chip SRAM. acc_en adds acc_data to row acc_addr, or
// overwrites it when acc_first is set (first contribution of a pixel).
// Read port is combinational, for the ofmap storer. Not reset: a row is always
// started with acc_first. Named and motivated by the paper; depth, ports and
// the first flag are this implementation's choice.
module prf #(
  parameter int L      = mvq_pkg::L,
  parameter int PSUM_W = mvq_pkg::PSUM_W,
  parameter int DEPTH  = mvq_pkg::PRF_DEPTH,
  localparam int AW    = $clog2(DEPTH)
) (
  input  logic                     clk,
  input  logic                     acc_en,
  input  logic                     acc_first,
  input  logic [AW-1:0]            acc_addr,
  input  logic [L-1:0][PSUM_W-1:0] acc_data,
  input  logic [AW-1:0]            raddr,
  output logic [L-1:0][PSUM_W-1:0] rdata
);
  logic [L-1:0][PSUM_W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (acc_en) begin
      for (int c = 0; c < L; c++)
        mem[acc_addr][c] <= acc_first ? acc_data[c] : mem[acc_addr][c] + acc_data[c];
    end
  end

  assign rdata = mem[raddr];
endmodule
