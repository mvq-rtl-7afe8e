// l2_sram: the on-chip L2 SRAM (2 MB by default: 262144 words of 64 bits)
// that holds the compressed model: the codebook (k codewords of d x 8 bits)
// and the assignment rows (codeword index and mask code per d output
// channels). The weight loader reads it through a 64-bit port, the width of
// the DMA path; a read issued in one cycle returns its word, with rvalid, in
// the next. A host port writes it (standing in for the transfer from
// off-chip DRAM). The size and the 64-bit width follow the paper; the
// one-cycle, always-ready read port is this implementation's choice.
module l2_sram #(
  parameter int WORDS = 262144,
  parameter int DW    = mvq_pkg::DMA_W,
  localparam int AW   = $clog2(WORDS)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          host_we,
  input  logic [AW-1:0] host_addr,
  input  logic [DW-1:0] host_wdata,
  input  logic          rd_req,
  input  logic [AW-1:0] rd_addr,
  output logic          rd_valid,
  output logic [DW-1:0] rd_data
);
  logic [DW-1:0] mem [WORDS];

  always_ff @(posedge clk) begin
    if (host_we) mem[host_addr] <= host_wdata;
    if (rd_req)  rd_data <= mem[rd_addr];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) rd_valid <= 1'b0;
    else        rd_valid <= rd_req;
  end
endmodule
