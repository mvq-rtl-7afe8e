// l1_buffer: the L1 global buffer between the data access controllers and
// the array, built from SRAM banks (modelled as arrays). Ifmaps are stored
// channel first: one word holds the H 8-bit activations of one pixel and one
// input-channel group, split over H/8 banks of 64 bits that are accessed
// together. Psums and ofmaps are stored one word per pixel and output-channel
// group, L x 32 bits, over L/2 banks of 64 bits. Default capacity is
// 2048 x 512 bit + 512 x 2048 bit = 256 KB, the L1 size given for the 32x32
// and 64x64 arrays; the split between the two regions is this
// implementation's choice. All reads have one cycle of latency, as the paper
// states ("single-cycle delay"). Ports: ifmap read (ifmap loader), psum
// read/write (ofmap storer), and a host port standing in for the DMA that
// fills ifmaps and drains ofmaps. A psum write and a host psum read in the
// same cycle are both served.
module l1_buffer #(
  parameter int H       = mvq_pkg::H,
  parameter int L       = mvq_pkg::L,
  parameter int A_W     = mvq_pkg::ACT_W,
  parameter int PSUM_W  = mvq_pkg::PSUM_W,
  parameter int IFM_WORDS = 2048,
  parameter int PS_WORDS  = 512,
  localparam int IAW    = $clog2(IFM_WORDS),
  localparam int PAW    = $clog2(PS_WORDS),
  localparam int IBANKS = H * A_W / 64,
  localparam int PBANKS = L * PSUM_W / 64
) (
  input  logic                       clk,
  // ifmap read port
  input  logic                       ifm_re,
  input  logic [IAW-1:0]             ifm_raddr,
  output logic [H-1:0][A_W-1:0]      ifm_rdata,
  // psum port
  input  logic                       ps_re,
  input  logic [PAW-1:0]             ps_raddr,
  output logic [L-1:0][PSUM_W-1:0]   ps_rdata,
  input  logic                       ps_we,
  input  logic [PAW-1:0]             ps_waddr,
  input  logic [L-1:0][PSUM_W-1:0]   ps_wdata,
  // host (DMA side) port
  input  logic                       host_ifm_we,
  input  logic [IAW-1:0]             host_ifm_addr,
  input  logic [H-1:0][A_W-1:0]      host_ifm_wdata,
  input  logic                       host_ps_re,
  input  logic [PAW-1:0]             host_ps_addr,
  output logic [L-1:0][PSUM_W-1:0]   host_ps_rdata
);
  logic [63:0] ibank [IBANKS][IFM_WORDS];
  logic [63:0] pbank [PBANKS][PS_WORDS];

  for (genvar b = 0; b < IBANKS; b++) begin : g_ib
    always_ff @(posedge clk) begin
      if (host_ifm_we) ibank[b][host_ifm_addr] <= host_ifm_wdata[b*8 +: 8];
      if (ifm_re) ifm_rdata[b*8 +: 8] <= ibank[b][ifm_raddr];
    end
  end

  for (genvar b = 0; b < PBANKS; b++) begin : g_pb
    always_ff @(posedge clk) begin
      if (ps_we) pbank[b][ps_waddr] <= ps_wdata[b*2 +: 2];
      if (ps_re) ps_rdata[b*2 +: 2] <= pbank[b][ps_raddr];
      if (host_ps_re) host_ps_rdata[b*2 +: 2] <= pbank[b][host_ps_addr];
    end
  end
endmodule
