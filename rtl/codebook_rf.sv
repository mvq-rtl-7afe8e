// codebook_rf: Codebook Register File (CRF). Holds k codewords of d signed
// QC-bit elements (512 x 16 x 8 bit = 8 KB by default). One write port, used by
// the weight loader to initialise the codebook once per layer or network, and
// NPORT = L/d independent read ports, so that one assignment row (one index
// per d output channels) reads all its codewords in the same cycle. Writes
// take effect at the clock edge; reads are combinational (register file).
// Not reset: the codebook is always written before it is read. Size and port
// count follow the paper; the port timing is this implementation's choice.
module codebook_rf #(
  parameter int KCW   = mvq_pkg::KCW,
  parameter int DVEC  = mvq_pkg::DVEC,
  parameter int QC    = mvq_pkg::QC,
  parameter int NPORT = mvq_pkg::NPORT,
  localparam int AW   = $clog2(KCW)
) (
  input  logic                           clk,
  input  logic                           we,
  input  logic [AW-1:0]                  waddr,
  input  logic [DVEC*QC-1:0]             wdata,
  input  logic [NPORT-1:0][AW-1:0]       raddr,
  output logic [NPORT-1:0][DVEC*QC-1:0]  rdata
);
  logic [DVEC*QC-1:0] mem [KCW];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
  end

  for (genvar p = 0; p < NPORT; p++) begin : g_rd
    assign rdata[p] = mem[raddr[p]];
  end
endmodule
