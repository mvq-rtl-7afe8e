// sparse_tile_row: one row of a sparse tile, i.e. one input channel times d
// output channels, with only Q = N/M*d multipliers.
// Weight load: the d-element sparse weight vector arrives with its d-bit mask.
// The cascaded LZC turns the mask into Q positions; Q multiplexers pick the
// weights at those positions and write them into the Q PEs' WRFs, and the
// positions go into Q mask register files (MRF, log2(d) bits each) at the
// same address. Compute: WRF and MRF are read at the same address; each PE's
// product is routed by a demultiplexer, steered by its MRF entry, to its
// output-channel slot of a d-wide psum line, and d adders add the line to the
// psum coming from the row above. Unused slots (mask with fewer than Q ones)
// hold weight 0. This structure follows the paper's sparse tile figure.
// Timing: psum_out is combinational from psum_in, rd_addr and ia.
module sparse_tile_row #(
  parameter int DVEC   = mvq_pkg::DVEC,
  parameter int Q      = mvq_pkg::Q,
  parameter int DEPTH  = mvq_pkg::WRF_DEPTH,
  parameter int W_W    = mvq_pkg::QC,
  parameter int A_W    = mvq_pkg::ACT_W,
  parameter int PSUM_W = mvq_pkg::PSUM_W,
  localparam int AW    = $clog2(DEPTH),
  localparam int PW    = $clog2(DVEC)
) (
  input  logic                               clk,
  input  logic                               rst_n,
  input  logic                               wr_en,
  input  logic [AW-1:0]                      wr_addr,
  input  logic [DVEC-1:0][W_W-1:0]           wr_vec,
  input  logic [DVEC-1:0]                    wr_mask,
  input  logic [AW-1:0]                      rd_addr,
  input  logic [AW-1:0]                      rd_addr_next,
  input  logic signed [A_W-1:0]              ia,
  input  logic signed [A_W-1:0]              ia_next,
  input  logic [DVEC-1:0][PSUM_W-1:0]        psum_in,
  output logic [DVEC-1:0][PSUM_W-1:0]        psum_out,
  output logic [Q-1:0]                       gated
);
  logic [Q-1:0][PW-1:0]   pos;
  logic [Q-1:0]           pos_valid;
  logic [PW-1:0]          mrf [Q][DEPTH];
  logic signed [W_W+A_W-1:0] prod [Q];

  cascaded_lzc #(.DVEC(DVEC), .Q(Q)) u_enc (
    .mask (wr_mask),
    .pos  (pos),
    .valid(pos_valid)
  );

  for (genvar i = 0; i < Q; i++) begin : g_pe
    logic signed [W_W-1:0] wsel;
    assign wsel = pos_valid[i] ? wr_vec[pos[i]] : '0;

    zg_pe #(.DEPTH(DEPTH), .W_W(W_W), .A_W(A_W)) u_pe (
      .clk, .rst_n,
      .wr_en, .wr_addr, .wr_data(wsel),
      .rd_addr, .rd_addr_next, .ia, .ia_next,
      .psum (prod[i]),
      .gated(gated[i])
    );

    always_ff @(posedge clk) begin
      if (wr_en) mrf[i][wr_addr] <= pos[i];
    end
  end

  // demultiplex the Q products onto the psum line and add to psum_in
  always_comb begin
    logic signed [PSUM_W-1:0] line [DVEC];
    for (int c = 0; c < DVEC; c++) line[c] = '0;
    for (int i = 0; i < Q; i++)
      line[mrf[i][rd_addr]] = line[mrf[i][rd_addr]] + PSUM_W'(prod[i]);
    for (int c = 0; c < DVEC; c++) psum_out[c] = psum_in[c] + line[c];
  end
endmodule
