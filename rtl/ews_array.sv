// ews_array: the sparsity-aware EWS systolic array, L/d sparse tiles side by
// side, each covering d output channels for all H input channels.
// Compute stream: every cycle the controller may present one sample: a valid
// bit, the WRF address to use, the H input activations and a tag (PRF address
// and first-accumulation flag) that travels with it. A register stage between
// neighbouring tiles passes the stream from tile to tile, as in the array
// figure; tile j sees sample t in cycle t+j+1 as its `now` operand and one
// cycle earlier as its `next` operand, which the zero-gated PEs need. Tile
// j's psums are then delayed by NT-1-j cycles so that all L psums of a sample
// leave together, NT = L/d cycles after the sample entered.
// Weight load: wr_en writes the sparse weights (L x 8 bit) and mask (L bits)
// of one input-channel row into all tiles at WRF address wr_addr.
// The inter-tile registers follow the figure; the de-skew registers and the
// tag are this implementation's choice.
module ews_array #(
  parameter int H      = mvq_pkg::H,
  parameter int L      = mvq_pkg::L,
  parameter int DVEC   = mvq_pkg::DVEC,
  parameter int Q      = mvq_pkg::Q,
  parameter int DEPTH  = mvq_pkg::WRF_DEPTH,
  parameter int W_W    = mvq_pkg::QC,
  parameter int A_W    = mvq_pkg::ACT_W,
  parameter int PSUM_W = mvq_pkg::PSUM_W,
  parameter int TAG_W  = 5,
  localparam int NT    = L / DVEC,
  localparam int AW    = $clog2(DEPTH),
  localparam int RW    = (H > 1) ? $clog2(H) : 1
) (
  input  logic                        clk,
  input  logic                        rst_n,
  // weight load
  input  logic                        wr_en,
  input  logic [RW-1:0]               wr_row,
  input  logic [AW-1:0]               wr_addr,
  input  logic [L-1:0][W_W-1:0]       wr_vec,
  input  logic [L-1:0]                wr_mask,
  // compute stream in
  input  logic                        in_valid,
  input  logic [AW-1:0]               in_addr,
  input  logic [H-1:0][A_W-1:0]       in_act,
  input  logic [TAG_W-1:0]            in_tag,
  // psums out, NT cycles later
  output logic                        out_valid,
  output logic [TAG_W-1:0]            out_tag,
  output logic [L-1:0][PSUM_W-1:0]    out_psum,
  output logic [31:0]                 gated_count
);
  typedef struct packed {
    logic                  valid;
    logic [AW-1:0]         addr;
    logic [H-1:0][A_W-1:0] act;
    logic [TAG_W-1:0]      tag;
  } sample_t;

  sample_t s [NT+1];
  logic [NT-1:0][H-1:0][Q-1:0] gated;

  assign s[0] = '{valid: in_valid, addr: in_addr, act: in_act, tag: in_tag};

  for (genvar k = 0; k < NT; k++) begin : g_stage
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) s[k+1] <= '0;
      else        s[k+1] <= s[k];
    end
  end

  for (genvar j = 0; j < NT; j++) begin : g_tile
    logic [DVEC-1:0][PSUM_W-1:0] tpsum;
    // de-skew line: NT-1-j registers
    logic [DVEC-1:0][PSUM_W-1:0] dly [NT-j];

    sparse_tile #(
      .H(H), .DVEC(DVEC), .Q(Q), .DEPTH(DEPTH), .W_W(W_W), .A_W(A_W), .PSUM_W(PSUM_W)
    ) u_tile (
      .clk, .rst_n,
      .wr_en, .wr_row, .wr_addr,
      .wr_vec      (wr_vec[j*DVEC +: DVEC]),
      .wr_mask     (wr_mask[j*DVEC +: DVEC]),
      .rd_addr     (s[j+1].addr),
      .rd_addr_next(s[j].addr),
      .ia          (s[j+1].act),
      .ia_next     (s[j].act),
      .psum_out    (tpsum),
      .gated       (gated[j])
    );

    assign dly[0] = tpsum;
    for (genvar k = 1; k < NT - j; k++) begin : g_dly
      always_ff @(posedge clk) dly[k] <= dly[k-1];
    end
    assign out_psum[j*DVEC +: DVEC] = dly[NT-1-j];
  end

  assign out_valid = s[NT].valid;
  assign out_tag   = s[NT].tag;

  // activity monitor: gated multiplier-cycles of valid samples
  logic [31:0] gated_now;
  always_comb begin
    gated_now = '0;
    for (int j = 0; j < NT; j++)
      if (s[j+1].valid)
        for (int h = 0; h < H; h++) gated_now += 32'($countones(gated[j][h]));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) gated_count <= '0;
    else        gated_count <= gated_count + gated_now;
  end
endmodule
