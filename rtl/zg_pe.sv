// zg_pe: processing element with its weight register file (WRF) and
// zero-value gating.
// The WRF (DEPTH x W_W bits) has one write port and two read ports: `now`
// (rd_addr) supplies the weight multiplied in this cycle and `next`
// (rd_addr_next) looks one cycle ahead. Together with the next input
// activation (ia_next) the PE knows one cycle in advance whether the product
// will be zero. It then registers a `zero` flag; in the following cycle the
// multiplier inputs are switched to the held copies of the last non-zero
// operands (so the multiplier does not toggle) and the output is forced to 0.
// The caller must present, as *_next, exactly what it presents as the
// current operands one cycle later; the result is then always the exact
// product. The structure (1W2R WRF, compare-with-zero on both next operands,
// hold registers, output mux to 0) is the paper's; the reset values are this
// implementation's choice.
// Timing: psum is combinational from rd_addr and ia (and the zero flag).
module zg_pe #(
  parameter int DEPTH = mvq_pkg::WRF_DEPTH,
  parameter int W_W   = mvq_pkg::QC,
  parameter int A_W   = mvq_pkg::ACT_W,
  localparam int AW   = $clog2(DEPTH)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // WRF write (weight preload)
  input  logic                  wr_en,
  input  logic [AW-1:0]         wr_addr,
  input  logic signed [W_W-1:0] wr_data,
  // compute
  input  logic [AW-1:0]         rd_addr,
  input  logic [AW-1:0]         rd_addr_next,
  input  logic signed [A_W-1:0] ia,
  input  logic signed [A_W-1:0] ia_next,
  output logic signed [W_W+A_W-1:0] psum,
  output logic                  gated
);
  logic signed [W_W-1:0] wrf [DEPTH];
  logic signed [W_W-1:0] w_now, w_next, w_hold, w_mul;
  logic signed [A_W-1:0] ia_hold, ia_mul;
  logic                  zero_q;

  always_ff @(posedge clk) begin
    if (wr_en) wrf[wr_addr] <= wr_data;
  end

  assign w_now  = wrf[rd_addr];
  assign w_next = wrf[rd_addr_next];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      zero_q  <= 1'b0;
      w_hold  <= '0;
      ia_hold <= '0;
    end else begin
      zero_q <= (w_next == '0) || (ia_next == '0);
      if (!zero_q) begin
        w_hold  <= w_now;
        ia_hold <= ia;
      end
    end
  end

  assign w_mul  = zero_q ? w_hold  : w_now;
  assign ia_mul = zero_q ? ia_hold : ia;
  assign psum   = zero_q ? '0 : (W_W+A_W)'(w_mul * ia_mul);
  assign gated  = zero_q;
endmodule
