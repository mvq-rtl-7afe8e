// ofmap_storer: writes the psums of one ofmap pixel from the PRF to L1.
// For each output-channel subset s < A it stores PRF row s (L psums) to L1
// word ofm_base + (oy*OW + ox)*KG + kg0 + s. When `accumulate` is set the
// word is first read and the stored value is old + new (psums of earlier
// input-channel or kernel subsets of the same layer). When `relu` is set (the
// last pass over a layer) the activation unit clamps negative results to 0.
// Each row takes two cycles (L1 read, then write); with accumulate off the
// read is skipped. `done` pulses in the cycle after the last write. The
// storer and its activation unit are named by the paper; addressing, the
// read-modify-write and ReLU as the activation are this implementation's
// choices.
module ofmap_storer #(
  parameter int L      = mvq_pkg::L,
  parameter int PSUM_W = mvq_pkg::PSUM_W,
  parameter int DEPTH  = mvq_pkg::PRF_DEPTH,
  parameter int PAW    = 9,
  localparam int AW    = $clog2(DEPTH)
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     start,
  input  logic [7:0]               oy, ox, ow,
  input  logic [4:0]               a,
  input  logic [7:0]               kg, kg0,
  input  logic [15:0]              ofm_base,
  input  logic                     accumulate,
  input  logic                     relu,
  output logic                     busy,
  output logic                     done,
  // PRF read port
  output logic [AW-1:0]            prf_raddr,
  input  logic [L-1:0][PSUM_W-1:0] prf_rdata,
  // L1 psum port
  output logic                     l1_re,
  output logic [PAW-1:0]           l1_raddr,
  input  logic [L-1:0][PSUM_W-1:0] l1_rdata,
  output logic                     l1_we,
  output logic [PAW-1:0]           l1_waddr,
  output logic [L-1:0][PSUM_W-1:0] l1_wdata,
  output logic [31:0]              relu_count
);
  typedef enum logic [1:0] {IDLE, READ, WRITE} state_e;
  state_e state;
  logic [4:0] s;
  logic [PAW-1:0] addr;

  assign addr = PAW'(32'(ofm_base) + (32'(oy) * 32'(ow) + 32'(ox)) * 32'(kg) + 32'(kg0) + 32'(s));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= IDLE; s <= '0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      case (state)
        IDLE:  if (start) begin
                 s <= '0;
                 state <= accumulate ? READ : WRITE;
               end
        READ:  state <= WRITE;
        WRITE: begin
                 if (s == a - 1'b1) begin
                   state <= IDLE; done <= 1'b1;
                 end else begin
                   s <= s + 1'b1;
                   state <= accumulate ? READ : WRITE;
                 end
               end
        default: state <= IDLE;
      endcase
    end
  end

  assign busy      = (state != IDLE);
  assign prf_raddr = AW'(s);
  assign l1_re     = (state == READ);
  assign l1_raddr  = addr;
  assign l1_we     = (state == WRITE);
  assign l1_waddr  = addr;

  // accumulate and activation unit
  logic [L-1:0] neg;
  always_comb begin
    for (int c = 0; c < L; c++) begin
      logic signed [PSUM_W-1:0] v;
      v = accumulate ? $signed(prf_rdata[c]) + $signed(l1_rdata[c]) : $signed(prf_rdata[c]);
      neg[c] = v[PSUM_W-1];
      l1_wdata[c] = (relu && neg[c]) ? '0 : v;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) relu_count <= '0;
    else if (l1_we && relu) relu_count <= relu_count + 32'($countones(neg));
  end
endmodule
