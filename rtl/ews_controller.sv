// ews_controller: array controller that runs one pass of a convolution layer
// in the Enhanced Weight Stationary (EWS) order.
// A pass covers one weight subset: per array row A*B*D weights, for A output-
// channel subsets, B input-channel subsets and D kernel-plane positions
// (A*B*D <= WRF depth). Sequence: optional codebook init -> assignment load
// into the WRFs -> for every ofmap pixel (row-major): load the B*D activation
// vectors into the ARF, stream A*B*D compute samples, wait NT cycles for the
// array to drain, store the A psum rows -> done.
// The compute loop is the paper's EWS extension, innermost first:
//   for q < D (kernel plane) / for r < B (input channels) / for s < A (output
//   channels): WRF entry (q*B + r)*A + s, ARF entry q*B + r, PRF row s.
// So one activation vector stays in the PEs for A cycles while the weights
// switch, and psums of the A subsets accumulate in the PRF over B*D vectors.
// The sample tag is {first, s}: `first` marks q = 0, r = 0, where the PRF row
// is overwritten rather than added to.
// Loading, computing and storing are not overlapped (the array stalls while
// the ARF is loaded and the PRF stored); that and the handshake with the
// loaders are this implementation's choices. Cycle counters report busy
// compute cycles and stall cycles.
module ews_controller #(
  parameter int DEPTH = mvq_pkg::WRF_DEPTH,
  parameter int NT    = mvq_pkg::NPORT,
  parameter int TAG_W = 5,
  localparam int AW   = $clog2(DEPTH)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  mvq_pkg::layer_cfg_t  cfg,
  output logic                 busy,
  output logic                 done,
  // weight loader
  output logic                 cb_start,
  output logic                 asg_start,
  output logic [AW:0]          n_entries,
  input  logic                 wl_done,
  // ifmap loader
  output logic                 il_start,
  input  logic                 il_done,
  // ofmap storer
  output logic                 st_start,
  input  logic                 st_done,
  // current pixel
  output logic [7:0]           oy, ox,
  // array stream
  output logic                 arr_valid,
  output logic [AW-1:0]        arr_addr,
  output logic [AW-1:0]        arf_raddr,
  output logic [TAG_W-1:0]     arr_tag,
  // statistics
  output logic [31:0]          compute_cycles,
  output logic [31:0]          stall_cycles
);
  typedef enum logic [3:0] {
    S_IDLE, S_CB, S_WL, S_ALOAD, S_COMP, S_DRAIN, S_STORE, S_DONE
  } state_e;
  state_e state;

  logic [4:0] q, r, s;
  logic [7:0] drain;
  logic       req;        // start pulse for the current phase not yet sent

  assign n_entries = (AW+1)'(cfg.a * cfg.b * cfg.d);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; q <= '0; r <= '0; s <= '0; drain <= '0; req <= 1'b0;
      oy <= '0; ox <= '0; done <= 1'b0;
      compute_cycles <= '0; stall_cycles <= '0;
    end else begin
      done <= 1'b0;
      req  <= 1'b0;
      if (state == S_COMP) compute_cycles <= compute_cycles + 1;
      else if (state == S_ALOAD || state == S_DRAIN || state == S_STORE)
        stall_cycles <= stall_cycles + 1;
      case (state)
        S_IDLE: if (start) begin
          oy <= '0; ox <= '0; req <= 1'b1;
          state <= cfg.cb_init ? S_CB : S_WL;
        end
        S_CB: if (wl_done) begin state <= S_WL; req <= 1'b1; end
        S_WL: if (wl_done) begin state <= S_ALOAD; req <= 1'b1; end
        S_ALOAD: if (il_done) begin
          state <= S_COMP; q <= '0; r <= '0; s <= '0;
        end
        S_COMP: begin
          if (s == cfg.a - 1'b1) begin
            s <= '0;
            if (r == cfg.b - 1'b1) begin
              r <= '0;
              if (q == cfg.d - 1'b1) begin
                state <= S_DRAIN; drain <= 8'(NT);
              end else q <= q + 1'b1;
            end else r <= r + 1'b1;
          end else s <= s + 1'b1;
        end
        S_DRAIN: begin
          drain <= drain - 1'b1;
          if (drain == 8'd1) begin state <= S_STORE; req <= 1'b1; end
        end
        S_STORE: if (st_done) begin
          if (ox == cfg.ow - 1'b1) begin
            ox <= '0;
            if (oy == cfg.oh - 1'b1) state <= S_DONE;
            else begin oy <= oy + 1'b1; state <= S_ALOAD; req <= 1'b1; end
          end else begin
            ox <= ox + 1'b1; state <= S_ALOAD; req <= 1'b1;
          end
        end
        S_DONE: begin done <= 1'b1; state <= S_IDLE; end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy      = (state != S_IDLE);
  assign cb_start  = req && (state == S_CB);
  assign asg_start = req && (state == S_WL);
  assign il_start  = req && (state == S_ALOAD);
  assign st_start  = req && (state == S_STORE);

  assign arr_valid = (state == S_COMP);
  assign arr_addr  = AW'((q * cfg.b + r) * cfg.a + s);
  assign arf_raddr = AW'(q * cfg.b + r);
  assign arr_tag   = TAG_W'({(q == 0) && (r == 0), AW'(s)});
endmodule
