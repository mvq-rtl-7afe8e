// mvq_accel: accelerator subsystem for masked-vector-quantized CNNs.
// Weights are not stored as values but as an assignment per d output
// channels: a codeword index into a shared codebook and a code for the N:M
// pruning mask. The weight loader turns each assignment row back into sparse
// weights on the way from L2 to the array (codebook RF read, mask LUT, AND
// gates), so L2 traffic per row is NPORT*(IDX_W+MCODE_W) bits instead of
// L*8. The array keeps only the Q = N/M*d unpruned weights per row and tile.
// Blocks: L2 SRAM (compressed model), weight loader + codebook RF, L1 buffer
// (ifmaps, psums), ifmap loader + ARF, EWS controller, sparse EWS array,
// PRF, ofmap storer. The external host (SoC CPU and DMA, outside this
// design) fills L2 and L1 through the host ports, writes a layer_cfg_t and
// pulses `start`; `done` pulses when all ofmap pixels of the pass are in L1.
// Statistics outputs count compute cycles, stall cycles (array idle while the
// ARF is loaded, the array drains or the PRF is stored), zero-gated
// multiplier-cycles and ReLU-clamped outputs.
module mvq_accel #(
  parameter int H         = mvq_pkg::H,
  parameter int L         = mvq_pkg::L,
  parameter int DVEC      = mvq_pkg::DVEC,
  parameter int NKEEP     = mvq_pkg::NKEEP,
  parameter int MGRP      = mvq_pkg::MGRP,
  parameter int KCW       = mvq_pkg::KCW,
  parameter int L2_WORDS  = 262144,
  parameter int IFM_WORDS = 2048,
  parameter int PS_WORDS  = 512,
  localparam int Q        = NKEEP * DVEC / MGRP,
  localparam int NT       = L / DVEC,
  localparam int QC       = mvq_pkg::QC,
  localparam int A_W      = mvq_pkg::ACT_W,
  localparam int PSUM_W   = mvq_pkg::PSUM_W,
  localparam int DEPTH    = mvq_pkg::WRF_DEPTH,
  localparam int AW       = $clog2(DEPTH),
  localparam int TAG_W    = AW + 1,
  localparam int L2_AW    = $clog2(L2_WORDS),
  localparam int IAW      = $clog2(IFM_WORDS),
  localparam int PAW      = $clog2(PS_WORDS),
  localparam int IDX_W    = $clog2(KCW),
  localparam int RW       = (H > 1) ? $clog2(H) : 1
) (
  input  logic                      clk,
  input  logic                      rst_n,
  // control
  input  mvq_pkg::layer_cfg_t       cfg,
  input  logic                      start,
  output logic                      busy,
  output logic                      done,
  // host: L2 fill
  input  logic                      host_l2_we,
  input  logic [L2_AW-1:0]          host_l2_addr,
  input  logic [mvq_pkg::DMA_W-1:0] host_l2_wdata,
  // host: L1 ifmap fill and psum read
  input  logic                      host_ifm_we,
  input  logic [IAW-1:0]            host_ifm_addr,
  input  logic [H-1:0][A_W-1:0]     host_ifm_wdata,
  input  logic                      host_ps_re,
  input  logic [PAW-1:0]            host_ps_addr,
  output logic [L-1:0][PSUM_W-1:0]  host_ps_rdata,
  // statistics
  output logic [31:0]               compute_cycles,
  output logic [31:0]               stall_cycles,
  output logic [31:0]               gated_count,
  output logic [31:0]               relu_count
);
  // ---------------- weight path ----------------
  logic                          l2_req, l2_valid;
  logic [L2_AW-1:0]              l2_addr;
  logic [mvq_pkg::DMA_W-1:0]     l2_data;
  logic                          crf_we;
  logic [IDX_W-1:0]              crf_waddr;
  logic [DVEC*QC-1:0]            crf_wdata;
  logic [NT-1:0][IDX_W-1:0]      crf_raddr;
  logic [NT-1:0][DVEC*QC-1:0]    crf_rdata;
  logic                          arr_we;
  logic [RW-1:0]                 arr_row;
  logic [AW-1:0]                 arr_waddr;
  logic [L-1:0][QC-1:0]          arr_vec;
  logic [L-1:0]                  arr_mask;
  logic                          cb_start, asg_start, wl_done, wl_busy;
  logic [AW:0]                   n_entries;

  l2_sram #(.WORDS(L2_WORDS)) u_l2 (
    .clk, .rst_n,
    .host_we(host_l2_we), .host_addr(host_l2_addr), .host_wdata(host_l2_wdata),
    .rd_req(l2_req), .rd_addr(l2_addr), .rd_valid(l2_valid), .rd_data(l2_data)
  );

  weight_loader #(
    .H(H), .L(L), .DVEC(DVEC), .NPORT(NT), .KCW(KCW), .QC(QC),
    .MGRP(MGRP), .NKEEP(NKEEP), .DEPTH(DEPTH), .L2_AW(L2_AW)
  ) u_wl (
    .clk, .rst_n,
    .cb_start, .cb_base(L2_AW'(cfg.cb_base)),
    .asg_start, .asg_base(L2_AW'(cfg.asg_base)), .n_entries,
    .busy(wl_busy), .done(wl_done),
    .l2_req, .l2_addr, .l2_valid, .l2_data,
    .crf_we, .crf_waddr, .crf_wdata, .crf_raddr, .crf_rdata,
    .arr_we, .arr_row, .arr_addr(arr_waddr), .arr_vec, .arr_mask
  );

  codebook_rf #(.KCW(KCW), .DVEC(DVEC), .QC(QC), .NPORT(NT)) u_crf (
    .clk, .we(crf_we), .waddr(crf_waddr), .wdata(crf_wdata),
    .raddr(crf_raddr), .rdata(crf_rdata)
  );

  // ---------------- activation path ----------------
  logic                    l1_ifm_re;
  logic [IAW-1:0]          l1_ifm_addr;
  logic [H-1:0][A_W-1:0]   l1_ifm_data;
  logic                    arf_we;
  logic [AW-1:0]           arf_waddr, arf_raddr;
  logic [H-1:0][A_W-1:0]   arf_wdata, arf_rdata;
  logic                    il_start, il_done, il_busy;
  logic [7:0]              oy, ox;

  ifmap_loader #(.H(H), .DEPTH(DEPTH), .IAW(IAW)) u_il (
    .clk, .rst_n, .start(il_start), .oy, .ox,
    .b(cfg.b), .d(cfg.d), .q0(cfg.q0), .ks(cfg.ks), .stride(cfg.stride), .iw(cfg.iw), .cg(cfg.cg),
    .r0(cfg.r0), .ifm_base(cfg.ifm_base),
    .busy(il_busy), .done(il_done),
    .l1_re(l1_ifm_re), .l1_addr(l1_ifm_addr), .l1_data(l1_ifm_data),
    .arf_we, .arf_waddr, .arf_wdata
  );

  arf #(.H(H), .DEPTH(DEPTH)) u_arf (
    .clk, .we(arf_we), .waddr(arf_waddr), .wdata(arf_wdata),
    .raddr(arf_raddr), .rdata(arf_rdata)
  );

  // ---------------- controller and array ----------------
  logic                    st_start, st_done, st_busy;
  logic                    s_valid, o_valid;
  logic [AW-1:0]           s_addr;
  logic [TAG_W-1:0]        s_tag, o_tag;
  logic [L-1:0][PSUM_W-1:0] o_psum;

  ews_controller #(.DEPTH(DEPTH), .NT(NT), .TAG_W(TAG_W)) u_ctrl (
    .clk, .rst_n, .start, .cfg, .busy, .done,
    .cb_start, .asg_start, .n_entries, .wl_done,
    .il_start, .il_done, .st_start, .st_done,
    .oy, .ox,
    .arr_valid(s_valid), .arr_addr(s_addr), .arf_raddr, .arr_tag(s_tag),
    .compute_cycles, .stall_cycles
  );

  ews_array #(
    .H(H), .L(L), .DVEC(DVEC), .Q(Q), .DEPTH(DEPTH), .TAG_W(TAG_W)
  ) u_array (
    .clk, .rst_n,
    .wr_en(arr_we), .wr_row(arr_row), .wr_addr(arr_waddr),
    .wr_vec(arr_vec), .wr_mask(arr_mask),
    .in_valid(s_valid), .in_addr(s_addr), .in_act(arf_rdata), .in_tag(s_tag),
    .out_valid(o_valid), .out_tag(o_tag), .out_psum(o_psum),
    .gated_count
  );

  // ---------------- psum path ----------------
  logic [AW-1:0]            prf_raddr;
  logic [L-1:0][PSUM_W-1:0] prf_rdata;
  logic                     l1_ps_re, l1_ps_we;
  logic [PAW-1:0]           l1_ps_raddr, l1_ps_waddr;
  logic [L-1:0][PSUM_W-1:0] l1_ps_rdata, l1_ps_wdata;

  prf #(.L(L), .DEPTH(DEPTH)) u_prf (
    .clk, .acc_en(o_valid), .acc_first(o_tag[AW]), .acc_addr(o_tag[AW-1:0]),
    .acc_data(o_psum), .raddr(prf_raddr), .rdata(prf_rdata)
  );

  ofmap_storer #(.L(L), .DEPTH(DEPTH), .PAW(PAW)) u_st (
    .clk, .rst_n, .start(st_start), .oy, .ox, .ow(cfg.ow), .a(cfg.a),
    .kg(cfg.kg), .kg0(cfg.kg0), .ofm_base(cfg.ofm_base),
    .accumulate(cfg.accumulate), .relu(cfg.relu),
    .busy(st_busy), .done(st_done),
    .prf_raddr, .prf_rdata,
    .l1_re(l1_ps_re), .l1_raddr(l1_ps_raddr), .l1_rdata(l1_ps_rdata),
    .l1_we(l1_ps_we), .l1_waddr(l1_ps_waddr), .l1_wdata(l1_ps_wdata),
    .relu_count
  );

  l1_buffer #(.H(H), .L(L), .IFM_WORDS(IFM_WORDS), .PS_WORDS(PS_WORDS)) u_l1 (
    .clk,
    .ifm_re(l1_ifm_re), .ifm_raddr(l1_ifm_addr), .ifm_rdata(l1_ifm_data),
    .ps_re(l1_ps_re), .ps_raddr(l1_ps_raddr), .ps_rdata(l1_ps_rdata),
    .ps_we(l1_ps_we), .ps_waddr(l1_ps_waddr), .ps_wdata(l1_ps_wdata),
    .host_ifm_we, .host_ifm_addr, .host_ifm_wdata,
    .host_ps_re, .host_ps_addr, .host_ps_rdata
  );
endmodule
