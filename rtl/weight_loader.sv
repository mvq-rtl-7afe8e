// weight_loader: assignment-aware weight loading.
// Two jobs, each started by a one-cycle pulse:
//  * codebook init (cb_start): reads KCW codewords from L2, starting at word
//    cb_base, CB_BEATS 64-bit words per codeword (lowest word first), and
//    writes them into the codebook RF;
//  * assignment load (asg_start): reads H*n_entries assignment rows from L2
//    starting at asg_base, ASG_BEATS words per row, row order
//    (input-channel row h, then WRF entry e). A row carries, for each of the
//    NPORT = L/d output-channel groups j, a codeword index (low IDX_W bits)
//    and a mask code (next MCODE_W bits) in bits [j*(IDX_W+MCODE_W) +: ...].
//    The indices address the NPORT CRF read ports, the mask codes go through
//    NPORT mask LUTs, and AND gates zero the pruned elements of each dense
//    codeword. The resulting sparse weights (L x 8 bit) and masks (L bits)
//    are written into array row h, WRF entry e, one cycle after the last word
//    of the row has arrived.
// L2 reads are issued one per cycle without gaps (the L2 port is always
// ready, one cycle latency). `busy` is high from the start pulse until the
// last write; `done` pulses once at the end. Index-as-CRF-address, LUT mask
// restore and AND-gate masking follow the paper; the L2 layout, beat order
// and streaming are this implementation's choices.
module weight_loader #(
  parameter int H       = mvq_pkg::H,
  parameter int L       = mvq_pkg::L,
  parameter int DVEC    = mvq_pkg::DVEC,
  parameter int NPORT   = mvq_pkg::NPORT,
  parameter int KCW     = mvq_pkg::KCW,
  parameter int QC      = mvq_pkg::QC,
  parameter int MGRP    = mvq_pkg::MGRP,
  parameter int NKEEP   = mvq_pkg::NKEEP,
  parameter int DEPTH   = mvq_pkg::WRF_DEPTH,
  parameter int DW      = mvq_pkg::DMA_W,
  parameter int L2_AW   = 18,
  localparam int IDX_W  = $clog2(KCW),
  localparam int MCODE_W = $clog2(mvq_pkg::n_choose_k(MGRP, NKEEP)),
  localparam int ENT_W  = IDX_W + MCODE_W,
  localparam int CB_BEATS  = (DVEC*QC + DW - 1) / DW,
  localparam int ASG_BEATS = (NPORT*ENT_W + DW - 1) / DW,
  localparam int MAXB   = (CB_BEATS > ASG_BEATS) ? CB_BEATS : ASG_BEATS,
  localparam int AW     = $clog2(DEPTH),
  localparam int RW     = (H > 1) ? $clog2(H) : 1
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         cb_start,
  input  logic [L2_AW-1:0]             cb_base,
  input  logic                         asg_start,
  input  logic [L2_AW-1:0]             asg_base,
  input  logic [AW:0]                  n_entries,
  output logic                         busy,
  output logic                         done,
  // L2 read port
  output logic                         l2_req,
  output logic [L2_AW-1:0]             l2_addr,
  input  logic                         l2_valid,
  input  logic [DW-1:0]                l2_data,
  // codebook RF
  output logic                         crf_we,
  output logic [IDX_W-1:0]             crf_waddr,
  output logic [DVEC*QC-1:0]           crf_wdata,
  output logic [NPORT-1:0][IDX_W-1:0]  crf_raddr,
  input  logic [NPORT-1:0][DVEC*QC-1:0] crf_rdata,
  // array weight write
  output logic                         arr_we,
  output logic [RW-1:0]                arr_row,
  output logic [AW-1:0]                arr_addr,
  output logic [L-1:0][QC-1:0]         arr_vec,
  output logic [L-1:0]                 arr_mask
);
  typedef enum logic [1:0] {IDLE, CODEBOOK, ASSIGN} mode_e;
  mode_e mode;

  logic [31:0] total_beats, req_cnt, rcv_cnt, item_cnt;
  logic [L2_AW-1:0] base;
  logic [$clog2(MAXB+1)-1:0] beat;
  logic [MAXB*DW-1:0] gather;
  logic item_ready;                 // a complete item sits in `gather`
  logic [31:0] out_item;            // index of that item
  logic [NPORT*ENT_W-1:0] asg_row;
  logic [31:0] beats_per_item;

  assign beats_per_item = (mode == CODEBOOK) ? CB_BEATS : ASG_BEATS;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mode <= IDLE; req_cnt <= '0; rcv_cnt <= '0; total_beats <= '0;
      base <= '0; beat <= '0; gather <= '0; item_ready <= 1'b0;
      out_item <= '0; item_cnt <= '0; done <= 1'b0;
    end else begin
      done       <= 1'b0;
      item_ready <= 1'b0;
      if (mode == IDLE) begin
        req_cnt <= '0; rcv_cnt <= '0; beat <= '0; item_cnt <= '0;
        if (cb_start) begin
          mode <= CODEBOOK; base <= cb_base; total_beats <= 32'(KCW * CB_BEATS);
        end else if (asg_start) begin
          mode <= ASSIGN; base <= asg_base;
          total_beats <= 32'(H) * 32'(n_entries) * 32'(ASG_BEATS);
        end
      end else begin
        if (req_cnt < total_beats) req_cnt <= req_cnt + 1;
        if (l2_valid) begin
          gather[32'(beat)*DW +: DW] <= l2_data;
          rcv_cnt <= rcv_cnt + 1;
          if (32'(beat) == beats_per_item - 1) begin
            beat       <= '0;
            item_ready <= 1'b1;
            out_item   <= item_cnt;
            item_cnt   <= item_cnt + 1;
          end else begin
            beat <= beat + 1'b1;
          end
        end
        if (item_ready && out_item == (total_beats / beats_per_item) - 1) begin
          mode <= IDLE;
          done <= 1'b1;
        end
      end
    end
  end

  assign busy    = (mode != IDLE);
  assign l2_req  = (mode != IDLE) && (req_cnt < total_beats);
  assign l2_addr = base + L2_AW'(req_cnt);

  // codebook write
  assign crf_we    = item_ready && (mode == CODEBOOK);
  assign crf_waddr = IDX_W'(out_item);
  assign crf_wdata = gather[DVEC*QC-1:0];

  // masked codebook read out
  assign asg_row = gather[NPORT*ENT_W-1:0];
  for (genvar j = 0; j < NPORT; j++) begin : g_port
    logic [MCODE_W-1:0] code;
    logic [DVEC-1:0]    mask;
    assign crf_raddr[j] = asg_row[j*ENT_W +: IDX_W];
    assign code         = asg_row[j*ENT_W + IDX_W +: MCODE_W];
    mask_lut #(.MGRP(MGRP), .NKEEP(NKEEP)) u_lut (.code(code), .mask(mask));
    for (genvar i = 0; i < DVEC; i++) begin : g_and
      assign arr_vec[j*DVEC + i] = crf_rdata[j][i*QC +: QC] & {QC{mask[i]}};
    end
    assign arr_mask[j*DVEC +: DVEC] = mask;
  end

  // WRF manage: item number -> (row, entry)
  assign arr_we   = item_ready && (mode == ASSIGN);
  assign arr_row  = RW'(out_item / 32'(n_entries));
  assign arr_addr = AW'(out_item % 32'(n_entries));
endmodule
