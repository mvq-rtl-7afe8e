// cascaded_lzc: encoder of an N:M sparsity mask into Q bit positions.
// A mask with Q set bits cannot be encoded by a one-hot encoder, so Q LZC
// stages are chained: stage i finds the leading set bit of its input, reports
// its index as pos[i], and passes the input XOR the one-hot of that bit to
// stage i+1. The positions therefore come out in descending order. A stage
// that finds no set bit (mask with fewer than Q ones) reports valid[i] = 0 and
// position 0. Purely combinational; the chain of Q stages follows the paper.
module cascaded_lzc #(
  parameter int DVEC = mvq_pkg::DVEC,
  parameter int Q    = mvq_pkg::Q,
  localparam int PW  = $clog2(DVEC)
) (
  input  logic [DVEC-1:0]   mask,
  output logic [Q-1:0][PW-1:0] pos,
  output logic [Q-1:0]      valid
);
  logic [Q:0][DVEC-1:0] stage_in;
  logic [Q-1:0][DVEC-1:0] onehot;

  assign stage_in[0] = mask;

  for (genvar i = 0; i < Q; i++) begin : g_stage
    logic [PW:0] unused_count;
    lzc #(.WIDTH(DVEC)) u_lzc (
      .in    (stage_in[i]),
      .count (unused_count),
      .pos   (pos[i]),
      .onehot(onehot[i]),
      .valid (valid[i])
    );
    assign stage_in[i+1] = stage_in[i] ^ onehot[i];
  end
endmodule
