// mask_lut: look-up table that restores a d-bit N:M sparsity mask from its
// compact code. An N-of-M mask has only C(M,N) possible values, so the
// assignment stores ceil(log2 C(M,N)) bits per subvector (11 bits for 4:16)
// instead of M. Code c selects the c-th mask when all M-bit values with exactly
// N set bits are listed in increasing numeric order (code 0 = 0x000F for 4:16).
// The table is computed at elaboration with the "next value with the same
// number of ones" recurrence, so no data file is needed. Codes beyond C(M,N)-1
// give an all-zero mask. One subvector spans one M-group (d = M). The LUT and
// its place in the weight loader follow the paper; the code ordering is this
// implementation's choice. Combinational.
module mask_lut #(
  parameter int MGRP    = mvq_pkg::MGRP,
  parameter int NKEEP   = mvq_pkg::NKEEP,
  localparam int NCOMB  = mvq_pkg::n_choose_k(MGRP, NKEEP),
  localparam int CODE_W = $clog2(NCOMB)
) (
  input  logic [CODE_W-1:0] code,
  output logic [MGRP-1:0]   mask
);
  typedef logic [NCOMB*MGRP-1:0] table_t;

  function automatic table_t build_table();
    table_t t;
    logic [MGRP:0] v, c, r;
    t = '0;
    v = (MGRP+1)'((1 << NKEEP) - 1);
    for (int i = 0; i < NCOMB; i++) begin
      t[i*MGRP +: MGRP] = v[MGRP-1:0];
      // next larger value with the same popcount
      c = v & (~v + 1'b1);
      r = v + c;
      v = (((r ^ v) >> 2) / c) | r;
    end
    return t;
  endfunction

  localparam table_t TABLE = build_table();

  always_comb begin
    mask = '0;
    if (32'(code) < NCOMB) mask = TABLE[32'(code)*MGRP +: MGRP];
  end
endmodule
