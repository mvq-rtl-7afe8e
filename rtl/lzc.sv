// lzc: leading-zero counter, one stage of the cascaded mask encoder.
// Counts the zeros above the most significant set bit of `in` (bit WIDTH-1 is
// the leading end) and also returns that bit's index, `pos` = WIDTH-1-count,
// and a one-hot vector of it. `valid` is low when `in` is all zeros; count,
// pos and onehot are then 0. Purely combinational. The paper names the LZC as
// the building block of the mask encoder; its coding as a priority scan is
// this implementation's choice.
module lzc #(
  parameter int WIDTH = 16,
  localparam int CW = $clog2(WIDTH)
) (
  input  logic [WIDTH-1:0] in,
  output logic [CW:0]      count,
  output logic [CW-1:0]    pos,
  output logic [WIDTH-1:0] onehot,
  output logic             valid
);
  always_comb begin
    count  = '0;
    pos    = '0;
    onehot = '0;
    valid  = 1'b0;
    for (int i = 0; i < WIDTH; i++) begin
      if (!valid && in[WIDTH-1-i]) begin
        valid  = 1'b1;
        count  = (CW+1)'(i);
        pos    = CW'(WIDTH-1-i);
        onehot[WIDTH-1-i] = 1'b1;
      end
    end
  end
endmodule
