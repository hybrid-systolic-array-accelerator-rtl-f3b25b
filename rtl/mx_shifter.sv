// mx_shifter: the 16 MXINT4 dequantisation shifters at the top of a PE cluster.
// Each 4-bit two's-complement weight is sign-extended to 8 bits and shifted
// left by the two low bits of the group scale, Sw[1:0] (0..3); the result,
// e.g. {w[3], w[3:0], 3'b000} for Sw[1:0]=3, always fits in 8 bits. One Sw is
// shared by the 16 weights (one per output channel = one per column), which is
// the paper's group of 16 along the output channel. Purely combinational.
module mx_shifter
  import hsa_pkg::*;
#(
  parameter int unsigned LANES = COLS
)(
  input  logic [LANES*MX_W-1:0] w4_i,   // lane c in bits [4c+3:4c]
  input  logic [1:0]            sh_i,   // Sw[1:0]
  output wgt_t                  w8_o [LANES]
);
  always_comb begin
    for (int c = 0; c < LANES; c++) begin
      w8_o[c] = wgt_t'(signed'(w4_i[c*MX_W +: MX_W])) <<< sh_i;
    end
  end
endmodule
