// ppu_requant: the quantisation stage of the post-processing unit (PPU).
// For each of the 16 lanes it computes Y = sat8(round(acc * S) + B): the
// integer MAC result is multiplied by the unsigned fixed-point scale S of its
// lane (Q8.24, 32 bits), rounded half-up, offset by the signed integer bias B
// of its lane and saturated to INT8. S is either the layer's static scale
// (the same on every lane) or the fused S*_{n+1} = sigma^-1 * S_{n+1} made
// online by the RMSNorm unit, which differs per lane when the lanes are
// different tokens; B carries the fused beta term of the preceding RMSNorm. One vector per cycle,
// one cycle latency. The scale and bias formats are this design's choice.
module ppu_requant
  import hsa_pkg::*;
#(
  parameter int unsigned LANES  = COLS,
  parameter int unsigned BIAS_W = 16
)(
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     valid_i,
  input  mvm_t                     acc_i  [LANES],
  input  logic [SCALE_W-1:0]       scale_i [LANES],
  input  logic signed [BIAS_W-1:0] bias_i [LANES],
  output logic                     valid_o,
  output act_t                     y_o    [LANES]
);
  localparam int unsigned PW = MVM_W + SCALE_W + 1;
  act_t y_d [LANES];
  always_comb begin
    for (int l = 0; l < LANES; l++) begin
      automatic logic signed [PW-1:0] prod;
      automatic logic signed [PW-1:0] r;
      prod = PW'(acc_i[l]) * signed'({1'b0, scale_i[l]});
      r = ((prod + (PW'(1) <<< (SCALE_FRAC-1))) >>> SCALE_FRAC) + PW'(bias_i[l]);
      if (r > 127)       y_d[l] = 8'sd127;
      else if (r < -128) y_d[l] = -8'sd128;
      else               y_d[l] = act_t'(r);
    end
  end
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid_o <= 1'b0;
      for (int l = 0; l < LANES; l++) y_o[l] <= '0;
    end else begin
      valid_o <= valid_i;
      if (valid_i) y_o <= y_d;
    end
  end
endmodule
