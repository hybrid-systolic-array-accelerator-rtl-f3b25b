// pe: one processing element of the hybrid systolic array.
// It multiplies the 8-bit activation arriving from the left with the 8-bit
// weight arriving from above and adds the product into an output-stationary
// accumulator when en_i is set (the paper gates this with a clock-gating
// enable; here it is a register enable that synthesis can map to a clock gate).
// Activation and enable are registered and passed right, the weight is
// registered and passed down, so a row and a column form systolic chains.
// Drain: while shift_i is high the accumulator loads psum_i (the neighbour's
// accumulator, left or above, chosen by the array) so values march towards the
// array edge; clear_i zeroes it. All outputs are registered: one cycle per hop.
module pe
  import hsa_pkg::*;
(
  input  logic clk,
  input  logic rst_n,
  input  logic clear_i,     // zero the accumulator
  input  logic shift_i,     // drain: load psum_i
  input  act_t act_i,
  input  logic en_i,        // accumulate act_i*wgt_i this cycle
  input  wgt_t wgt_i,
  input  acc_t psum_i,
  output act_t act_o,
  output logic en_o,
  output wgt_t wgt_o,
  output acc_t acc_o
);
  acc_t acc_q;
  logic signed [ACT_W+WGT_W-1:0] prod;
  assign prod = act_i * wgt_i;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      act_o <= '0; en_o <= 1'b0; wgt_o <= '0; acc_q <= '0;
    end else begin
      act_o <= act_i;
      en_o  <= en_i;
      wgt_o <= wgt_i;
      if (clear_i)      acc_q <= '0;
      else if (shift_i) acc_q <= psum_i;
      else if (en_i)    acc_q <= acc_q + acc_t'(prod);
    end
  end
  assign acc_o = acc_q;
endmodule
