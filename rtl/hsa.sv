// hsa: the hybrid systolic array, four PE clusters (PCs) stacked vertically to
// form a 16x16 PE array.
// MMM mode (prefill): only the top PC reads its weight SRAM; INT8 weights flow
// down through all 16 rows, and the 128-bit activation word is multicast, byte
// R to row R. Each PE keeps one output (output stationary). Drain takes 16
// cycles: horizontally (drain_o = the 16 row values leaving column 15) or
// vertically for transposed output (drain_o = the 16 column values leaving
// the bottom row).
// MVM mode (decode): every PC reads its own weight SRAM (MXINT4) and works
// independently on its 16 output channels; one activation byte (lane
// bc_lane_i of the activation word) is broadcast to all PCs. After a 4-cycle
// vertical drain each PC's combiner holds 16 finished outputs (mvm_o).
// Timing: rd_en_i at cycle t, act_word_i / sw_i / valid_i at t+1. The last
// product of an MMM tile reaches PE(15,15) 31 cycles after its SRAM read; in
// MVM PE(3,15) is reached 19 cycles after.
module hsa
  import hsa_pkg::*;
#(
  parameter int unsigned WDEPTH = 1024,
  localparam int unsigned WAW   = $clog2(WDEPTH)
)(
  input  logic               clk,
  input  logic               rst_n,
  input  mode_e              mode_i,
  input  drain_e             drain_dir_i,
  input  logic [N_PC-1:0]    wr_en_i,
  input  logic [WAW-1:0]     wr_addr_i,
  input  logic [WORD_W-1:0]  wr_data_i,
  input  logic               rd_en_i,
  input  logic [WAW-1:0]     rd_addr_i,
  input  logic               rd_half_i,
  input  logic [SW_W-1:0]    sw_i [N_PC],
  input  logic               valid_i,
  input  logic [WORD_W-1:0]  act_word_i,
  input  logic [3:0]         bc_lane_i,
  input  logic               clear_i,
  input  logic               shift_i,
  input  logic               mvm_clr_i,
  output acc_t               drain_o [COLS],
  output mvm_t               mvm_o [N_PC][COLS]
);
  wgt_t wlink [N_PC+1][COLS];
  acc_t plink [N_PC+1][COLS];
  acc_t hout  [N_PC][PC_ROWS];
  act_t bc_act;
  assign bc_act = act_t'(act_word_i[bc_lane_i*ACT_W +: ACT_W]);

  always_comb
    for (int c = 0; c < COLS; c++) begin
      wlink[0][c] = '0;
      plink[0][c] = '0;
    end

  for (genvar p = 0; p < N_PC; p++) begin : g_pc
    act_t mc [PC_ROWS];
    for (genvar r = 0; r < PC_ROWS; r++) begin : g_mc
      assign mc[r] = act_t'(act_word_i[(p*PC_ROWS+r)*ACT_W +: ACT_W]);
    end
    logic own;
    assign own = (mode_i == MODE_MVM) || (p == 0);
    pe_cluster #(.PC_IDX(p), .WDEPTH(WDEPTH)) u_pc (
      .clk, .rst_n, .mode_i, .own_wgt_i(own),
      .wr_en_i(wr_en_i[p]), .wr_addr_i, .wr_data_i,
      .rd_en_i(rd_en_i && own), .rd_addr_i, .rd_half_i,
      .sw_i(sw_i[p]), .valid_i, .mc_act_i(mc), .bc_act_i(bc_act),
      .wgt_up_i(wlink[p]), .wgt_dn_o(wlink[p+1]),
      .clear_i, .shift_i, .drain_dir_i,
      .psum_up_i(plink[p]), .psum_dn_o(plink[p+1]), .h_out_o(hout[p]),
      .mvm_clr_i, .mvm_o(mvm_o[p]));
  end

  // drain output mux (bottom right of the array)
  always_comb
    for (int i = 0; i < COLS; i++)
      drain_o[i] = (drain_dir_i == DRAIN_V) ? plink[N_PC][i]
                                            : hout[i / PC_ROWS][i % PC_ROWS];
endmodule
