// hsa_accel: top level of the edge LLM inference accelerator: the hybrid
// systolic array (HSA) with its shared activation SRAM, the Sw scale buffer,
// the controller and the post-processing unit (PPU).
//
// Data flow of one operation (start_i): the controller streams the reduction
// dimension K from the activation SRAM and the weight SRAMs through the array
// (MMM: INT8 x INT8, 16x16 output tile; MVM: INT8 activation x MXINT4 weights,
// 64 outputs), drains it and sends 16-lane result vectors through the PPU:
//   requant  Y = sat8(acc*S + B), S = scale_i or the fused S* from RMSNorm
//   RMSNorm  Y* = Y*gamma (norm_en_i) and square accumulation; when the op
//            ends with norm_close_i set, S* = sigma^-1 * s_next_i is formed
//            and kept for the next op (use_fused_i). With norm_per_lane_i
//            (prefill, horizontal drain: lane = token) each lane gets its own
//            S*; otherwise (decode) one S* serves all lanes. A later MMM
//            applies S*[lane] with horizontal drain and S*[out_idx] with
//            vertical drain (the vector is then one token).
//   RoPE     rotate lane pairs by the current token's angles (rope_en_i)
// Each PPU result appears on out_* and, with wb_en_i, is written back to the
// activation SRAM at wb_base_i + index (a 16-lane word), so it can be the next
// layer's input. busy_o stays high until the last write-back and, when a
// norm closes, until S* is stored; done_o is its falling edge.
// The external DRAM is not part of the design: SRAMs are filled through the
// host write ports (act_*, wgt_*, sw_*), which must not be used while busy_o.
// A reduction longer than one SRAM fill (K > 1024 MMM, K > 2048 MVM) is run
// as several operations: all but the last with defer_drain_i, all but the
// first with keep_i; the PEs keep their partial sums in between.
// Latencies: MMM K+49 cycles to done of the array, MVM K+29, plus 3 PPU stages.
module hsa_accel
  import hsa_pkg::*;
#(
  parameter int unsigned ADEPTH = 4224,   // 66 kB activation SRAM
  parameter int unsigned WDEPTH = 1024,   // 16 kB weight SRAM per PC
  parameter int unsigned SDEPTH = 2048,   // Sw entries per PC
  localparam int unsigned AAW   = $clog2(ADEPTH),
  localparam int unsigned WAW   = $clog2(WDEPTH),
  localparam int unsigned SAW   = $clog2(SDEPTH),
  localparam int unsigned KW    = 13
)(
  input  logic                 clk,
  input  logic                 rst_n,
  // host fill ports (stand in for the DRAM interface)
  input  logic                 act_we_i,
  input  logic [AAW-1:0]       act_waddr_i,
  input  logic [WORD_W-1:0]    act_wdata_i,
  input  logic [N_PC-1:0]      wgt_we_i,
  input  logic [WAW-1:0]       wgt_waddr_i,
  input  logic [WORD_W-1:0]    wgt_wdata_i,
  input  logic                 sw_we_i,
  input  logic [SAW-1:0]       sw_waddr_i,
  input  logic [N_PC*SW_W-1:0] sw_wdata_i,
  input  logic                 act_re_i,       // host read of the activation SRAM
  input  logic [AAW-1:0]       act_raddr_i,
  output logic [WORD_W-1:0]    act_rdata_o,    // valid the cycle after act_re_i
  // operation
  input  logic                 start_i,
  input  mode_e                mode_i,
  input  drain_e               drain_dir_i,
  input  logic [KW-1:0]        k_len_i,
  input  logic [AAW-1:0]       act_base_i,
  input  logic [WAW-1:0]       wgt_base_i,
  input  logic [SAW-1:0]       sw_base_i,
  input  logic                 keep_i,         // continue accumulating (split K)
  input  logic                 defer_drain_i,  // do not drain at the end
  output logic                 busy_o,
  output logic                 done_o,
  // PPU configuration
  input  logic [SCALE_W-1:0]   scale_i,
  input  logic                 use_fused_i,
  input  logic signed [15:0]   bias_i  [COLS],
  input  logic                 norm_en_i,
  input  logic                 norm_close_i,
  input  logic                 norm_per_lane_i,
  input  logic signed [15:0]   gamma_i [COLS],
  input  logic [4:0]           log2_dim_i,
  input  logic [SCALE_W-1:0]   s_next_i,
  output logic [SCALE_W-1:0]   s_star_o [COLS],
  output logic                 s_star_valid_o,
  input  logic                 rope_en_i,
  input  logic [3:0]           rope_word_base_i,
  input  logic                 rope_pre_we_i,
  input  logic [1:0]           rope_pre_sel_i,
  input  logic [6:0]           rope_pre_addr_i,
  input  logic signed [23:0]   rope_pre_data_i,
  input  logic                 rope_upd_i,
  output logic                 rope_busy_o,
  input  logic                 wb_en_i,
  input  logic [AAW-1:0]       wb_base_i,
  // results
  output logic                 out_valid_o,
  output logic [3:0]           out_idx_o,
  output act_t                 out_data_o [COLS]
);
  // ---------------- controller ----------------
  mode_e mode; drain_e dir;
  logic rd_en, wgt_half, valid, clear, shift, mvm_clr, ov, cbusy;
  logic [AAW-1:0] act_raddr; logic [WAW-1:0] wgt_raddr; logic [SAW-1:0] sw_raddr;
  logic [3:0] lane, oidx;
  hsa_ctrl #(.AAW(AAW), .WAW(WAW), .SAW(SAW), .KW(KW)) u_ctrl (
    .clk, .rst_n, .start_i, .mode_i, .drain_dir_i, .k_len_i, .act_base_i,
    .wgt_base_i, .sw_base_i, .keep_i, .defer_drain_i, .busy_o(cbusy), .done_o(), .mode_o(mode),
    .drain_dir_o(dir), .rd_en_o(rd_en), .act_addr_o(act_raddr),
    .wgt_addr_o(wgt_raddr), .wgt_half_o(wgt_half), .sw_addr_o(sw_raddr),
    .valid_o(valid), .bc_lane_o(lane), .clear_o(clear), .shift_o(shift),
    .mvm_clr_o(mvm_clr), .out_valid_o(ov), .out_idx_o(oidx));

  // ---------------- activation SRAM (66 kB) ----------------
  logic             wb_we;
  logic [AAW-1:0]   wb_addr;
  logic [WORD_W-1:0] wb_data, act_word;
  logic             a_en, a_we;
  logic [AAW-1:0]   a_addr;
  logic [WORD_W-1:0] a_wdata;
  always_comb begin
    a_we = act_we_i | wb_we;
    a_en = a_we | rd_en | act_re_i;
    a_addr  = act_we_i ? act_waddr_i : wb_we ? wb_addr : rd_en ? act_raddr : act_raddr_i;
    a_wdata = act_we_i ? act_wdata_i : wb_data;
  end
  sram_1rw #(.DEPTH(ADEPTH), .WIDTH(WORD_W)) u_act_sram (
    .clk, .en_i(a_en), .we_i(a_we), .addr_i(a_addr), .wdata_i(a_wdata), .rdata_o(act_word));
  assign act_rdata_o = act_word;

  // ---------------- Sw buffer ----------------
  logic [N_PC*SW_W-1:0] sw_word;
  sram_1rw #(.DEPTH(SDEPTH), .WIDTH(N_PC*SW_W)) u_sw_buf (
    .clk, .en_i(sw_we_i | rd_en), .we_i(sw_we_i), .addr_i(sw_we_i ? sw_waddr_i : sw_raddr),
    .wdata_i(sw_wdata_i), .rdata_o(sw_word));
  logic [SW_W-1:0] sw [N_PC];
  always_comb for (int p = 0; p < N_PC; p++) sw[p] = sw_word[p*SW_W +: SW_W];

  // ---------------- array ----------------
  acc_t drain [COLS];
  mvm_t mvm   [N_PC][COLS];
  hsa #(.WDEPTH(WDEPTH)) u_hsa (
    .clk, .rst_n, .mode_i(mode), .drain_dir_i(dir), .wr_en_i(wgt_we_i),
    .wr_addr_i(wgt_waddr_i), .wr_data_i(wgt_wdata_i), .rd_en_i(rd_en),
    .rd_addr_i(wgt_raddr), .rd_half_i(wgt_half), .sw_i(sw), .valid_i(valid),
    .act_word_i(act_word), .bc_lane_i(lane), .clear_i(clear), .shift_i(shift),
    .mvm_clr_i(mvm_clr), .drain_o(drain), .mvm_o(mvm));

  mvm_t vec [COLS];
  always_comb
    for (int l = 0; l < COLS; l++)
      vec[l] = (mode == MODE_MVM) ? mvm[oidx[1:0]][l] : mvm_t'(drain[l]);

  logic last0;
  assign last0 = ov && norm_close_i &&
                 ((mode == MODE_MVM) ? (oidx == 4'd3) : (oidx == 4'd0));

  // ---------------- PPU stage 1: requant ----------------
  logic [SCALE_W-1:0] s_star_q [COLS];
  logic [SCALE_W-1:0] scl [COLS];
  logic v1, l1; logic [3:0] i1; mode_e m1;
  act_t y1 [COLS];
  always_comb
    for (int l = 0; l < COLS; l++)
      if (!use_fused_i)                                  scl[l] = scale_i;
      else if (mode == MODE_MMM && dir == DRAIN_V)       scl[l] = s_star_q[oidx];
      else                                               scl[l] = s_star_q[l];
  ppu_requant #(.LANES(COLS)) u_rq (
    .clk, .rst_n, .valid_i(ov), .acc_i(vec),
    .scale_i(scl), .bias_i, .valid_o(v1), .y_o(y1));

  // ---------------- PPU stage 2: fused RMSNorm ----------------
  logic v2n; logic [3:0] i2; mode_e m2;
  act_t y2n [COLS];
  act_t y2b [COLS];
  logic sv;
  logic [SCALE_W-1:0] ss [COLS];
  logic nbusy;
  rmsnorm_unit #(.LANES(COLS)) u_norm (
    .clk, .rst_n, .valid_i(v1 && norm_en_i), .last_i(l1), .per_lane_i(norm_per_lane_i), .y_i(y1), .gamma_i,
    .log2_dim_i, .s_next_i, .valid_o(v2n), .ystar_o(y2n), .busy_o(nbusy),
    .s_star_valid_o(sv), .s_star_o(ss));
  logic v2;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      l1 <= 1'b0; i1 <= '0; m1 <= MODE_MMM; i2 <= '0; m2 <= MODE_MMM;
      v2 <= 1'b0;
      for (int l = 0; l < COLS; l++) s_star_q[l] <= '0;
      for (int l = 0; l < COLS; l++) y2b[l] <= '0;
    end else begin
      l1 <= last0; i1 <= oidx; m1 <= mode;
      i2 <= i1; m2 <= m1; v2 <= v1;
      if (v1) y2b <= y1;
      if (sv) s_star_q <= ss;
    end
  end
  act_t y2 [COLS];
  always_comb for (int l = 0; l < COLS; l++) y2[l] = norm_en_i ? y2n[l] : y2b[l];
  assign s_star_o = s_star_q;
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) s_star_valid_o <= 1'b0; else s_star_valid_o <= sv;

  // ---------------- PPU stage 3: RoPE ----------------
  act_t y3r [COLS];
  act_t y3b [COLS];
  logic v3r, v3;
  logic [3:0] i3;
  rope_unit u_rope (
    .clk, .rst_n, .pre_we_i(rope_pre_we_i), .pre_sel_i(rope_pre_sel_i),
    .pre_addr_i(rope_pre_addr_i), .pre_data_i(rope_pre_data_i),
    .valid_i(v2 && rope_en_i), .word_i(rope_word_base_i + ((m2 == MODE_MVM) ? i2 : 4'd0)),
    .x_i(y2), .valid_o(v3r), .y_o(y3r), .upd_start_i(rope_upd_i), .busy_o(rope_busy_o),
    .upd_done_o());
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v3 <= 1'b0; i3 <= '0;
      for (int l = 0; l < COLS; l++) y3b[l] <= '0;
    end else begin
      v3 <= v2; i3 <= i2;
      if (v2) y3b <= y2;
    end
  end
  always_comb for (int l = 0; l < COLS; l++) out_data_o[l] = rope_en_i ? y3r[l] : y3b[l];
  assign out_valid_o = v3;
  assign out_idx_o   = i3;

  // ---------------- write-back ----------------
  always_comb begin
    wb_we   = v3 && wb_en_i;
    wb_addr = wb_base_i + AAW'(i3);
    for (int l = 0; l < COLS; l++) wb_data[l*ACT_W +: ACT_W] = out_data_o[l];
  end

  assign busy_o = cbusy || v1 || v2 || v3 || ov || nbusy || sv;  // sv: S* lands next edge
  logic busy_q;
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) busy_q <= 1'b0; else busy_q <= busy_o;
  assign done_o = busy_q && !busy_o;

  // host fill must not collide with the running operation
  a_no_fill_while_busy: assert property (@(posedge clk) disable iff (!rst_n)
    cbusy |-> !(act_we_i || wgt_we_i != '0 || sw_we_i));
endmodule
