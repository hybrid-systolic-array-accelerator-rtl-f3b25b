// pe_cluster: one PE cluster (PC) of the hybrid systolic array: 4 rows x 16
// columns of PEs with their own 16 kB weight SRAM, 16 MXINT4 shifters, a
// bucket selector and the MVM partial-sum combiner.
//
// Weight path. At each column top a mux picks the weight source: the PC above
// (MMM in all but the top cluster: INT8 weights stream down through the whole
// 16-row array) or this PC's own SRAM (MMM in the top cluster: the INT8 byte of
// column c; MVM in every cluster: the 4-bit element of column c, shifted by
// Sw[1:0]). Own weights are delayed c cycles in column c (systolic skew).
// Activation path. Row r gets a multicast activation (MMM, one per row) or the
// broadcast activation (MVM, same for all rows) and an enable (MMM: valid; MVM:
// the bucket selector's one-hot row of Sw[3:2]); both are delayed by the row's
// skew (MMM: global row 4*PC_IDX+r; MVM: local row r) and then travel right.
// Drain. shift_i moves accumulators right (DRAIN_H, values leave at column 15,
// h_out_o) or down (DRAIN_V, values leave at the bottom row, psum_dn_o). In MVM
// the vertical drain stops at the cluster boundary and the 4 bottom values
// emerge row 3 first; the combiner forms Out = sum_i 2^(4i) Psum_i by Horner's
// rule (acc = acc*16 + bottom) over the 4 drain cycles.
// Timing: the SRAM read issued at cycle t (rd_en_i) is used at t+1, when sw_i,
// valid_i and the activations must be presented.
// Follows the paper: cluster structure, weight mux, shifters, bucket selector,
// row-wise 2^(4i) combination. Own choices: skew registers, SRAM word layout
// (MMM: 16 INT8 per 128-bit word; MVM: two 64-bit halves of 16 MXINT4 each).
module pe_cluster
  import hsa_pkg::*;
#(
  parameter int unsigned PC_IDX = 0,
  parameter int unsigned WDEPTH = 1024,   // 1024 x 128 bit = 16 kB
  localparam int unsigned WAW   = $clog2(WDEPTH)
)(
  input  logic                clk,
  input  logic                rst_n,
  input  mode_e               mode_i,
  input  logic                own_wgt_i,   // column tops take own SRAM weights
  // weight SRAM fill (host) and read (controller) share the single port
  input  logic                wr_en_i,
  input  logic [WAW-1:0]      wr_addr_i,
  input  logic [WORD_W-1:0]   wr_data_i,
  input  logic                rd_en_i,
  input  logic [WAW-1:0]      rd_addr_i,
  input  logic                rd_half_i,   // MVM: which 64-bit half
  // presented one cycle after rd_en_i
  input  logic [SW_W-1:0]     sw_i,
  input  logic                valid_i,
  input  act_t                mc_act_i [PC_ROWS],
  input  act_t                bc_act_i,
  // vertical systolic links
  input  wgt_t                wgt_up_i [COLS],
  output wgt_t                wgt_dn_o [COLS],
  // drain
  input  logic                clear_i,
  input  logic                shift_i,
  input  drain_e              drain_dir_i,
  input  acc_t                psum_up_i [COLS],
  output acc_t                psum_dn_o [COLS],
  output acc_t                h_out_o [PC_ROWS],
  input  logic                mvm_clr_i,
  output mvm_t                mvm_o [COLS]
);
  // ---------------- weight SRAM ----------------
  logic [WORD_W-1:0] wrd;
  logic              half_q;
  sram_1rw #(.DEPTH(WDEPTH), .WIDTH(WORD_W)) u_wsram (
    .clk, .en_i(wr_en_i | rd_en_i), .we_i(wr_en_i),
    .addr_i(wr_en_i ? wr_addr_i : rd_addr_i), .wdata_i(wr_data_i), .rdata_o(wrd));
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) half_q <= 1'b0; else if (rd_en_i) half_q <= rd_half_i;

  // ---------------- shifters and own weight ----------------
  wgt_t w_shift [COLS];
  wgt_t w_own   [COLS];
  mx_shifter #(.LANES(COLS)) u_shift (
    .w4_i(half_q ? wrd[WORD_W-1:WORD_W/2] : wrd[WORD_W/2-1:0]),
    .sh_i(sw_i[1:0]), .w8_o(w_shift));
  always_comb
    for (int c = 0; c < COLS; c++)
      w_own[c] = (mode_i == MODE_MVM) ? w_shift[c] : wgt_t'(wrd[c*WGT_W +: WGT_W]);

  // column skew: column c delayed by c cycles
  wgt_t cskew [COLS][COLS];
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int c = 0; c < COLS; c++)
        for (int d = 0; d < COLS; d++) cskew[c][d] <= '0;
    end else begin
      for (int c = 0; c < COLS; c++) begin
        cskew[c][0] <= w_own[c];
        for (int d = 1; d < COLS; d++) cskew[c][d] <= cskew[c][d-1];
      end
    end
  end
  wgt_t col_top [COLS];
  always_comb
    for (int c = 0; c < COLS; c++)
      if (!own_wgt_i) col_top[c] = wgt_up_i[c];
      else if (c == 0) col_top[c] = w_own[0];
      else col_top[c] = cskew[c][c-1];

  // ---------------- bucket selector and row skew ----------------
  logic [PC_ROWS-1:0] row_en;
  bucket_selector u_bsel (.mode_i, .valid_i, .sel_i(sw_i[3:2]), .row_en_o(row_en));

  localparam int unsigned DL = ROWS;   // delay line length (taps 0..ROWS-1)
  act_t dl_act [PC_ROWS][DL];
  logic dl_en  [PC_ROWS][DL];
  act_t row_act_in [PC_ROWS];
  logic row_en_in  [PC_ROWS];
  always_comb
    for (int r = 0; r < PC_ROWS; r++) begin
      row_act_in[r] = (mode_i == MODE_MVM) ? bc_act_i : mc_act_i[r];
      row_en_in[r]  = row_en[r];
    end
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int r = 0; r < PC_ROWS; r++)
        for (int d = 0; d < DL; d++) begin dl_act[r][d] <= '0; dl_en[r][d] <= 1'b0; end
    end else begin
      for (int r = 0; r < PC_ROWS; r++) begin
        dl_act[r][0] <= row_act_in[r];
        dl_en[r][0]  <= row_en_in[r];
        for (int d = 1; d < DL; d++) begin
          dl_act[r][d] <= dl_act[r][d-1];
          dl_en[r][d]  <= dl_en[r][d-1];
        end
      end
    end
  end
  act_t row_act [PC_ROWS];
  logic row_ena [PC_ROWS];
  always_comb
    for (int r = 0; r < PC_ROWS; r++) begin
      automatic int unsigned tap = (mode_i == MODE_MVM) ? r : PC_IDX*PC_ROWS + r;
      if (tap == 0) begin
        row_act[r] = row_act_in[r]; row_ena[r] = row_en_in[r];
      end else begin
        row_act[r] = dl_act[r][tap-1]; row_ena[r] = dl_en[r][tap-1];
      end
    end

  // ---------------- PE grid ----------------
  act_t a_o [PC_ROWS][COLS];
  logic e_o [PC_ROWS][COLS];
  wgt_t w_o [PC_ROWS][COLS];
  acc_t s_o [PC_ROWS][COLS];

  for (genvar r = 0; r < PC_ROWS; r++) begin : g_row
    for (genvar c = 0; c < COLS; c++) begin : g_col
      act_t a_in; logic e_in; wgt_t w_in; acc_t p_in;
      if (c == 0) begin : g_l
        assign a_in = row_act[r]; assign e_in = row_ena[r];
      end else begin : g_i
        assign a_in = a_o[r][c-1]; assign e_in = e_o[r][c-1];
      end
      if (r == 0) begin : g_t
        assign w_in = col_top[c];
      end else begin : g_m
        assign w_in = w_o[r-1][c];
      end
      // drain source: left neighbour (H) or the PE above (V)
      acc_t p_left, p_up;
      if (c == 0) begin : g_pl0
        assign p_left = '0;
      end else begin : g_pl
        assign p_left = s_o[r][c-1];
      end
      if (r == 0) begin : g_pu0
        assign p_up = (mode_i == MODE_MVM) ? acc_t'(0) : psum_up_i[c];
      end else begin : g_pu
        assign p_up = s_o[r-1][c];
      end
      assign p_in = (drain_dir_i == DRAIN_V) ? p_up : p_left;
      pe u_pe (.clk, .rst_n, .clear_i, .shift_i, .act_i(a_in), .en_i(e_in),
               .wgt_i(w_in), .psum_i(p_in), .act_o(a_o[r][c]), .en_o(e_o[r][c]),
               .wgt_o(w_o[r][c]), .acc_o(s_o[r][c]));
    end
  end

  always_comb begin
    for (int c = 0; c < COLS; c++) begin
      wgt_dn_o[c]  = w_o[PC_ROWS-1][c];
      psum_dn_o[c] = s_o[PC_ROWS-1][c];
    end
    for (int r = 0; r < PC_ROWS; r++) h_out_o[r] = s_o[r][COLS-1];
  end

  // ---------------- MVM combiner: Out = sum 2^(4i) Psum_i ----------------
  mvm_t comb_q [COLS];
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int c = 0; c < COLS; c++) comb_q[c] <= '0;
    end else if (mvm_clr_i) begin
      for (int c = 0; c < COLS; c++) comb_q[c] <= '0;
    end else if (shift_i && mode_i == MODE_MVM) begin
      for (int c = 0; c < COLS; c++)
        comb_q[c] <= (comb_q[c] <<< 4) + mvm_t'(s_o[PC_ROWS-1][c]);
    end
  end
  assign mvm_o = comb_q;
endmodule
