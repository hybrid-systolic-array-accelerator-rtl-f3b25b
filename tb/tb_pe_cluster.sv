// tb_pe_cluster: one PE cluster on its own.
//  * MMM (own weights, 4 rows): a 4 x K by K x 16 INT8 product, drained
//    horizontally (h_out, 16 cycles) and vertically (psum_dn, rows 3..0 after
//    the psum from the "upper PC" input), compared with software. Weights
//    must also leave the bottom row (wgt_dn) skewed, for the cluster below.
//  * MVM: broadcast INT8 activation, MXINT4 weights and random 4-bit Sw; the
//    combiner output after a 4-cycle drain must equal sum x*w*2^Sw.
module tb_pe_cluster;
  import hsa_pkg::*;
  localparam int K = 33;
  logic clk = 0, rst_n = 0;
  mode_e mode = MODE_MMM; drain_e dir = DRAIN_H;
  logic wr_en = 0; logic [9:0] wr_addr = 0; logic [WORD_W-1:0] wr_data = 0;
  logic rd_en = 0; logic [9:0] rd_addr = 0; logic rd_half = 0;
  logic [SW_W-1:0] sw = 0; logic valid = 0; act_t mc [PC_ROWS]; act_t bc = 0;
  wgt_t wup [COLS]; wgt_t wdn [COLS]; acc_t pup [COLS]; acc_t pdn [COLS]; acc_t hout [PC_ROWS];
  logic clear = 0, shift = 0, mclr = 0; mvm_t mvm [COLS];
  int checks = 0, failures = 0;
  pe_cluster #(.PC_IDX(0)) dut (.clk, .rst_n, .mode_i(mode), .own_wgt_i(1'b1), .wr_en_i(wr_en),
    .wr_addr_i(wr_addr), .wr_data_i(wr_data), .rd_en_i(rd_en), .rd_addr_i(rd_addr), .rd_half_i(rd_half),
    .sw_i(sw), .valid_i(valid), .mc_act_i(mc), .bc_act_i(bc), .wgt_up_i(wup), .wgt_dn_o(wdn),
    .clear_i(clear), .shift_i(shift), .drain_dir_i(dir), .psum_up_i(pup), .psum_dn_o(pdn),
    .h_out_o(hout), .mvm_clr_i(mclr), .mvm_o(mvm));
  always #5 clk = ~clk;
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic chk(logic c, string m);
    checks++; if (!c) begin failures++; if (failures < 15) $display("FAIL %s", m); end
  endtask
  byte A [PC_ROWS][K]; byte W [K][COLS]; longint C [PC_ROWS][COLS];
  byte X [K]; logic [3:0] W4 [K][COLS]; logic [3:0] S [K];

  task automatic mmm(drain_e d);
    automatic int wchk = 0;
    mode = MODE_MMM; dir = d; clear = 1; @(negedge clk); clear = 0;
    for (int k = 0; k <= K + 20; k++) begin
      rd_en = (k < K); rd_addr = 10'(k); valid = (k > 0 && k <= K);
      if (k > 0 && k <= K) for (int r = 0; r < PC_ROWS; r++) mc[r] = act_t'(A[r][k-1]);
      @(negedge clk);
      // weight of step k' leaves the bottom of column c at data time + c + 4
      for (int c = 0; c < COLS; c++) begin
        automatic int kk = k - c - 4;
        if (kk >= 0 && kk < K && c == (k % COLS)) begin chk(wdn[c] == wgt_t'(W[kk][c]), "wgt_dn"); wchk++; end
      end
    end
    rd_en = 0; valid = 0;
    for (int c = 0; c < COLS; c++) pup[c] = acc_t'(1000 + c);
    for (int j = 0; j < ((d == DRAIN_H) ? COLS : PC_ROWS + 1); j++) begin
      shift = 1;
      if (d == DRAIN_H) for (int r = 0; r < PC_ROWS; r++)
        chk(hout[r] == acc_t'(C[r][15-j]), $sformatf("h r%0d j%0d", r, j));
      else for (int c = 0; c < COLS; c++)
        chk(pdn[c] == ((j < PC_ROWS) ? acc_t'(C[3-j][c]) : acc_t'(1000 + c)), $sformatf("v c%0d j%0d", c, j));
      @(negedge clk);
    end
    shift = 0;
  endtask

  initial begin
    for (int r = 0; r < PC_ROWS; r++) mc[r] = 0;
    for (int c = 0; c < COLS; c++) begin wup[c] = 0; pup[c] = 0; end
    for (int r = 0; r < PC_ROWS; r++) for (int k = 0; k < K; k++) A[r][k] = byte'($urandom);
    for (int k = 0; k < K; k++) for (int c = 0; c < COLS; c++) W[k][c] = byte'($urandom);
    for (int r = 0; r < PC_ROWS; r++) for (int c = 0; c < COLS; c++) begin
      C[r][c] = 0; for (int k = 0; k < K; k++) C[r][c] += longint'(A[r][k]) * longint'(W[k][c]);
    end
    repeat (2) @(negedge clk); rst_n = 1;
    for (int k = 0; k < K; k++) begin
      wr_en = 1; wr_addr = 10'(k);
      for (int c = 0; c < COLS; c++) wr_data[c*8 +: 8] = W[k][c];
      @(negedge clk);
    end
    wr_en = 0;
    mmm(DRAIN_H);
    mmm(DRAIN_V);
    // MVM
    for (int k = 0; k < K; k++) begin
      X[k] = byte'($urandom); S[k] = 4'($urandom);
      for (int c = 0; c < COLS; c++) W4[k][c] = 4'($urandom);
    end
    for (int a = 0; a < (K + 1) / 2; a++) begin
      wr_en = 1; wr_addr = 10'(a);
      for (int h = 0; h < 2; h++) for (int c = 0; c < COLS; c++)
        wr_data[h*64 + c*4 +: 4] = (2*a + h < K) ? W4[2*a+h][c] : 4'd0;
      @(negedge clk);
    end
    wr_en = 0; mode = MODE_MVM; dir = DRAIN_V;
    clear = 1; mclr = 1; @(negedge clk); clear = 0; mclr = 0;
    for (int k = 0; k <= K; k++) begin
      rd_en = (k < K); rd_addr = 10'(k / 2); rd_half = k[0]; valid = (k > 0);
      if (k > 0) begin bc = act_t'(X[k-1]); sw = S[k-1]; end
      for (int r = 0; r < PC_ROWS; r++) mc[r] = act_t'($urandom);
      @(negedge clk);
    end
    rd_en = 0; valid = 0;
    repeat (18) @(negedge clk);
    shift = 1; repeat (4) @(negedge clk); shift = 0;
    for (int c = 0; c < COLS; c++) begin
      automatic longint e = 0;
      for (int k = 0; k < K; k++) begin
        automatic int wv = (W4[k][c] >= 8) ? int'(W4[k][c]) - 16 : int'(W4[k][c]);
        e += longint'(X[k]) * longint'(wv) * (longint'(1) << S[k]);
      end
      chk(mvm[c] == mvm_t'(e), $sformatf("mvm c%0d got %0d exp %0d", c, mvm[c], e));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
