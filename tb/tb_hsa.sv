// tb_hsa: end-to-end test of the 16x16 hybrid systolic array.
//  * MMM: random INT8 A (16 x K) and W (K x 16) through the top cluster's
//    weight SRAM; the 16x16 product is drained horizontally and, in a second
//    run, vertically (transposed) and compared with a software matrix product.
//    The drain must take exactly 16 cycles and results must be ready 31
//    cycles after the last operand read.
//  * MVM: random INT8 x (K) and MXINT4 weights with random 4-bit Sw in each of
//    the 4 clusters; after a 4-cycle vertical drain the 64 outputs must equal
//    sum_k x[k] * w[k][c] * 2^Sw[k].
module tb_hsa;
  import hsa_pkg::*;
  localparam int K = 40;
  logic clk = 0, rst_n = 0;
  mode_e mode = MODE_MMM; drain_e dir = DRAIN_H;
  logic [N_PC-1:0] wr_en = 0; logic [9:0] wr_addr = 0; logic [WORD_W-1:0] wr_data = 0;
  logic rd_en = 0; logic [9:0] rd_addr = 0; logic rd_half = 0;
  logic [SW_W-1:0] sw [N_PC]; logic valid = 0; logic [WORD_W-1:0] act_word = 0;
  logic [3:0] bc_lane = 0; logic clear = 0, shift = 0, mvm_clr = 0;
  acc_t drain [COLS]; mvm_t mvm [N_PC][COLS];
  int checks = 0, failures = 0;

  hsa dut (.clk, .rst_n, .mode_i(mode), .drain_dir_i(dir), .wr_en_i(wr_en), .wr_addr_i(wr_addr),
           .wr_data_i(wr_data), .rd_en_i(rd_en), .rd_addr_i(rd_addr), .rd_half_i(rd_half),
           .sw_i(sw), .valid_i(valid), .act_word_i(act_word), .bc_lane_i(bc_lane),
           .clear_i(clear), .shift_i(shift), .mvm_clr_i(mvm_clr), .drain_o(drain), .mvm_o(mvm));
  always #5 clk = ~clk;
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic chk(logic c, string m);
    checks++; if (!c && failures < 20) $display("FAIL %s", m); if (!c) failures++;
  endtask

  byte A [ROWS][K]; byte W [K][COLS]; longint C [ROWS][COLS];
  byte X [K]; logic [3:0] W4 [N_PC][K][COLS]; logic [3:0] S [N_PC][K];

  task automatic run_mmm(drain_e d);
    mode = MODE_MMM; dir = d;
    clear = 1; @(negedge clk); clear = 0;
    for (int k = 0; k <= K; k++) begin
      rd_en = (k < K); rd_addr = 10'(k);
      valid = (k > 0);
      if (k > 0) for (int r = 0; r < ROWS; r++) act_word[r*8 +: 8] = A[r][k-1];
      @(negedge clk);
    end
    rd_en = 0; valid = 0;
    repeat (30) @(negedge clk);   // 31 cycles after the last read incl. the one above
    for (int j = 0; j < COLS; j++) begin
      shift = 1;
      for (int i = 0; i < COLS; i++) begin
        automatic longint e = (d == DRAIN_H) ? C[i][15-j] : C[15-j][i];
        chk(drain[i] == acc_t'(e), $sformatf("mmm dir%0d j%0d i%0d got %0d exp %0d", d, j, i, drain[i], e));
      end
      @(negedge clk);
    end
    shift = 0;
  endtask

  initial begin
    for (int p = 0; p < N_PC; p++) sw[p] = '0;
    for (int r = 0; r < ROWS; r++) for (int k = 0; k < K; k++) A[r][k] = byte'($urandom);
    for (int k = 0; k < K; k++) for (int c = 0; c < COLS; c++) W[k][c] = byte'($urandom);
    for (int r = 0; r < ROWS; r++) for (int c = 0; c < COLS; c++) begin
      C[r][c] = 0; for (int k = 0; k < K; k++) C[r][c] += longint'(A[r][k]) * longint'(W[k][c]);
    end
    repeat (2) @(negedge clk); rst_n = 1;
    // fill top weight SRAM (MMM layout: word k = W[k][0..15])
    for (int k = 0; k < K; k++) begin
      wr_en = 4'b0001; wr_addr = 10'(k);
      for (int c = 0; c < COLS; c++) wr_data[c*8 +: 8] = W[k][c];
      @(negedge clk);
    end
    wr_en = 0;
    run_mmm(DRAIN_H);
    run_mmm(DRAIN_V);

    // ---------------- MVM ----------------
    for (int k = 0; k < K; k++) X[k] = byte'($urandom);
    for (int p = 0; p < N_PC; p++) for (int k = 0; k < K; k++) begin
      S[p][k] = 4'($urandom);
      for (int c = 0; c < COLS; c++) W4[p][k][c] = 4'($urandom);
    end
    for (int p = 0; p < N_PC; p++) for (int a = 0; a < K/2; a++) begin
      wr_en = 4'(1 << p); wr_addr = 10'(a);
      for (int h = 0; h < 2; h++) for (int c = 0; c < COLS; c++) wr_data[h*64 + c*4 +: 4] = W4[p][2*a+h][c];
      @(negedge clk);
    end
    wr_en = 0; mode = MODE_MVM; dir = DRAIN_V;
    clear = 1; mvm_clr = 1; @(negedge clk); clear = 0; mvm_clr = 0;
    for (int k = 0; k <= K; k++) begin
      rd_en = (k < K); rd_addr = 10'(k / 2); rd_half = k[0];
      valid = (k > 0);
      if (k > 0) begin
        act_word = {$urandom, $urandom, $urandom, $urandom};
        bc_lane = 4'((k-1) % 16); act_word[bc_lane*8 +: 8] = X[k-1];
        for (int p = 0; p < N_PC; p++) sw[p] = S[p][k-1];
      end
      @(negedge clk);
    end
    rd_en = 0; valid = 0;
    repeat (18) @(negedge clk);
    shift = 1; repeat (4) @(negedge clk); shift = 0;
    for (int p = 0; p < N_PC; p++) for (int c = 0; c < COLS; c++) begin
      automatic longint e = 0;
      for (int k = 0; k < K; k++) begin
        automatic int wv = (W4[p][k][c] >= 8) ? int'(W4[p][k][c]) - 16 : int'(W4[p][k][c]);
        e += longint'(X[k]) * longint'(wv) * (longint'(1) << S[p][k]);
      end
      chk(mvm[p][c] == mvm_t'(e), $sformatf("mvm p%0d c%0d got %0d exp %0d", p, c, mvm[p][c], e));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
