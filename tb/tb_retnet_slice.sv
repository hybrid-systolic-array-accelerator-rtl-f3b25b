// tb_retnet_slice: runs slices of a RetNet-1.3B layer (model width 2048,
// FFN width 4096, head dimension 256) on the accelerator at its default
// sizes, filling the on-chip memories to their full capacity:
//  1. prefill: one 16-token x 16-channel MMM tile with K = 1024, the most one
//     weight-SRAM fill holds (INT8 weights), drained transposed (token-major);
//  2. decode, FFN down projection: 64 outputs of an MXINT4 MVM with
//     K = 4096, run as two operations of K = 2048 (each a full weight-SRAM and
//     Sw-buffer fill): the first stops before the drain, the memories are
//     refilled, and the second keeps accumulating;
//  3. decode, query projection of one head: K = 2048, 64 outputs, with the
//     RoPE unit advanced by seven Update passes so that position m = 7 is
//     embedded, using angle words 8..11 (angles 64..95 of the 128).
// Model sizes are RetNet-1.3B's published dimensions; the data are random.
// Every output is compared with a software model: exact for the MMM and MVM
// results, within one INT8 step of real-valued rotation for RoPE. Latencies
// are checked: K+49+3 (MMM), K+21 (deferred MVM part), K+29+3 (MVM).
module tb_retnet_slice;
  import hsa_pkg::*;
  localparam int KM = 1024, KF = 4096, KH = 2048, KQ = 2048;
  localparam real FR = 4194304.0;
  logic clk = 0, rst_n = 0;
  logic act_we = 0; logic [12:0] act_waddr = 0; logic [127:0] act_wdata = 0;
  logic [3:0] wgt_we = 0; logic [9:0] wgt_waddr = 0; logic [127:0] wgt_wdata = 0;
  logic sw_we = 0; logic [10:0] sw_waddr = 0; logic [15:0] sw_wdata = 0;
  logic act_re = 0; logic [12:0] act_raddr = 0; logic [127:0] act_rdata;
  logic start = 0; mode_e mode = MODE_MMM; drain_e dir = DRAIN_H; logic [12:0] k_len = 0;
  logic [12:0] act_base = 0; logic [9:0] wgt_base = 0; logic [10:0] sw_base = 0;
  logic busy, done; logic keep = 0, defer = 0;
  logic [31:0] scale = 0; logic use_fused = 0; logic signed [15:0] bias [COLS];
  logic norm_en = 0, norm_close = 0; logic signed [15:0] gamma [COLS]; logic [4:0] l2d = 0;
  logic [31:0] s_next = 0, s_star [COLS]; logic s_star_v;
  logic rope_en = 0; logic [3:0] rope_wb = 0; logic rp_we = 0; logic [1:0] rp_sel = 0;
  logic [6:0] rp_addr = 0; logic signed [23:0] rp_data = 0; logic rope_upd = 0, rope_busy;
  logic wb_en = 0; logic [12:0] wb_base = 0;
  logic ov; logic [3:0] oidx; act_t odata [COLS];
  int checks = 0, failures = 0;
  int n_prefill = 0, n_ffn = 0, n_q = 0, n_unsat = 0;

  hsa_accel dut (.clk, .rst_n, .act_we_i(act_we), .act_waddr_i(act_waddr), .act_wdata_i(act_wdata),
    .wgt_we_i(wgt_we), .wgt_waddr_i(wgt_waddr), .wgt_wdata_i(wgt_wdata), .sw_we_i(sw_we),
    .sw_waddr_i(sw_waddr), .sw_wdata_i(sw_wdata), .act_re_i(act_re), .act_raddr_i(act_raddr),
    .act_rdata_o(act_rdata), .start_i(start), .mode_i(mode), .drain_dir_i(dir), .k_len_i(k_len),
    .act_base_i(act_base), .wgt_base_i(wgt_base), .sw_base_i(sw_base), .keep_i(keep), .defer_drain_i(defer), .busy_o(busy), .done_o(done),
    .scale_i(scale), .use_fused_i(use_fused), .bias_i(bias), .norm_en_i(norm_en),
    .norm_close_i(norm_close), .norm_per_lane_i(1'b0), .gamma_i(gamma), .log2_dim_i(l2d), .s_next_i(s_next),
    .s_star_o(s_star), .s_star_valid_o(s_star_v), .rope_en_i(rope_en), .rope_word_base_i(rope_wb),
    .rope_pre_we_i(rp_we), .rope_pre_sel_i(rp_sel), .rope_pre_addr_i(rp_addr),
    .rope_pre_data_i(rp_data), .rope_upd_i(rope_upd), .rope_busy_o(rope_busy), .wb_en_i(wb_en),
    .wb_base_i(wb_base), .out_valid_o(ov), .out_idx_o(oidx), .out_data_o(odata));
  always #5 clk = ~clk;
  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic chk(logic c, string m);
    checks++; if (!c) begin failures++; if (failures < 15) $display("FAIL %s", m); end
  endtask
  function automatic int rq(longint acc, longint s, int b);
    automatic longint r = ((acc * s + (longint'(1) << 23)) >>> 24) + longint'(b);
    return (r > 127) ? 127 : (r < -128) ? -128 : int'(r);
  endfunction
  function automatic real theta(int i);
    return $pow(10000.0, -2.0 * real'(i - 1) / 256.0);
  endfunction
  function automatic int w4v(logic [3:0] w);
    return (w >= 8) ? int'(w) - 16 : int'(w);
  endfunction

  byte A [ROWS][KM]; byte W [KM][COLS]; longint C [ROWS][COLS];
  byte X [KF]; logic [3:0] W4 [N_PC][KF][COLS]; logic [3:0] S [N_PC][KF]; longint Y [64];
  act_t got [16][COLS]; int got_idx [16]; int ngot;

  // start one operation; collect output vectors; return cycles start..done
  task automatic run(mode_e md, drain_e d, int K, int ab, logic kp, logic df, output int cyc);
    mode = md; dir = d; k_len = 13'(K); act_base = 13'(ab); wgt_base = 0; sw_base = 0;
    keep = kp; defer = df;
    start = 1; @(negedge clk); start = 0; keep = 0; defer = 0; cyc = 1; ngot = 0;
    while (!done && cyc < 10000) begin
      if (ov) begin got[ngot] = odata; got_idx[ngot] = int'(oidx); ngot++; end
      @(negedge clk); cyc++;
    end
  endtask

  // load MXINT4 weights and Sw for global steps k0 .. k0+n-1 into local 0 .. n-1
  task automatic load_mvm_weights(int k0, int n);
    for (int p = 0; p < N_PC; p++) for (int a = 0; a < n / 2; a++) begin
      wgt_we = 4'(1 << p); wgt_waddr = 10'(a);
      for (int h = 0; h < 2; h++) for (int c = 0; c < COLS; c++)
        wgt_wdata[h*64 + c*4 +: 4] = W4[p][k0 + 2*a + h][c];
      @(negedge clk);
    end
    wgt_we = 0;
    for (int k = 0; k < n; k++) begin
      sw_we = 1; sw_waddr = 11'(k);
      for (int p = 0; p < N_PC; p++) sw_wdata[p*4 +: 4] = S[p][k0 + k];
      @(negedge clk);
    end
    sw_we = 0;
  endtask

  task automatic load_act_vector(int base, int n);
    for (int a = 0; a < n / 16; a++) begin
      act_we = 1; act_waddr = 13'(base + a);
      for (int l = 0; l < 16; l++) act_wdata[l*8 +: 8] = X[16*a + l];
      @(negedge clk);
    end
    act_we = 0;
  endtask

  task automatic make_mvm(int n);
    for (int k = 0; k < n; k++) X[k] = byte'($urandom);
    for (int p = 0; p < N_PC; p++) for (int k = 0; k < n; k++) begin
      S[p][k] = 4'($urandom % 10);
      for (int c = 0; c < COLS; c++) W4[p][k][c] = 4'($urandom);
    end
    for (int p = 0; p < N_PC; p++) for (int c = 0; c < COLS; c++) begin
      Y[16*p + c] = 0;
      for (int k = 0; k < n; k++)
        Y[16*p + c] += longint'(X[k]) * longint'(w4v(W4[p][k][c])) * (longint'(1) << S[p][k]);
    end
  endtask

  initial begin
    int cyc;
    for (int l = 0; l < COLS; l++) begin bias[l] = 0; gamma[l] = 16'sd4096; end
    repeat (3) @(negedge clk); rst_n = 1; @(negedge clk);

    // ---------- 1. prefill tile, K = 1024 ----------
    for (int r = 0; r < ROWS; r++) for (int k = 0; k < KM; k++) A[r][k] = byte'($urandom);
    for (int k = 0; k < KM; k++) for (int c = 0; c < COLS; c++) W[k][c] = byte'($urandom);
    for (int r = 0; r < ROWS; r++) for (int c = 0; c < COLS; c++) begin
      C[r][c] = 0; for (int k = 0; k < KM; k++) C[r][c] += longint'(A[r][k]) * longint'(W[k][c]);
    end
    for (int k = 0; k < KM; k++) begin
      act_we = 1; act_waddr = 13'(k);
      for (int r = 0; r < ROWS; r++) act_wdata[r*8 +: 8] = A[r][k];
      wgt_we = 4'b0001; wgt_waddr = 10'(k);
      for (int c = 0; c < COLS; c++) wgt_wdata[c*8 +: 8] = W[k][c];
      @(negedge clk);
    end
    act_we = 0; wgt_we = 0;
    scale = 32'd2000;
    run(MODE_MMM, DRAIN_V, KM, 0, 1'b0, 1'b0, cyc);
    chk(cyc == KM + 49 + 3, $sformatf("prefill latency %0d", cyc));
    chk(ngot == 16, "prefill vectors");
    for (int v = 0; v < ngot; v++) begin
      chk(got_idx[v] == 15 - v, "prefill order");
      for (int c = 0; c < COLS; c++)
        chk(int'(got[v][c]) == rq(C[got_idx[v]][c], 2000, 0),
            $sformatf("prefill t%0d c%0d got %0d exp %0d", got_idx[v], c, got[v][c], rq(C[got_idx[v]][c], 2000, 0)));
    end
    n_prefill++;

    // ---------- 2. FFN down projection, K = 4096 in two parts ----------
    make_mvm(KF);
    load_act_vector(1024, KF);
    load_mvm_weights(0, KH);
    run(MODE_MVM, DRAIN_V, KH, 1024, 1'b0, 1'b1, cyc);
    chk(cyc == KH + 21 && ngot == 0, $sformatf("ffn part 1 latency %0d", cyc));
    load_mvm_weights(KH, KH);
    scale = 32'd200;
    run(MODE_MVM, DRAIN_V, KH, 1024 + KH / 16, 1'b1, 1'b0, cyc);
    chk(cyc == KH + 29 + 3, $sformatf("ffn part 2 latency %0d", cyc));
    chk(ngot == 4, "ffn vectors");
    for (int v = 0; v < ngot; v++) for (int c = 0; c < COLS; c++) begin
      if (got[v][c] != 127 && got[v][c] != -128) n_unsat++;
      chk(int'(got[v][c]) == rq(Y[16*got_idx[v] + c], 200, 0),
          $sformatf("ffn p%0d c%0d got %0d exp %0d", got_idx[v], c, got[v][c], rq(Y[16*got_idx[v] + c], 200, 0)));
    end
    // the scale keeps most results inside the INT8 range, so the check is not
    // dominated by saturated values
    chk(n_unsat > 32, $sformatf("ffn results mostly saturated (%0d in range)", n_unsat));
    n_ffn++;

    // ---------- 3. query projection with RoPE at position 7 ----------
    for (int i = 1; i <= 128; i++) begin
      rp_we = 1; rp_addr = 7'(i - 1);
      rp_sel = 0; rp_data = 24'($rtoi($floor($sin(theta(i)) * FR + 0.5))); @(negedge clk);
      rp_sel = 1; rp_data = 24'($rtoi($floor($cos(theta(i)) * FR + 0.5))); @(negedge clk);
      rp_sel = 2; rp_data = 0; @(negedge clk);
      rp_sel = 3; rp_data = 24'(1 << 22); @(negedge clk);
    end
    rp_we = 0;
    for (int m = 0; m < 7; m++) begin
      rope_upd = 1; @(negedge clk); rope_upd = 0;
      cyc = 1;
      while (rope_busy) begin @(negedge clk); cyc++; end
      chk(cyc >= 16 && cyc <= 18, $sformatf("rope update cycles %0d", cyc));
    end
    make_mvm(KQ);
    load_act_vector(2048, KQ);
    load_mvm_weights(0, KQ);
    scale = 32'd300; rope_en = 1; rope_wb = 4'd8;
    run(MODE_MVM, DRAIN_V, KQ, 2048, 1'b0, 1'b0, cyc);
    rope_en = 0;
    chk(cyc == KQ + 29 + 3, $sformatf("q latency %0d", cyc));
    chk(ngot == 4, "q vectors");
    for (int v = 0; v < ngot; v++) for (int j = 0; j < 8; j++) begin
      automatic int wi = 8 + got_idx[v];
      automatic real a = 7.0 * theta(wi * 8 + j + 1);
      automatic real xn = real'(rq(Y[16*got_idx[v] + 2*j], 300, 0));
      automatic real xn1 = real'(rq(Y[16*got_idx[v] + 2*j + 1], 300, 0));
      automatic real e0 = xn * $cos(a) - xn1 * $sin(a), e1 = xn1 * $cos(a) + xn * $sin(a);
      e0 = (e0 > 127.0) ? 127.0 : (e0 < -128.0) ? -128.0 : e0;
      e1 = (e1 > 127.0) ? 127.0 : (e1 < -128.0) ? -128.0 : e1;
      chk((real'(got[v][2*j]) - e0) <= 1.0 && (e0 - real'(got[v][2*j])) <= 1.0 &&
          (real'(got[v][2*j+1]) - e1) <= 1.0 && (e1 - real'(got[v][2*j+1])) <= 1.0,
          $sformatf("q rope p%0d j%0d got %0d %0d exp %f %f", got_idx[v], j, got[v][2*j], got[v][2*j+1], e0, e1));
    end
    n_q++;

    chk(n_prefill == 1 && n_ffn == 1 && n_q == 1, "a workload slice did not run");
    $display("slices: prefill=%0d ffn_down=%0d q_proj_rope=%0d ffn_in_range=%0d", n_prefill, n_ffn, n_q, n_unsat);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
