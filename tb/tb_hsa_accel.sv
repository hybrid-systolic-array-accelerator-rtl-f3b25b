// tb_hsa_accel: end-to-end test of the accelerator at its default sizes
// (66 kB activation SRAM, 4 x 16 kB weight SRAM, 16x16 PEs). It plays one
// decoder-layer-like sequence:
//  1. prefill MMM, K=64, 16 tokens: horizontal drain, requant, write-back of
//     the INT8 result words into the activation SRAM (read back and checked);
//  2. the same MMM with vertical (transposed) drain, and again with K split
//     into two operations (deferred drain, then keep accumulating);
//  2c. MMM with per-lane (per-token) RMSNorm over the 16 drained channels,
//     then the same MMM with the per-token fused scales S*[token], drained
//     horizontally (S* by lane) and vertically (S* by vector index);
//  3. decode MVM, K=256, 64 outputs with MXINT4 weights and random Sw, with
//     the fused RMSNorm: outputs times gamma, S* = sigma^-1 * S_next checked
//     against a real-valued model;
//  4. MVM again using the fused scale S* and RoPE Embed with the position
//     m = 0 angles, then RoPE Update (mode switch) and
//  5. a third MVM embedded at position m = 1.
// Every output vector is checked against a software model; operation
// latencies are checked against K+49+3 (MMM) and K+29+3 (MVM) cycles; with
// the norm closing, busy lasts until S* is ready (at most 60 cycles more). Each
// mechanism (both dataflows, both drain directions, write-back, fused norm,
// fused scale, RoPE embed/update, saturation) is counted and must occur.
module tb_hsa_accel;
  import hsa_pkg::*;
  localparam int KM = 64, KV = 256;
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
  logic norm_en = 0, norm_close = 0, norm_pl = 0; logic signed [15:0] gamma [COLS]; logic [4:0] l2d = 0;
  logic [31:0] s_next = 0, s_star [COLS]; logic s_star_v;
  logic rope_en = 0; logic [3:0] rope_wb = 0; logic rp_we = 0; logic [1:0] rp_sel = 0;
  logic [6:0] rp_addr = 0; logic signed [23:0] rp_data = 0; logic rope_upd = 0, rope_busy;
  logic wb_en = 0; logic [12:0] wb_base = 0;
  logic ov; logic [3:0] oidx; act_t odata [COLS];
  int checks = 0, failures = 0;
  int n_mmm = 0, n_mvm = 0, n_h = 0, n_v = 0, n_wb = 0, n_norm = 0, n_fused = 0, n_embed = 0, n_upd = 0, n_sat = 0, n_split = 0, n_lane = 0;

  hsa_accel dut (.clk, .rst_n, .act_we_i(act_we), .act_waddr_i(act_waddr), .act_wdata_i(act_wdata),
    .wgt_we_i(wgt_we), .wgt_waddr_i(wgt_waddr), .wgt_wdata_i(wgt_wdata), .sw_we_i(sw_we),
    .sw_waddr_i(sw_waddr), .sw_wdata_i(sw_wdata), .act_re_i(act_re), .act_raddr_i(act_raddr),
    .act_rdata_o(act_rdata), .start_i(start), .mode_i(mode), .drain_dir_i(dir), .k_len_i(k_len),
    .act_base_i(act_base), .wgt_base_i(wgt_base), .sw_base_i(sw_base), .keep_i(keep), .defer_drain_i(defer), .busy_o(busy), .done_o(done),
    .scale_i(scale), .use_fused_i(use_fused), .bias_i(bias), .norm_en_i(norm_en),
    .norm_close_i(norm_close), .norm_per_lane_i(norm_pl), .gamma_i(gamma), .log2_dim_i(l2d), .s_next_i(s_next),
    .s_star_o(s_star), .s_star_valid_o(s_star_v), .rope_en_i(rope_en), .rope_word_base_i(rope_wb),
    .rope_pre_we_i(rp_we), .rope_pre_sel_i(rp_sel), .rope_pre_addr_i(rp_addr),
    .rope_pre_data_i(rp_data), .rope_upd_i(rope_upd), .rope_busy_o(rope_busy), .wb_en_i(wb_en),
    .wb_base_i(wb_base), .out_valid_o(ov), .out_idx_o(oidx), .out_data_o(odata));
  always #5 clk = ~clk;
  initial begin
    repeat (40000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic chk(logic c, string m);
    checks++; if (!c) begin failures++; if (failures < 15) $display("FAIL %s", m); end
  endtask
  function automatic int rq(longint acc, longint s, int b);
    automatic longint r = ((acc * s + (longint'(1) << 23)) >>> 24) + longint'(b);
    return (r > 127) ? 127 : (r < -128) ? -128 : int'(r);
  endfunction
  function automatic int sat(int v);
    return (v > 127) ? 127 : (v < -128) ? -128 : v;
  endfunction
  function automatic real theta(int i);
    return $pow(10000.0, -2.0 * real'(i - 1) / 256.0);
  endfunction

  byte A [ROWS][KM]; byte W [KM][COLS]; longint C [ROWS][COLS];
  byte X [KV]; logic [3:0] W4 [N_PC][KV][COLS]; logic [3:0] S [N_PC][KV]; longint Y [64];
  act_t got [16][COLS]; int got_idx [16]; int ngot;

  // run one operation; collect output vectors; return cycles start..done
  task automatic run(mode_e md, drain_e d, int K, int ab, output int cyc);
    mode = md; dir = d; k_len = 13'(K); act_base = 13'(ab); wgt_base = 0; sw_base = 0;
    start = 1; @(negedge clk); start = 0; cyc = 1; ngot = 0;
    while (!done && cyc < 2000) begin
      if (ov) begin got[ngot] = odata; got_idx[ngot] = int'(oidx); ngot++; end
      @(negedge clk); cyc++;
    end
    if (md == MODE_MMM) n_mmm++; else n_mvm++;
  endtask

  initial begin
    int cyc;
    for (int l = 0; l < COLS; l++) begin bias[l] = 0; gamma[l] = 16'sd4096; end
    // ---------- data ----------
    for (int r = 0; r < ROWS; r++) for (int k = 0; k < KM; k++) A[r][k] = byte'($urandom);
    for (int k = 0; k < KM; k++) for (int c = 0; c < COLS; c++) W[k][c] = byte'($urandom);
    for (int r = 0; r < ROWS; r++) for (int c = 0; c < COLS; c++) begin
      C[r][c] = 0; for (int k = 0; k < KM; k++) C[r][c] += longint'(A[r][k]) * longint'(W[k][c]);
    end
    repeat (3) @(negedge clk); rst_n = 1; @(negedge clk);
    for (int k = 0; k < KM; k++) begin
      act_we = 1; act_waddr = 13'(k);
      for (int r = 0; r < ROWS; r++) act_wdata[r*8 +: 8] = A[r][k];
      wgt_we = 4'b0001; wgt_waddr = 10'(k);
      for (int c = 0; c < COLS; c++) wgt_wdata[c*8 +: 8] = W[k][c];
      @(negedge clk);
    end
    act_we = 0; wgt_we = 0;

    // ---------- 1. MMM, horizontal drain, write-back ----------
    scale = 32'd100000; for (int l = 0; l < COLS; l++) bias[l] = 16'(l - 8);
    wb_en = 1; wb_base = 13'd4000;
    run(MODE_MMM, DRAIN_H, KM, 0, cyc);
    chk(cyc == KM + 49 + 3, $sformatf("mmm latency %0d", cyc));
    chk(ngot == 16, "mmm vectors");
    for (int v = 0; v < ngot; v++) begin
      chk(got_idx[v] == 15 - v, "mmm order");
      for (int i = 0; i < COLS; i++) begin
        automatic int e = rq(C[i][got_idx[v]], 100000, i - 8);
        if (e == 127 || e == -128) n_sat++;
        chk(int'(got[v][i]) == e, $sformatf("mmmH j%0d i%0d got %0d exp %0d", got_idx[v], i, got[v][i], e));
      end
    end
    n_h++;
    wb_en = 0;
    for (int j = 0; j < COLS; j++) begin
      act_re = 1; act_raddr = 13'(4000 + j); @(negedge clk); act_re = 0;
      for (int i = 0; i < COLS; i++)
        chk(int'(act_t'(act_rdata[i*8 +: 8])) == rq(C[i][j], 100000, i - 8), "write-back");
      n_wb++;
    end

    // ---------- 2. MMM, vertical (transposed) drain ----------
    run(MODE_MMM, DRAIN_V, KM, 0, cyc);
    for (int v = 0; v < ngot; v++) for (int c = 0; c < COLS; c++)
      chk(int'(got[v][c]) == rq(C[got_idx[v]][c], 100000, c - 8), $sformatf("mmmV i%0d c%0d", got_idx[v], c));
    n_v += (ngot == 16);

    // ---------- 2b. MMM with the reduction split in two halves ----------
    defer = 1; run(MODE_MMM, DRAIN_H, KM / 2, 0, cyc); defer = 0;
    chk(cyc == KM / 2 + 33 && ngot == 0, $sformatf("deferred op %0d", cyc));
    // second half: activations at word KM/2.., weights at word KM/2..
    keep = 1; mode = MODE_MMM; dir = DRAIN_H; k_len = 13'(KM / 2); act_base = 13'(KM / 2);
    wgt_base = 10'(KM / 2); start = 1; @(negedge clk); start = 0; keep = 0; ngot = 0;
    while (!done) begin
      if (ov) begin got[ngot] = odata; got_idx[ngot] = int'(oidx); ngot++; end
      @(negedge clk);
    end
    chk(ngot == 16, "split vectors");
    for (int v = 0; v < ngot; v++) for (int i = 0; i < COLS; i++)
      chk(int'(got[v][i]) == rq(C[i][got_idx[v]], 100000, i - 8), $sformatf("split j%0d i%0d", got_idx[v], i));
    n_split++; n_mmm++;

    // ---------- 2c. MMM with per-token RMSNorm, then per-token fused scales ----------
    scale = 32'd2000; for (int l = 0; l < COLS; l++) bias[l] = 0;
    norm_en = 1; norm_close = 1; norm_pl = 1; l2d = 5'd4; s_next = 32'd96000;
    run(MODE_MMM, DRAIN_H, KM, 0, cyc);
    norm_en = 0; norm_close = 0; norm_pl = 0;
    chk(cyc > KM + 49 + 3 + 16 * 50 && cyc <= KM + 49 + 3 + 16 * 60, $sformatf("per-token norm latency %0d", cyc));
    for (int v = 0; v < ngot; v++) for (int i = 0; i < COLS; i++)
      chk(int'(got[v][i]) == rq(C[i][got_idx[v]], 2000, 0), "per-token norm Y*");
    for (int t = 0; t < ROWS; t++) begin
      automatic real ss = 0.0, es;
      for (int j = 0; j < COLS; j++) ss += real'(rq(C[t][j], 2000, 0) * rq(C[t][j], 2000, 0));
      es = 96000.0 / $sqrt(ss / 16.0);
      chk(real'(s_star[t]) > es * 0.995 - 2.0 && real'(s_star[t]) < es * 1.005 + 2.0,
          $sformatf("S*[%0d] got %0d exp %f", t, s_star[t], es));
    end
    n_norm++;
    use_fused = 1;
    run(MODE_MMM, DRAIN_H, KM, 0, cyc);
    for (int v = 0; v < ngot; v++) for (int i = 0; i < COLS; i++)
      chk(int'(got[v][i]) == rq(C[i][got_idx[v]], longint'(s_star[i]), 0),
          $sformatf("per-token fused H j%0d i%0d", got_idx[v], i));
    run(MODE_MMM, DRAIN_V, KM, 0, cyc);
    for (int v = 0; v < ngot; v++) for (int c = 0; c < COLS; c++)
      chk(int'(got[v][c]) == rq(C[got_idx[v]][c], longint'(s_star[got_idx[v]]), 0),
          $sformatf("per-token fused V i%0d c%0d", got_idx[v], c));
    use_fused = 0;
    n_lane++; n_fused++; n_h++; n_v++;

    // ---------- 3. MVM with fused RMSNorm ----------
    for (int k = 0; k < KV; k++) X[k] = byte'($urandom);
    for (int p = 0; p < N_PC; p++) for (int k = 0; k < KV; k++) begin
      S[p][k] = 4'($urandom % 12);
      for (int c = 0; c < COLS; c++) W4[p][k][c] = 4'($urandom);
    end
    for (int a = 0; a < KV / 16; a++) begin
      act_we = 1; act_waddr = 13'(200 + a);
      for (int l = 0; l < 16; l++) act_wdata[l*8 +: 8] = X[16*a + l];
      @(negedge clk);
    end
    act_we = 0;
    for (int p = 0; p < N_PC; p++) for (int a = 0; a < KV / 2; a++) begin
      wgt_we = 4'(1 << p); wgt_waddr = 10'(a);
      for (int h = 0; h < 2; h++) for (int c = 0; c < COLS; c++) wgt_wdata[h*64 + c*4 +: 4] = W4[p][2*a+h][c];
      @(negedge clk);
    end
    wgt_we = 0;
    for (int k = 0; k < KV; k++) begin
      sw_we = 1; sw_waddr = 11'(k);
      for (int p = 0; p < N_PC; p++) sw_wdata[p*4 +: 4] = S[p][k];
      @(negedge clk);
    end
    sw_we = 0;
    for (int p = 0; p < N_PC; p++) for (int c = 0; c < COLS; c++) begin
      Y[16*p + c] = 0;
      for (int k = 0; k < KV; k++) begin
        automatic int wv = (W4[p][k][c] >= 8) ? int'(W4[p][k][c]) - 16 : int'(W4[p][k][c]);
        Y[16*p + c] += longint'(X[k]) * longint'(wv) * (longint'(1) << S[p][k]);
      end
    end
    scale = 32'd40; for (int l = 0; l < COLS; l++) begin bias[l] = 0; gamma[l] = 16'(3000 + 200 * l); end
    norm_en = 1; norm_close = 1; l2d = 5'd6; s_next = 32'd1000000;
    run(MODE_MVM, DRAIN_V, KV, 200, cyc);
    chk(cyc > KV + 29 + 3 && cyc <= KV + 29 + 3 + 60, $sformatf("mvm+norm latency %0d", cyc));
    chk(ngot == 4, "mvm vectors");
    begin
      automatic real ss = 0.0, es;
      for (int v = 0; v < ngot; v++) for (int c = 0; c < COLS; c++) begin
        automatic int y = rq(Y[16*got_idx[v] + c], 40, 0);
        automatic int e = sat((y * (3000 + 200 * c) + 2048) >>> 12);
        ss += real'(y * y);
        chk(int'(got[v][c]) == e, $sformatf("mvm norm p%0d c%0d got %0d exp %0d", got_idx[v], c, got[v][c], e));
      end
      // S* must already be valid when done_o is seen
      es = 1000000.0 / $sqrt(ss / 64.0);
      for (int l = 0; l < COLS; l++)
        chk(real'(s_star[l]) > es * 0.995 - 2.0 && real'(s_star[l]) < es * 1.005 + 2.0,
            $sformatf("S*[%0d] got %0d exp %f", l, s_star[l], es));
      n_norm++;
    end
    norm_en = 0; norm_close = 0;

    // ---------- 4./5. MVM with fused scale and RoPE at m = 0, 1 ----------
    for (int i = 1; i <= 128; i++) begin
      rp_we = 1; rp_addr = 7'(i - 1);
      rp_sel = 0; rp_data = 24'($rtoi($floor($sin(theta(i)) * FR + 0.5))); @(negedge clk);
      rp_sel = 1; rp_data = 24'($rtoi($floor($cos(theta(i)) * FR + 0.5))); @(negedge clk);
      rp_sel = 2; rp_data = 0; @(negedge clk);
      rp_sel = 3; rp_data = 24'(1 << 22); @(negedge clk);
    end
    rp_we = 0;
    for (int m = 0; m < 2; m++) begin
      automatic longint sf = longint'(s_star[0]);
      use_fused = 1; rope_en = 1; rope_wb = 4'd4;
      run(MODE_MVM, DRAIN_V, KV, 200, cyc);
      chk(cyc == KV + 29 + 3, $sformatf("mvm latency %0d", cyc));
      for (int v = 0; v < ngot; v++) for (int j = 0; j < 8; j++) begin
        automatic int wi = 4 + got_idx[v];
        automatic real a = real'(m) * theta(wi * 8 + j + 1);
        automatic real xn = real'(rq(Y[16*got_idx[v] + 2*j], sf, 0));
        automatic real xn1 = real'(rq(Y[16*got_idx[v] + 2*j + 1], sf, 0));
        automatic real e0 = xn * $cos(a) - xn1 * $sin(a), e1 = xn1 * $cos(a) + xn * $sin(a);
        e0 = (e0 > 127.0) ? 127.0 : (e0 < -128.0) ? -128.0 : e0;
        e1 = (e1 > 127.0) ? 127.0 : (e1 < -128.0) ? -128.0 : e1;
        chk((real'(got[v][2*j]) - e0) <= 1.0 && (e0 - real'(got[v][2*j])) <= 1.0 &&
            (real'(got[v][2*j+1]) - e1) <= 1.0 && (e1 - real'(got[v][2*j+1])) <= 1.0,
            $sformatf("rope m%0d p%0d j%0d got %0d %0d exp %f %f", m, got_idx[v], j, got[v][2*j], got[v][2*j+1], e0, e1));
      end
      n_fused++; n_embed++;
      rope_en = 0; use_fused = 0;
      if (m == 0) begin
        rope_upd = 1; @(negedge clk); rope_upd = 0;
        while (rope_busy) @(negedge clk);
        n_upd++;
      end
    end

    // ---------- mechanisms ----------
    chk(n_mmm > 0, "MMM never ran");      chk(n_mvm > 0, "MVM never ran");
    chk(n_h > 0, "no horizontal drain");  chk(n_v > 0, "no vertical drain");
    chk(n_wb > 0, "no write-back");       chk(n_norm > 0, "no fused norm");
    chk(n_fused > 0, "no fused scale");   chk(n_embed > 0, "no RoPE embed");
    chk(n_upd > 0, "no RoPE update");     chk(n_split > 0, "no split reduction");     chk(n_sat > 0, "no saturation");
    chk(n_lane > 0, "no per-token norm");
    $display("mechanisms: mmm=%0d mvm=%0d drainH=%0d drainV=%0d writeback=%0d norm=%0d fused=%0d embed=%0d update=%0d sat=%0d split=%0d per_token_norm=%0d",
             n_mmm, n_mvm, n_h, n_v, n_wb, n_norm, n_fused, n_embed, n_upd, n_sat, n_split, n_lane);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
