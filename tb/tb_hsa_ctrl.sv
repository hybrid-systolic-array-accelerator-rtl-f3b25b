// tb_hsa_ctrl: runs one MMM and one MVM operation and checks, cycle by cycle,
// the SRAM read addresses (MMM: base+k; MVM: act base+k/16 lane k%16, weight
// base+k/2 half k%2, Sw base+k), the one-cycle-delayed valid, the clear pulse,
// the fill wait before the drain, the drain length (16 / 4 cycles), output
// indices, and the total operation time (K+49 MMM, K+29 MVM), also for
// split reductions (keep: no clear; defer: no drain, K+33 / K+21).
module tb_hsa_ctrl;
  import hsa_pkg::*;
  logic clk = 0, rst_n = 0, start = 0, keep = 0, defer = 0;
  mode_e mode = MODE_MMM, mode_o; drain_e dir = DRAIN_H, dir_o;
  logic [12:0] k_len = 0, abase = 0; logic [9:0] wbase = 0; logic [10:0] sbase = 0;
  logic busy, done, rd_en, half, valid, clear, shift, mclr, ov;
  logic [12:0] aaddr; logic [9:0] waddr; logic [10:0] saddr; logic [3:0] lane, oidx;
  int checks = 0, failures = 0;
  hsa_ctrl dut (.clk, .rst_n, .start_i(start), .mode_i(mode), .drain_dir_i(dir), .k_len_i(k_len),
    .act_base_i(abase), .wgt_base_i(wbase), .sw_base_i(sbase), .keep_i(keep), .defer_drain_i(defer), .busy_o(busy), .done_o(done),
    .mode_o(mode_o), .drain_dir_o(dir_o), .rd_en_o(rd_en), .act_addr_o(aaddr), .wgt_addr_o(waddr),
    .wgt_half_o(half), .sw_addr_o(saddr), .valid_o(valid), .bc_lane_o(lane), .clear_o(clear),
    .shift_o(shift), .mvm_clr_o(mclr), .out_valid_o(ov), .out_idx_o(oidx));
  always #5 clk = ~clk;
  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic chk(logic c, string m);
    checks++; if (!c) begin failures++; if (failures < 15) $display("FAIL %s", m); end
  endtask
  task automatic run(mode_e md, int K);
    automatic int t = 0, k = 0, nclr = 0, nshift = 0, nout = 0, first_shift = -1, last_rd = -1, prev_rd = 0, nvalid = 0;
    automatic int exp_total = defer ? ((md == MODE_MMM) ? K + 33 : K + 21) : (md == MODE_MMM) ? K + 49 : K + 29;
    mode = md; k_len = 13'(K); abase = 13'd100; wbase = 10'd7; sbase = 11'd33; dir = DRAIN_H;
    start = 1; @(negedge clk); start = 0;
    while (!done && t < 500) begin
      if (clear) begin nclr++; chk(mclr && k == 0, "clear"); end
      if (mclr) chk(clear, "mvm clear with clear");
      chk(valid == prev_rd[0], "valid delay");
      if (valid) begin chk(lane == 4'((k - 1) % 16), "lane"); nvalid++; end
      prev_rd = rd_en;
      if (rd_en) begin
        if (md == MODE_MMM) chk(aaddr == 13'(100 + k) && waddr == 10'(7 + k), "mmm addr");
        else chk(aaddr == 13'(100 + k / 16) && waddr == 10'(7 + k / 2) && half == k[0] && saddr == 11'(33 + k), "mvm addr");
        k++; last_rd = t;
      end
      if (shift) begin if (first_shift < 0) first_shift = t; nshift++; end
      if (ov) begin
        if (md == MODE_MMM) chk(shift && oidx == 4'(15 - nout), "mmm out");
        else chk(!shift && oidx == 4'(nout), "mvm out");
        nout++;
      end
      @(negedge clk); t++;
    end
    chk(k == K && nvalid == K, "reads");
    chk(nclr == (keep ? 0 : 1), "clear count");
    if (!defer) begin
      chk(first_shift - last_rd == ((md == MODE_MMM) ? 32 : 20), $sformatf("fill wait %0d", first_shift - last_rd));
      chk(nshift == ((md == MODE_MMM) ? 16 : 4), "drain length");
      chk(nout == ((md == MODE_MMM) ? 16 : 4), "outputs");
    end else chk(nshift == 0 && nout == 0, "deferred drain");
    chk(t + 1 == exp_total, $sformatf("total %0d exp %0d", t + 1, exp_total));
    chk(mode_o == md && dir_o == ((md == MODE_MVM) ? DRAIN_V : DRAIN_H), "mode/dir");
    @(negedge clk); chk(!busy, "idle");
  endtask
  initial begin
    repeat (2) @(negedge clk); rst_n = 1; @(negedge clk);
    run(MODE_MMM, 5);
    run(MODE_MMM, 40);
    run(MODE_MVM, 37);
    run(MODE_MVM, 1);
    // split reduction: first part deferred, second part kept
    defer = 1; run(MODE_MMM, 9); defer = 0;
    keep = 1; run(MODE_MMM, 9); keep = 0;
    defer = 1; keep = 1; run(MODE_MVM, 20); defer = 0; keep = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
