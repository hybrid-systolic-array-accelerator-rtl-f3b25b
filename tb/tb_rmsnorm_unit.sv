// tb_rmsnorm_unit: streams random INT8 vectors with random gamma and checks
// Y*gamma on every beat. Whole-vector mode: a 512-element embedding (32 beats
// of 16 lanes); after the last beat the fused scale S* = S_next /
// sqrt(mean(Y^2)) must appear on every lane, within 0.5 % or 2 LSB of a
// real-valued model, and within 60 cycles. Per-lane mode: 16 tokens, one per
// lane, each with a 64-element embedding (64 beats); each lane's S* is
// checked against its own token's RMS, and all must come within 16 x 60
// cycles; a token that is all zeros must give the largest S*. Beats are not accumulated while busy, so trials wait for !busy.
module tb_rmsnorm_unit;
  import hsa_pkg::*;
  logic clk = 0, rst_n = 0, vi = 0, last = 0, vo, busy, sv;
  act_t y [COLS]; logic signed [15:0] g [COLS]; act_t ys [COLS];
  logic [SCALE_W-1:0] snext = 0, sstar [COLS]; logic [4:0] l2d = 5'd9; logic pl = 0;
  int checks = 0, failures = 0;
  rmsnorm_unit dut (.clk, .rst_n, .valid_i(vi), .last_i(last), .per_lane_i(pl), .y_i(y), .gamma_i(g), .log2_dim_i(l2d),
                    .s_next_i(snext), .valid_o(vo), .ystar_o(ys), .busy_o(busy), .s_star_valid_o(sv), .s_star_o(sstar));
  always #5 clk = ~clk;
  initial begin
    repeat (50000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic chk(logic c, string m);
    checks++; if (!c) begin failures++; if (failures < 10) $display("FAIL %s", m); end
  endtask
  initial begin
    for (int l = 0; l < COLS; l++) begin y[l] = 0; g[l] = 0; end
    repeat (2) @(negedge clk); rst_n = 1;
    for (int trial = 0; trial < 8; trial++) begin
      automatic real sumsq [COLS]; automatic real expv; automatic int lat = 0;
      automatic int amp = (trial % 4 == 3) ? 3 : 127;
      automatic int nb = (trial < 4) ? 32 : 64;
      pl = (trial >= 4); l2d = pl ? 5'd6 : 5'd9;
      for (int l = 0; l < COLS; l++) sumsq[l] = 0.0;
      snext = 32'(($urandom % (1 << 24)) + (1 << 20));
      for (int b = 0; b < nb; b++) begin
        automatic int e [COLS];
        automatic int a = (pl && b % 2 == 1) ? amp / 3 + 1 : amp;
        for (int l = 0; l < COLS; l++) begin
          y[l] = act_t'(int'($urandom % (2*a+1)) - a);
          if (pl && l >= 8) y[l] = act_t'(int'(y[l]) / (l - 6));
          g[l] = 16'(int'($urandom % 16384) - 4096);
          sumsq[pl ? l : 0] += real'(int'(y[l]) * int'(y[l]));
          e[l] = (int'(y[l]) * int'(g[l]) + 2048) >>> 12;
          if (e[l] > 127) e[l] = 127; else if (e[l] < -128) e[l] = -128;
        end
        vi = 1; last = (b == nb - 1); @(negedge clk); vi = 0; last = 0;
        chk(vo, "valid");
        for (int l = 0; l < COLS; l++) chk(int'(ys[l]) == e[l], $sformatf("gamma b%0d l%0d got %0d exp %0d", b, l, ys[l], e[l]));
      end
      while (!sv && lat < 2000) begin @(negedge clk); lat++; end
      chk(lat < (pl ? 16 * 60 : 60), $sformatf("latency %0d", lat));
      for (int l = 0; l < COLS; l++) begin
        // an all-zero token (sigma = 0) saturates S* to its largest value
        expv = (sumsq[pl ? l : 0] == 0.0) ? 4294967295.0 :
               real'(snext) / $sqrt(sumsq[pl ? l : 0] / real'(16 * nb / (pl ? 16 : 1)));
        chk((real'(sstar[l]) - expv) < expv * 0.005 + 2.0 && (expv - real'(sstar[l])) < expv * 0.005 + 2.0,
            $sformatf("trial %0d s_star[%0d] got %0d exp %f", trial, l, sstar[l], expv));
      end
      @(negedge clk); chk(!busy, "busy after result");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
