// tb_rope_unit: preloads sin/cos(theta_i), theta_i = 10000^(-2(i-1)/256), and
// sin/cos(0*theta_i) = (0, 1); then for tokens m = 0..24 embeds random INT8
// pairs over all 128 angles (16 words) and compares each rotated pair with a
// real-valued model using the exact angle m*theta_i (tolerance 1 LSB), and
// runs Update mode between tokens, which must take exactly 16 cycles.
module tb_rope_unit;
  import hsa_pkg::*;
  localparam real FR = 4194304.0;  // 2^22
  logic clk = 0, rst_n = 0, pre_we = 0, vi = 0, vo, upd = 0, busy, done;
  logic [1:0] sel = 0; logic [6:0] paddr = 0; logic signed [23:0] pdata = 0;
  logic [3:0] word = 0; act_t x [COLS]; act_t y [COLS];
  int checks = 0, failures = 0;
  rope_unit dut (.clk, .rst_n, .pre_we_i(pre_we), .pre_sel_i(sel), .pre_addr_i(paddr), .pre_data_i(pdata),
                 .valid_i(vi), .word_i(word), .x_i(x), .valid_o(vo), .y_o(y), .upd_start_i(upd),
                 .busy_o(busy), .upd_done_o(done));
  always #5 clk = ~clk;
  initial begin
    repeat (50000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic chk(logic c, string m);
    checks++; if (!c) begin failures++; if (failures < 10) $display("FAIL %s", m); end
  endtask
  function automatic real theta(int i);  // i = 1..128
    return $pow(10000.0, -2.0 * real'(i - 1) / 256.0);
  endfunction
  initial begin
    for (int l = 0; l < COLS; l++) x[l] = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int i = 1; i <= 128; i++) begin
      pre_we = 1; paddr = 7'(i - 1);
      sel = 0; pdata = 24'($rtoi($floor($sin(theta(i)) * FR + 0.5))); @(negedge clk);
      sel = 1; pdata = 24'($rtoi($floor($cos(theta(i)) * FR + 0.5))); @(negedge clk);
      sel = 2; pdata = 0; @(negedge clk);
      sel = 3; pdata = 24'(1 << 22); @(negedge clk);
    end
    pre_we = 0;
    for (int m = 0; m < 25; m++) begin
      automatic int cyc = 0;
      for (int w = 0; w < 16; w++) begin
        real e [COLS];
        for (int l = 0; l < COLS; l++) x[l] = act_t'($urandom);
        for (int j = 0; j < 8; j++) begin
          automatic real a = real'(m) * theta(w * 8 + j + 1);
          automatic real xn = real'(x[2*j]), xn1 = real'(x[2*j+1]);
          e[2*j]   = xn * $cos(a) - xn1 * $sin(a);
          e[2*j+1] = xn1 * $cos(a) + xn * $sin(a);
        end
        vi = 1; word = 4'(w); @(negedge clk); vi = 0;
        chk(vo, "valid");
        for (int l = 0; l < COLS; l++) begin
          automatic real ec = (e[l] > 127.0) ? 127.0 : (e[l] < -128.0) ? -128.0 : e[l];
          chk((real'(y[l]) - ec) <= 1.0 && (ec - real'(y[l])) <= 1.0,
              $sformatf("m%0d w%0d l%0d got %0d exp %f", m, w, l, y[l], ec));
        end
      end
      upd = 1; @(negedge clk); upd = 0;
      while (busy) begin @(negedge clk); cyc++; end
      chk(cyc == 16, $sformatf("update cycles %0d", cyc));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
