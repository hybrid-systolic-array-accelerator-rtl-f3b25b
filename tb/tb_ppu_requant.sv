// tb_ppu_requant: random accumulators, per-lane scales and biases (every
// fourth vector with one common unit scale, as a static layer scale is used),
// including values that saturate, against a software model of sat8(round(acc*S/2^24) + B);
// also checks the one-cycle latency of valid.
module tb_ppu_requant;
  import hsa_pkg::*;
  logic clk = 0, rst_n = 0, vi = 0, vo;
  mvm_t acc [COLS]; logic [SCALE_W-1:0] scale [COLS]; logic signed [15:0] bias [COLS]; act_t y [COLS];
  int checks = 0, failures = 0;
  ppu_requant dut (.clk, .rst_n, .valid_i(vi), .acc_i(acc), .scale_i(scale), .bias_i(bias), .valid_o(vo), .y_o(y));
  always #5 clk = ~clk;
  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    longint e [COLS];
    for (int l = 0; l < COLS; l++) begin acc[l] = '0; bias[l] = '0; scale[l] = '0; end
    repeat (2) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 300; t++) begin
      for (int l = 0; l < COLS; l++) begin
        // t%4 = 0: unit scale; 1: wide values that mostly saturate;
        // 2, 3: results mostly inside the INT8 range, so rounding shows
        automatic longint a = longint'($urandom % (1 << 20)) - (1 << 19);
        case (t % 4)
          0:       begin scale[l] = 32'(1 << 24); a = a % 100; end
          1:       begin scale[l] = 32'($urandom % (1 << 26)); a = a * 1024; end
          default: begin scale[l] = 32'($urandom % (1 << 12)); end
        endcase
        acc[l] = mvm_t'(a);
        bias[l] = 16'(int'($urandom % 64) - 32);
        e[l] = ((a * longint'(scale[l]) + (longint'(1) << 23)) >>> 24) + longint'(bias[l]);
        if (e[l] > 127) e[l] = 127; else if (e[l] < -128) e[l] = -128;
      end
      vi = 1; @(negedge clk); vi = 0;
      checks++; if (!vo) begin failures++; $display("FAIL valid"); end
      for (int l = 0; l < COLS; l++) begin
        checks++;
        if (longint'(y[l]) != e[l]) begin failures++; if (failures < 10) $display("FAIL t%0d l%0d got %0d exp %0d", t, l, y[l], e[l]); end
      end
      @(negedge clk); checks++; if (vo) begin failures++; $display("FAIL valid stuck"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
