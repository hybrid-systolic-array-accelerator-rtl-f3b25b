// tb_mx_shifter: exhaustive check of the MXINT4 shifters: every 4-bit weight
// value in every lane for every shift 0..3 is compared with w * 2^shift.
module tb_mx_shifter;
  import hsa_pkg::*;
  logic [COLS*MX_W-1:0] w4; logic [1:0] sh; wgt_t w8 [COLS];
  int checks = 0, failures = 0;
  mx_shifter dut (.w4_i(w4), .sh_i(sh), .w8_o(w8));
  initial begin
    #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int s = 0; s < 4; s++)
      for (int v = 0; v < 16; v++) begin
        sh = 2'(s);
        for (int c = 0; c < COLS; c++) w4[c*4 +: 4] = 4'((v + c) % 16);
        #1;
        for (int c = 0; c < COLS; c++) begin
          automatic int wv = (v + c) % 16;
          automatic int sv = (wv >= 8) ? wv - 16 : wv;
          checks++;
          if (int'(w8[c]) != sv * (1 << s)) begin
            failures++; $display("FAIL lane %0d w=%0d s=%0d got %0d", c, sv, s, w8[c]);
          end
        end
      end
    // the paper's example: Sw[1:0] = 3 gives {w[3], w, 3'b000}
    sh = 2'd3; w4 = '0; w4[3:0] = 4'b1010; #1; checks++;
    if (w8[0] != 8'b1_1010_000) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
