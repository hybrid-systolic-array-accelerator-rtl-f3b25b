// tb_pe: self-checking test of one PE. Random activation/weight pairs are
// applied with a random enable; the accumulator is compared with a software
// sum, the systolic outputs with the inputs of the previous cycle, and the
// drain (shift) and clear controls with their expected effect.
module tb_pe;
  import hsa_pkg::*;
  logic clk = 0, rst_n = 0, clear = 0, shift = 0, en = 0, en_o;
  act_t act = 0, act_o; wgt_t wgt = 0, wgt_o; acc_t psum = 0, acc_o;
  int checks = 0, failures = 0;
  pe dut (.clk, .rst_n, .clear_i(clear), .shift_i(shift), .act_i(act), .en_i(en),
          .wgt_i(wgt), .psum_i(psum), .act_o, .en_o, .wgt_o, .acc_o);
  always #5 clk = ~clk;
  task automatic chk(logic c, string m);
    checks++; if (!c) begin failures++; $display("FAIL %s", m); end
  endtask
  initial begin
    repeat (2000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    longint model = 0;
    repeat (2) @(posedge clk); rst_n = 1; @(negedge clk);
    chk(acc_o == 0, "reset");
    for (int i = 0; i < 300; i++) begin
      act = act_t'($urandom); wgt = wgt_t'($urandom); en = ($urandom % 4) != 0;
      if (en) model += longint'(act) * longint'(wgt);
      @(negedge clk);
      chk(act_o == act && wgt_o == wgt && en_o == en, "pass");
      chk(acc_o == acc_t'(model), $sformatf("acc %0d vs %0d", acc_o, model));
    end
    // shift takes priority over en
    psum = 32'sd12345; shift = 1; en = 1; @(negedge clk); shift = 0; en = 0;
    chk(acc_o == 32'sd12345, "shift");
    clear = 1; en = 1; @(negedge clk); clear = 0; en = 0;
    chk(acc_o == 0, "clear");
    act = -8'sd128; wgt = -8'sd128; en = 1; @(negedge clk); en = 0;
    chk(acc_o == 32'sd16384, "corner");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
