// tb_bucket_selector: all combinations of mode, valid and Sw[3:2]: in MVM the
// single enabled row must be Sw[3:2]; in MMM all rows follow valid.
module tb_bucket_selector;
  import hsa_pkg::*;
  mode_e mode; logic valid; logic [1:0] sel; logic [PC_ROWS-1:0] en;
  int checks = 0, failures = 0;
  bucket_selector dut (.mode_i(mode), .valid_i(valid), .sel_i(sel), .row_en_o(en));
  initial begin
    #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int m = 0; m < 2; m++) for (int v = 0; v < 2; v++) for (int s = 0; s < 4; s++) begin
      logic [3:0] exp;
      mode = mode_e'(m); valid = v[0]; sel = 2'(s); #1;
      exp = !v[0] ? 4'b0 : (m == 0) ? 4'b1111 : 4'(1 << s);
      checks++;
      if (en !== exp) begin failures++; $display("FAIL m%0d v%0d s%0d got %b", m, v, s, en); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
