// tb_sram_1rw: writes random words at random addresses of a small instance,
// reads them back in random order (one-cycle read latency) and compares them
// with a software copy; also checks that a disabled cycle keeps the output.
module tb_sram_1rw;
  localparam int D = 64, W = 128;
  logic clk = 0, en = 0, we = 0; logic [5:0] addr = 0; logic [W-1:0] wd = 0, rd;
  logic [W-1:0] model [D];
  int checks = 0, failures = 0;
  sram_1rw #(.DEPTH(D), .WIDTH(W)) dut (.clk, .en_i(en), .we_i(we), .addr_i(addr), .wdata_i(wd), .rdata_o(rd));
  always #5 clk = ~clk;
  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    @(negedge clk);
    for (int i = 0; i < D; i++) begin
      en = 1; we = 1; addr = 6'(i); wd = {$urandom, $urandom, $urandom, $urandom};
      model[i] = wd; @(negedge clk);
    end
    for (int i = 0; i < 200; i++) begin
      automatic int a = $urandom % D;
      if ($urandom % 3 == 0) begin
        en = 1; we = 1; addr = 6'(a); wd = {$urandom, $urandom, $urandom, $urandom};
        model[a] = wd; @(negedge clk);
      end
      en = 1; we = 0; addr = 6'(a); @(negedge clk);
      en = 0; addr = 6'(a + 1); @(negedge clk);
      checks++; if (rd !== model[a]) begin failures++; $display("FAIL addr %0d", a); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
