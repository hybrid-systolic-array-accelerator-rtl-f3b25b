// sram_1rw: single-port synchronous SRAM, one read or write per cycle, read
// data valid one cycle after the address. Stands for the compiled SRAM macros
// of the chip (activation SRAM, weight SRAMs, Sw scale buffer); written as an
// array so it simulates and synthesises to a memory cell. Contents are not
// reset. Defaults: 4224 x 128 bit = 66 kB, the activation SRAM of the paper.
module sram_1rw #(
  parameter int unsigned DEPTH = 4224,
  parameter int unsigned WIDTH = 128,
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
)(
  input  logic             clk,
  input  logic             en_i,
  input  logic             we_i,
  input  logic [AW-1:0]    addr_i,
  input  logic [WIDTH-1:0] wdata_i,
  output logic [WIDTH-1:0] rdata_o
);
  logic [WIDTH-1:0] mem [DEPTH];
  always_ff @(posedge clk) begin
    if (en_i) begin
      if (we_i) mem[addr_i] <= wdata_i;
      else      rdata_o     <= mem[addr_i];
    end
  end
endmodule
