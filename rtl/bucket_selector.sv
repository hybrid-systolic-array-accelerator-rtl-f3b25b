// bucket_selector: picks which of the four PE rows of a cluster accumulates in
// the MVM dataflow. The two high bits of the 4-bit group scale, Sw[3:2], name
// the row ("bucket") i; products accumulated in row i carry an implicit weight
// of 2^(4i) that is applied when the rows are combined after the drain. Output
// row_en_o is one-hot (or all zero when valid_i is low). In MMM mode every row
// is enabled by valid_i, since all PEs compute. Combinational.
module bucket_selector
  import hsa_pkg::*;
(
  input  mode_e             mode_i,
  input  logic              valid_i,
  input  logic [1:0]        sel_i,    // Sw[3:2]
  output logic [PC_ROWS-1:0] row_en_o
);
  always_comb begin
    row_en_o = '0;
    if (valid_i) begin
      if (mode_i == MODE_MMM) row_en_o = '1;
      else                    row_en_o[sel_i] = 1'b1;
    end
  end
endmodule
