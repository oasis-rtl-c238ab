// concat_units -- the bank of Concat Units of one PE line.
//
// Each Concat Unit takes a 4-bit activation index and a 4-bit weight index and
// stores their concatenation {act, wgt} in an 8-bit register (paper: "accepts two
// 4-bit indices, concatenates them, and stores the result in an 8-bit register").
// The activation index is the upper field, as in the worked example of the paper
// where activation 0 with weight 1 forms concatenated index "01"; the order of
// fields is otherwise this design's choice.
//
// Interface: when `load` is high the K registers capture {act_idx[k], wgt_idx[k]}
// on the rising clock edge; `cat_idx` shows the registers (one cycle latency).
// Registers reset to 0.
module concat_units #(
  parameter int unsigned K  = oasis_pkg::K_DEF,
  parameter int unsigned NW = oasis_pkg::NW_DEF,
  parameter int unsigned NA = oasis_pkg::NA_DEF
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 load,
  input  logic [NA-1:0]        act_idx [K],
  input  logic [NW-1:0]        wgt_idx [K],
  output logic [NA+NW-1:0]     cat_idx [K]
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < int'(K); k++) cat_idx[k] <= '0;
    end else if (load) begin
      for (int k = 0; k < int'(K); k++) cat_idx[k] <= {act_idx[k], wgt_idx[k]};
    end
  end
endmodule
