// tinycl_mop_adder: the processing unit's multi-operand adder.
//
// Sums the nine 32-bit multi-operand outputs of the MAC array together with
// an optional accumulator input, at full precision (SUM_W bits), and also
// gives the sum rounded to Q4.12 with saturation. The architecture names a
// 9-operand Dadda adder here; this RTL writes the sum as a plain addition and
// leaves the choice of compressor tree to synthesis. The extra accumulator
// operand is used by the dense forward pass, where the sums of many cycles
// are collected in a partial-sum register. Combinational.
module tinycl_mop_adder
  import tinycl_pkg::*;
#(
  parameter int unsigned N     = 9,
  parameter int unsigned SUM_W = 40
) (
  input  prod_t                    in  [N],
  input  logic signed [SUM_W-1:0]  acc_in,
  output logic signed [SUM_W-1:0]  sum,
  output data_t                    rounded
);

  always_comb begin
    sum = acc_in;
    for (int i = 0; i < N; i++) sum = sum + SUM_W'(in[i]);
    rounded = round_sat(48'(sum));
  end

endmodule
