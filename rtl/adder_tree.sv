// adder_tree: column adder tree for ROWS 3-bit signed products (Fig. 6).
//
// A 3-bit signed product p = -4*p[2] + 2*p[1] + p[0] is split in two. One
// CSA tree adds the unsigned lower two bits of all products (result [7:0]
// for 64 rows); a second, independent CSA tree counts the ones among the
// MSBs (result [6:0]). Because the MSB carries weight -4, the count is
// negated ("inverse value", two's complement) and added to bits [7:2] of
// the lower sum, zero-padded to [8:2]; bits [1:0] of the lower sum pass
// straight to the output. The 9-bit signed output is [8:0]. When a column
// holds unsigned slices every MSB is zero and the MSB tree stays idle.
// These widths and the split are printed in Fig. 6; the result is
// combinational.
module adder_tree
  import fpsa_pkg::*;
#(
  parameter int unsigned ROWS = ROWS_DEF
) (
  input  logic [ROWS-1:0][2:0]        prod,   // products of the ROWS cells
  output logic signed [tree_w(ROWS)-1:0] sum  // signed column sum
);

  localparam int unsigned LW = low_w(ROWS);
  localparam int unsigned MW = msb_w(ROWS);
  localparam int unsigned TW = tree_w(ROWS);

  logic [ROWS-1:0][LW-1:0] low_ops;
  logic [ROWS-1:0][MW-1:0] msb_ops;
  logic [LW-1:0]           low_sum;
  logic [MW-1:0]           msb_cnt;
  logic [TW-3:0]           upper;

  always_comb begin
    for (int r = 0; r < int'(ROWS); r++) begin
      low_ops[r] = LW'(prod[r][1:0]);
      msb_ops[r] = MW'(prod[r][2]);
    end
  end

  csa_tree #(.N(ROWS), .W(LW)) u_low (.ops(low_ops), .sum(low_sum));
  csa_tree #(.N(ROWS), .W(MW)) u_msb (.ops(msb_ops), .sum(msb_cnt));

  always_comb begin
    upper = (TW-2)'(low_sum[LW-1:2]) + (TW-2)'(~msb_cnt) + (TW-2)'(1);
    sum   = {upper, low_sum[1:0]};
  end

endmodule
