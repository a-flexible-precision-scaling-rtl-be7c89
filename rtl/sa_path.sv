// sa_path: independent shift-add path for 6/7-bit weights (Fig. 4).
//
// In 6/7-bit mode a weight needs three columns, so column 0 of each group
// would sit idle. Column 0 of three consecutive groups instead holds one
// more weight: the first group the top slice, the next the middle slice,
// the third the lowest. Because activations travel one group per cycle,
// the three column results arrive on consecutive cycles t, t+1, t+2. The
// path registers the first, shifts it left by 2 and adds the second one
// cycle later, then shifts that by 2 and adds the third:
//   out = ((a0 << 2) + a1) << 2 + a2.
// The "<<2" stages and the t/t+1/t+2 labels are printed in Fig. 4; the
// register after each adder is this design's reading of "the same number
// of register stages as the original path".
//
// Timing: out_valid pulses the cycle after v2 (and only when en is high).
module sa_path
  import fpsa_pkg::*;
#(
  parameter int unsigned ROWS = ROWS_DEF
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          en,   // 6/7-bit mode
  input  logic signed [acc_w(ROWS)-1:0] a0,   // column 0 of group 3p
  input  logic                          v0,
  input  logic signed [acc_w(ROWS)-1:0] a1,   // column 0 of group 3p+1
  input  logic                          v1,
  input  logic signed [acc_w(ROWS)-1:0] a2,   // column 0 of group 3p+2
  input  logic                          v2,
  output logic signed [out_w(ROWS)-1:0] out,
  output logic                          out_valid
);

  localparam int unsigned OW = out_w(ROWS);

  logic signed [OW-1:0] st1, st2;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st1       <= '0;
      st2       <= '0;
      out       <= '0;
      out_valid <= 1'b0;
    end else begin
      out_valid <= en & v2;
      if (en & v0) st1 <= OW'(a0);
      if (en & v1) st2 <= (st1 <<< 2) + OW'(a1);
      if (en & v2) out <= (st2 <<< 2) + OW'(a2);
    end
  end

endmodule
