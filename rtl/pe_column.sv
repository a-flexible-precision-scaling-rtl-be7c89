// pe_column: one column of the PE array (inset of Fig. 2).
//
// ROWS mac_cell instances form a vertical weight shift chain: w_in enters
// the top row (row 0) and moves one row down per shift_en cycle, so the
// first slice shifted in ends in row ROWS-1 after ROWS shifts. Every row
// receives its own serial activation bit. The ROWS 3-bit products are summed
// by the column adder tree and accumulated over the activation bits by the
// column accumulator.
//
// Timing: the adder tree is combinational between the activation bits and
// the accumulator, so the column result appears one cycle after the last
// activation bit (res_valid). load_mode and s must be stable while the
// column computes.
module pe_column
  import fpsa_pkg::*;
#(
  parameter int unsigned ROWS = ROWS_DEF
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          shift_en,
  input  logic                          load_mode,
  input  logic                          s,
  input  logic [2:0]                    w_in,       // slice entering row 0
  input  logic [ROWS-1:0]               a_bits,     // one bit per row
  input  logic                          a_valid,
  input  logic                          a_first,
  input  logic                          a_last,
  input  logic                          act_signed,
  output logic signed [acc_w(ROWS)-1:0] res,
  output logic                          res_valid
);

  logic [ROWS:0][2:0]   w_chain;
  logic [ROWS-1:0][2:0] prod;
  logic signed [tree_w(ROWS)-1:0] tree;

  assign w_chain[0] = w_in;

  for (genvar r = 0; r < ROWS; r++) begin : g_row
    mac_cell u_cell (
      .clk, .rst_n, .shift_en, .load_mode, .s,
      .w_in  (w_chain[r]),
      .w_out (w_chain[r+1]),
      .a_bit (a_bits[r]),
      .prod  (prod[r])
    );
  end

  adder_tree #(.ROWS(ROWS)) u_tree (.prod, .sum(tree));

  bs_accumulator #(.ROWS(ROWS)) u_acc (
    .clk, .rst_n, .a_valid, .a_first, .a_last, .act_signed,
    .tree, .res, .res_valid
  );

endmodule
