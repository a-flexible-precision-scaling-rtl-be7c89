// bs_accumulator: bit-serial shift-accumulator of one column (Eq. (1)).
//
// Activations arrive one bit-plane per cycle, least significant bit first.
// For bit t the column adder-tree result is weighted by 2^t and added. When
// the bit is the sign bit of a signed activation (SF = 1) the tree result is
// negated first (bitwise inverted plus one), since the sign bit of an N-bit
// two's-complement number weighs -2^(N-1). a_first marks bit 0, which
// restarts the sum; a_last marks bit N-1. The paper describes the
// accumulation and the negation; the bit counter, the clear-on-first rule and
// the result register are this design's choices.
//
// Timing: one bit-plane per cycle while a_valid is high. The completed sum
// appears in res, with res_valid high for one cycle, the cycle after the
// a_last bit. res holds its value until the next word completes.
module bs_accumulator
  import fpsa_pkg::*;
#(
  parameter int unsigned ROWS = ROWS_DEF
) (
  input  logic                             clk,
  input  logic                             rst_n,
  input  logic                             a_valid,  // a bit-plane is present
  input  logic                             a_first,  // bit 0 (LSB)
  input  logic                             a_last,   // bit N-1 (sign bit)
  input  logic                             act_signed, // activations signed
  input  logic signed [tree_w(ROWS)-1:0]   tree,     // adder-tree result
  output logic signed [acc_w(ROWS)-1:0]    res,      // accumulated column sum
  output logic                             res_valid
);

  localparam int unsigned AW = acc_w(ROWS);

  logic [2:0]           t_q;      // bit index of the next plane
  logic [2:0]           t_cur;
  logic signed [AW-1:0] acc_q, term, acc_nxt;
  logic                 sf;

  always_comb begin
    t_cur   = a_first ? 3'd0 : t_q;
    sf      = act_signed & a_last;
    term    = AW'(tree);                          // sign-extend
    if (sf) term = ~term + AW'(1);                // invert and add one
    term    = term <<< t_cur;
    acc_nxt = a_first ? term : acc_q + term;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      t_q       <= '0;
      acc_q     <= '0;
      res       <= '0;
      res_valid <= 1'b0;
    end else begin
      res_valid <= 1'b0;
      if (a_valid) begin
        t_q   <= t_cur + 3'd1;
        acc_q <= acc_nxt;
        if (a_last) begin
          res       <= acc_nxt;
          res_valid <= 1'b1;
        end
      end
    end
  end

endmodule
