// mac_cell: one processing element of the array (Fig. 3(a),(b) of the paper).
//
// The cell holds a weight slice in three registers REG[2:0]. Weights are
// preloaded from top to bottom: while shift_en is high each register takes
// the value of the same register in the row above (w_in) and passes its own
// value down (w_out). In 2-bit mode REG[2] is not loaded (it is gated, as in
// Fig. 3(b)). A 2:1 multiplexer controlled by load_mode chooses the product
// MSB: REG[2] in 3-bit mode (load_mode=1), or S AND REG[1] in 2-bit mode
// (load_mode=0), which sign-extends a signed 2-bit slice (S=1) or zero-extends
// an unsigned one (S=0). The three weight bits are then ANDed with the serial
// activation bit, giving a 3-bit signed product; the AND gates, the MUX
// input numbering and the AND of S with REG[1] are printed in Fig. 3(a).
//
// Timing: weight registers update on the rising clock edge when shift_en is
// high; the product is combinational in a_bit. Reset clearing the registers
// is this design's choice.
module mac_cell (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       shift_en,   // weight preload strobe
  input  logic       load_mode,  // 1: 3-bit mode, 0: 2-bit mode
  input  logic       s,          // sign-extension enable for 2-bit mode
  input  logic [2:0] w_in,       // weight bits from the row above
  output logic [2:0] w_out,      // weight bits to the row below
  input  logic       a_bit,      // serial activation bit of this row
  output logic [2:0] prod        // 3-bit signed product
);

  logic [2:0] reg_q;
  logic       msb;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      reg_q <= '0;
    end else if (shift_en) begin
      reg_q[1:0] <= w_in[1:0];
      if (load_mode) reg_q[2] <= w_in[2];
    end
  end

  always_comb begin
    msb  = load_mode ? reg_q[2] : (s & reg_q[1]);
    prod = {msb, reg_q[1:0]} & {3{a_bit}};
  end

  assign w_out = reg_q;

endmodule
