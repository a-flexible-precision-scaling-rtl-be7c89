// weight_decomposer: rearranges one row of raw weights into column slices.
//
// The paper states that weights are decomposed into 2-bit and 3-bit slices
// (Table I, Fig. 3(c)) and "need to be rearranged and routed to the
// corresponding columns", without giving the circuit. This block does that
// for one array row. The input holds up to 4*GROUPS raw weights ("weight
// slots"), 8 bits each, of which the low w_prec bits are used. The output is
// the 3-bit value for REG[2:0] of every column. Slice level L (0 = lowest)
// is bits [2L+1:2L] of the weight; the top slice of an odd precision is the
// three bits [2L+2:2L]. Column 0 of a group takes the highest slice. Slot to
// column mapping (the same numbering as the output slots of pe_array):
//   2/3-bit: slot 4g+c -> group g column c
//   4/5-bit: slot 2g+i -> group g columns 2i (top), 2i+1
//   8-bit:   slot g    -> group g columns 0 (top) .. 3
//   6/7-bit: slot g    -> group g columns 1 (top), 2, 3;
//            slot GROUPS+p -> column 0 of groups 3p (top), 3p+1, 3p+2;
//            column 0 of a group beyond 3*(GROUPS/3) gets zero (idle).
// The mapping is this design's choice, consistent with Table I and Fig. 4.
// Purely combinational.
module weight_decomposer
  import fpsa_pkg::*;
#(
  parameter int unsigned GROUPS = GROUPS_DEF
) (
  input  logic [3:0]                         w_prec,
  input  logic [GROUPS*GCOLS-1:0][MAX_BITS-1:0] w_raw,   // weight slots
  output logic [GROUPS*GCOLS-1:0][2:0]       w_cols    // REG[2:0] per column
);

  localparam int unsigned NPATH = GROUPS / 3;

  logic [3:0] m;

  always_comb begin
    m = (w_prec < 4'd2 || w_prec > 4'd8) ? 4'd8 : w_prec;
    for (int g = 0; g < int'(GROUPS); g++) begin
      for (int c = 0; c < int'(GCOLS); c++) begin
        int          slot;
        int          lvl;
        int          nlvl;
        logic        idle;
        logic [MAX_BITS-1:0] sh;
        idle = 1'b0;
        slot = 0;
        lvl  = 0;
        nlvl = 1;
        unique case (m)
          4'd2, 4'd3: begin
            slot = g * 4 + c;
            lvl  = 0;
            nlvl = 1;
          end
          4'd4, 4'd5: begin
            slot = g * 2 + c / 2;
            lvl  = 1 - (c % 2);
            nlvl = 2;
          end
          4'd6, 4'd7: begin
            nlvl = 3;
            if (c != 0) begin
              slot = g;
              lvl  = 3 - c;
            end else if (g < int'(3 * NPATH)) begin
              slot = int'(GROUPS) + g / 3;
              lvl  = 2 - (g % 3);
            end else begin
              idle = 1'b1;
            end
          end
          default: begin
            slot = g;
            lvl  = 3 - c;
            nlvl = 4;
          end
        endcase
        sh = w_raw[slot] >> (2 * lvl);
        if (idle)
          w_cols[g*GCOLS+c] = '0;
        else if (lvl == nlvl - 1 && m[0])
          w_cols[g*GCOLS+c] = sh[2:0];
        else
          w_cols[g*GCOLS+c] = {1'b0, sh[1:0]};
      end
    end
  end

endmodule
