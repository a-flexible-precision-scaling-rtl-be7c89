// prec_config: decodes the weight precision into the array configuration.
//
// Weights of 2 to 8 bits are split into slices: 2-bit slices loaded in
// 2-bit mode and, for odd precisions, one 3-bit top slice loaded in 3-bit
// mode (Table I: 8 = 2-2-2-2, 7 = 3-2-2, 6 = 2-2-2, 5 = 3-2, 4 = 2-2,
// 3 = 3, 2 = 2). Column 0 of a group holds the most significant slice.
// Only the top slice of a weight is signed: a 2-bit top slice gets S =
// w_signed, every lower slice S = 0; a 3-bit slice ignores S. The shifter
// settings are Table I:
//   Shifter #0: 2 bits for 8, 5, 4; 0 for 7, 6, 3, 2
//   Shifter #1: 2 bits for 8..4;   0 for 3, 2
//   Shifter #2: 4 bits for 8..6;   0 for 5..2
// For 6 and 7 bits column 0 of every group leaves the group adder and, for
// groups 0..3*NPATH-1, feeds an independent shift-add path that joins three
// consecutive groups (Fig. 4); the first group of the three holds the top
// slice. Column 0 of any remaining group is idle. Unsigned weights are only
// supported at even precisions (this design's choice: an odd-width top slice
// is always taken as signed, as the paper's 3-bit mode does). An
// out-of-range precision is treated as 8 bits. Purely combinational.
module prec_config
  import fpsa_pkg::*;
#(
  parameter int unsigned GROUPS = GROUPS_DEF
) (
  input  logic [3:0]             w_prec,    // weight precision, 2..8
  input  logic                   w_signed,  // weights are two's complement
  output col_cfg_t [GROUPS*GCOLS-1:0] col_cfg,
  output sa_cfg_t                sa_cfg,
  output logic                   path_en    // independent paths in use
);

  localparam int unsigned NPATH = GROUPS / 3;

  logic [3:0] m;

  always_comb begin
    m = (w_prec < 4'd2 || w_prec > 4'd8) ? 4'd8 : w_prec;

    // Table I shifter settings
    sa_cfg.sh0 = (m == 4'd8) || (m == 4'd5) || (m == 4'd4);
    sa_cfg.sh1 = (m >= 4'd4);
    sa_cfg.sh2 = (m >= 4'd6);
    sa_cfg.c0_path = (m == 4'd6) || (m == 4'd7);
    if (m <= 4'd3)      sa_cfg.out_mode = OUT_COL4;
    else if (m <= 4'd5) sa_cfg.out_mode = OUT_PAIR;
    else                sa_cfg.out_mode = OUT_ONE;
    path_en = sa_cfg.c0_path;

    for (int g = 0; g < int'(GROUPS); g++) begin
      for (int c = 0; c < int'(GCOLS); c++) begin
        logic top;
        // which column of the weight holds its top slice
        unique case (m)
          4'd2, 4'd3: top = 1'b1;
          4'd4, 4'd5: top = (c % 2 == 0);
          4'd6, 4'd7: top = (c == 0) ? (g % 3 == 0 && g < int'(3*NPATH)) : (c == 1);
          default:    top = (c == 0);
        endcase
        col_cfg[g*GCOLS+c].mode3 = top & m[0];
        col_cfg[g*GCOLS+c].s     = top & ~m[0] & w_signed;
      end
    end
  end

endmodule
