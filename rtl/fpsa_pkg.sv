// fpsa_pkg: constants and shared types of the precision-scalable bit-serial
// accelerator.
//
// The array is 64 rows by 64 columns, organised as 16 groups of 4 columns,
// as the paper describes. Weights and activations are 2 to 8 bits wide.
// Every column multiplies a 3-bit weight slice with a 1-bit activation, so
// each product is a 3-bit signed number. The widths below follow from that:
// the adder tree over ROWS products needs clog2(ROWS)+3 bits, the column
// accumulator adds up to 8 activation bit-planes, and a group result holds a
// weight shifted left by up to 6 bits. These derived widths are this
// design's choice; the paper prints only the adder-tree widths of its Fig. 6
// ([7:0], [6:0], [8:0] for 64 rows), which they reproduce.
package fpsa_pkg;

  localparam int unsigned ROWS_DEF   = 64;  // rows of the PE array
  localparam int unsigned GROUPS_DEF = 16;  // groups of 4 columns
  localparam int unsigned GCOLS      = 4;   // columns per group
  localparam int unsigned MAX_BITS   = 8;   // largest weight/activation width
  localparam int unsigned SLOT_W     = 32;  // width of one output-buffer word

  // Width of the lower-2-bit adder tree result (sum of ROWS values 0..3).
  function automatic int unsigned low_w(int unsigned rows);
    return $clog2(3 * rows + 1);
  endfunction

  // Width of the MSB adder tree result (count of ones among ROWS bits).
  function automatic int unsigned msb_w(int unsigned rows);
    return $clog2(rows + 1);
  endfunction

  // Signed width of one column's adder-tree result (range -4*rows..3*rows).
  function automatic int unsigned tree_w(int unsigned rows);
    return $clog2(rows) + 3;
  endfunction

  // Signed width of one column accumulator (tree result times 2^0..2^7).
  function automatic int unsigned acc_w(int unsigned rows);
    return tree_w(rows) + MAX_BITS;
  endfunction

  // Signed width of a combined (up to 8-bit weight) result.
  function automatic int unsigned out_w(int unsigned rows);
    return acc_w(rows) + 6;
  endfunction

  // How a group's Shifter&Adder presents its results.
  typedef enum logic [1:0] {
    OUT_COL4 = 2'd0,   // 2/3-bit weights: four column results
    OUT_PAIR = 2'd1,   // 4/5-bit weights: two pair sums
    OUT_ONE  = 2'd2    // 6/7/8-bit weights: one group sum
  } out_mode_e;

  // Per-column weight loading configuration (Fig. 3).
  typedef struct packed {
    logic mode3;   // 1: 3-bit mode (REG[2] is the product MSB); 0: 2-bit mode
    logic s;       // 2-bit mode: 1 extends REG[1] as a sign bit
  } col_cfg_t;

  // Configuration of the shifters of Table I and of the output routing,
  // shared by every group.
  typedef struct packed {
    logic      sh0;       // Shifter #0: 1 = shift by 2, 0 = by 0
    logic      sh1;       // Shifter #1: 1 = shift by 2, 0 = by 0
    logic      sh2;       // Shifter #2: 1 = shift by 4, 0 = by 0
    logic      c0_path;   // 6/7-bit: column 0 goes to the independent path
    out_mode_e out_mode;
  } sa_cfg_t;

endpackage
