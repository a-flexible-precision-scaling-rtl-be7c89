// pe_array: the ROWS x (4*GROUPS) PE array with its shift-add logic
// (Fig. 2, Fig. 4).
//
// GROUPS groups of four columns are chained systolically: the activation
// bit-planes and their flags pass from group to group through one register
// per group. prec_config turns the weight precision into the column loading
// modes and the shifter settings. GROUPS/3 independent shift-add paths
// (5 for 16 groups) join column 0 of groups 3p, 3p+1, 3p+2 at 6/7-bit
// weights, so only one column of the 64 stays idle.
//
// Results leave on "output slots", numbered like the weight slots of the
// weight_decomposer:
//   2/3-bit weights: slot 4g+c is column c of group g        (64 slots)
//   4/5-bit weights: slot 2g+i is pair i of group g          (32 slots)
//   8-bit weights:   slot g is group g                       (16 slots)
//   6/7-bit weights: slot g is group g, slot GROUPS+p path p (21 slots)
// slot_valid pulses for one cycle when a slot's result for a word is ready.
//
// Timing: group g delivers a word's results g cycles after group 0, path p
// two cycles after group 3p+2 would; one word enters every N cycles for
// N-bit activations, so the array accepts back-to-back words.
module pe_array
  import fpsa_pkg::*;
#(
  parameter int unsigned ROWS   = ROWS_DEF,
  parameter int unsigned GROUPS = GROUPS_DEF
) (
  input  logic                              clk,
  input  logic                              rst_n,
  input  logic [3:0]                        w_prec,
  input  logic                              w_signed,
  input  logic                              act_signed,
  // weight preload: one slice per column, entering row 0
  input  logic                              w_shift_en,
  input  logic [GROUPS*GCOLS-1:0][2:0]      w_cols,
  // serial activations
  input  logic [ROWS-1:0]                   a_bits,
  input  logic                              a_valid,
  input  logic                              a_first,
  input  logic                              a_last,
  // results
  output logic [GROUPS*GCOLS-1:0]           slot_valid,
  output logic signed [out_w(ROWS)-1:0]     slot_data [GROUPS*GCOLS]
);

  localparam int unsigned COLS  = GROUPS * GCOLS;
  localparam int unsigned NPATH = GROUPS / 3;
  localparam int unsigned OW    = out_w(ROWS);

  col_cfg_t [COLS-1:0] col_cfg;
  sa_cfg_t             sa_cfg;
  logic                path_en;

  prec_config #(.GROUPS(GROUPS)) u_cfg (
    .w_prec, .w_signed, .col_cfg, .sa_cfg, .path_en
  );

  logic [GROUPS:0][ROWS-1:0] a_chain;
  logic [GROUPS:0]           v_chain, f_chain, l_chain;

  assign a_chain[0] = a_bits;
  assign v_chain[0] = a_valid;
  assign f_chain[0] = a_first;
  assign l_chain[0] = a_last;

  logic signed [acc_w(ROWS)-1:0] c0_res   [GROUPS];
  logic [GROUPS-1:0]             c0_valid;
  logic signed [OW-1:0]          g_out    [GROUPS][GCOLS];
  logic [GROUPS-1:0]             g_valid;

  for (genvar g = 0; g < GROUPS; g++) begin : g_grp
    pe_group #(.ROWS(ROWS)) u_grp (
      .clk, .rst_n,
      .w_shift_en,
      .col_cfg    (col_cfg[g*GCOLS +: GCOLS]),
      .w_in       (w_cols[g*GCOLS +: GCOLS]),
      .sa_cfg,
      .act_signed,
      .a_in       (a_chain[g]),
      .a_valid_in (v_chain[g]),
      .a_first_in (f_chain[g]),
      .a_last_in  (l_chain[g]),
      .a_out      (a_chain[g+1]),
      .a_valid_out(v_chain[g+1]),
      .a_first_out(f_chain[g+1]),
      .a_last_out (l_chain[g+1]),
      .c0_res     (c0_res[g]),
      .c0_valid   (c0_valid[g]),
      .o          (g_out[g]),
      .out_valid  (g_valid[g])
    );
  end

  logic signed [OW-1:0] p_out   [NPATH];
  logic [NPATH-1:0]     p_valid;

  for (genvar p = 0; p < NPATH; p++) begin : g_path
    sa_path #(.ROWS(ROWS)) u_path (
      .clk, .rst_n,
      .en        (path_en),
      .a0        (c0_res[3*p]),
      .v0        (c0_valid[3*p]),
      .a1        (c0_res[3*p+1]),
      .v1        (c0_valid[3*p+1]),
      .a2        (c0_res[3*p+2]),
      .v2        (c0_valid[3*p+2]),
      .out       (p_out[p]),
      .out_valid (p_valid[p])
    );
  end

  // Output slot routing
  always_comb begin
    slot_valid = '0;
    for (int k = 0; k < int'(COLS); k++) slot_data[k] = '0;
    for (int g = 0; g < int'(GROUPS); g++) begin
      unique case (sa_cfg.out_mode)
        OUT_COL4: for (int c = 0; c < int'(GCOLS); c++) begin
          slot_valid[g*GCOLS+c] = g_valid[g];
          slot_data[g*GCOLS+c]  = g_out[g][c];
        end
        OUT_PAIR: for (int i = 0; i < 2; i++) begin
          slot_valid[g*2+i] = g_valid[g];
          slot_data[g*2+i]  = g_out[g][i];
        end
        default: begin
          slot_valid[g] = g_valid[g];
          slot_data[g]  = g_out[g][0];
        end
      endcase
    end
    if (path_en) begin
      for (int p = 0; p < int'(NPATH); p++) begin
        slot_valid[GROUPS+p] = p_valid[p];
        slot_data[GROUPS+p]  = p_out[p];
      end
    end
  end

endmodule
