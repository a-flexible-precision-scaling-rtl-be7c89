// pe_group: one group of four columns (Fig. 2, Fig. 4).
//
// The serial activation bits of all rows and their control flags enter
// through one register stage and are shared by the group's four columns;
// the registered copy is also passed on to the next group. This is the
// systolic activation dataflow of the paper: group g sees a bit-plane g+1
// cycles after it leaves the serializer. Each column accumulates its own
// result, and the group's Shifter&Adder combines the four column results
// according to the precision. Column 0's raw result is also brought out for
// the independent shift-add path used at 6/7-bit weights.
//
// Timing: a word whose last bit enters at cycle T gives column results
// (c0_valid) at T+2 and group results (out_valid) at T+3.
module pe_group
  import fpsa_pkg::*;
#(
  parameter int unsigned ROWS = ROWS_DEF
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // weight preload
  input  logic                          w_shift_en,
  input  col_cfg_t [GCOLS-1:0]          col_cfg,
  input  logic [GCOLS-1:0][2:0]         w_in,
  // configuration
  input  sa_cfg_t                       sa_cfg,
  input  logic                          act_signed,
  // systolic activation input from the previous group or the serializer
  input  logic [ROWS-1:0]               a_in,
  input  logic                          a_valid_in,
  input  logic                          a_first_in,
  input  logic                          a_last_in,
  // systolic activation output to the next group
  output logic [ROWS-1:0]               a_out,
  output logic                          a_valid_out,
  output logic                          a_first_out,
  output logic                          a_last_out,
  // results
  output logic signed [acc_w(ROWS)-1:0] c0_res,
  output logic                          c0_valid,
  output logic signed [out_w(ROWS)-1:0] o [GCOLS],
  output logic                          out_valid
);

  logic [ROWS-1:0] a_q;
  logic            v_q, f_q, l_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      a_q <= '0;
      v_q <= 1'b0;
      f_q <= 1'b0;
      l_q <= 1'b0;
    end else begin
      a_q <= a_in;
      v_q <= a_valid_in;
      f_q <= a_first_in;
      l_q <= a_last_in;
    end
  end

  assign a_out       = a_q;
  assign a_valid_out = v_q;
  assign a_first_out = f_q;
  assign a_last_out  = l_q;

  logic signed [acc_w(ROWS)-1:0] res [GCOLS];
  logic [GCOLS-1:0]              res_valid;

  for (genvar c = 0; c < GCOLS; c++) begin : g_col
    pe_column #(.ROWS(ROWS)) u_col (
      .clk, .rst_n,
      .shift_en  (w_shift_en),
      .load_mode (col_cfg[c].mode3),
      .s         (col_cfg[c].s),
      .w_in      (w_in[c]),
      .a_bits    (a_q),
      .a_valid   (v_q),
      .a_first   (f_q),
      .a_last    (l_q),
      .act_signed,
      .res       (res[c]),
      .res_valid (res_valid[c])
    );
  end

  assign c0_res   = res[0];
  assign c0_valid = res_valid[0];

  shift_adder #(.ROWS(ROWS)) u_sa (
    .clk, .rst_n,
    .cfg       (sa_cfg),
    .r         (res),
    .in_valid  (res_valid[0]),
    .o,
    .out_valid
  );

endmodule
