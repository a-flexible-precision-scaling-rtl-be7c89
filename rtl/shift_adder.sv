// shift_adder: the Shifter&Adder of one group (Fig. 5, Table I).
//
// Four column results r0..r3 (column 0 most significant) are combined:
//   sum01 = (r0 << sh0) + r1,  sum23 = (r2 << sh1) + r3,
//   total = (sum01 << sh2) + sum23,
// with Shifter #0/#1 shifting by 0 or 2 bits and Shifter #2 by 0 or 4 bits,
// the only two settings each has (Table I). The outputs taken depend on the
// precision (Fig. 5): 2/3-bit weights use the four column values (after the
// zero shifts), 4/5-bit weights the two pair sums, 6/7/8-bit weights the
// group total. In 6/7-bit mode column 0 is disabled here (c0_path) because
// it serves the independent shift-add path.
//
// The paper runs this logic on a slower clock clk_SA at 1/N of the array
// clock for N-bit activations. Here it stays in the array clock domain and
// updates only on in_valid, which the column accumulators raise once every
// N cycles; this clock enable gives the same update rate without a second
// clock domain (this design's choice).
//
// Timing: outputs are registered; out_valid pulses the cycle after
// in_valid.
module shift_adder
  import fpsa_pkg::*;
#(
  parameter int unsigned ROWS = ROWS_DEF
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  sa_cfg_t                      cfg,
  input  logic signed [acc_w(ROWS)-1:0] r [GCOLS],   // column results
  input  logic                         in_valid,
  output logic signed [out_w(ROWS)-1:0] o [GCOLS],   // group results
  output logic                         out_valid
);

  localparam int unsigned OW = out_w(ROWS);

  logic signed [OW-1:0] c0, s0, s1, sum01, sum23, s2, total;
  logic signed [OW-1:0] o_nxt [GCOLS];

  always_comb begin
    c0    = cfg.c0_path ? '0 : OW'(r[0]);
    s0    = cfg.sh0 ? (c0 <<< 2) : c0;           // Shifter #0
    sum01 = s0 + OW'(r[1]);
    s1    = cfg.sh1 ? (OW'(r[2]) <<< 2) : OW'(r[2]); // Shifter #1
    sum23 = s1 + OW'(r[3]);
    s2    = cfg.sh2 ? (sum01 <<< 4) : sum01;     // Shifter #2
    total = s2 + sum23;
    for (int i = 0; i < int'(GCOLS); i++) o_nxt[i] = '0;
    unique case (cfg.out_mode)
      OUT_COL4: begin
        o_nxt[0] = s0;
        o_nxt[1] = OW'(r[1]);
        o_nxt[2] = s1;
        o_nxt[3] = OW'(r[3]);
      end
      OUT_PAIR: begin
        o_nxt[0] = sum01;
        o_nxt[1] = sum23;
      end
      default: o_nxt[0] = total;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < int'(GCOLS); i++) o[i] <= '0;
      out_valid <= 1'b0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) o <= o_nxt;
    end
  end

endmodule
