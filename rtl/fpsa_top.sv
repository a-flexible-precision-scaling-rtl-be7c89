// fpsa_top: the precision-scalable bit-serial DNN accelerator (Fig. 2).
//
// A weight buffer, an input buffer and an output buffer surround a 64x64
// PE array of 16 groups. A controller preloads weights, decomposed into
// 2-bit and 3-bit slices for the selected precision, into the array from
// top to bottom, then streams input words through the serializer into the
// array one bit-plane per cycle, LSB first; results from each group's
// Shifter&Adder and from the independent shift-add paths are written to the
// output buffer. The off-chip memory of Fig. 2 is outside this design; its
// traffic uses the host ports below (write the weight and input buffers,
// read the output buffer).
//
// Word formats: a weight-buffer word holds weight slot k in bits
// [8k+7:8k] for one array row (see weight_decomposer for slot numbering);
// an input-buffer word holds the activation of row r in bits [8r+7:8r];
// an output-buffer entry holds slot k's 32-bit sign-extended result.
// Only the low w_prec / a_prec bits of each byte are used.
//
// Timing: one input word every a_prec cycles once streaming. For a command
// of n_vec words with load_w set, done is high ROWS + a_prec*n_vec +
// GROUPS + 7 cycles after the cycle in which start was sampled (ROWS fewer
// without load_w). The configuration inputs must stay stable during a
// command, and start is only taken while busy is low.
module fpsa_top
  import fpsa_pkg::*;
#(
  parameter int unsigned ROWS     = ROWS_DEF,
  parameter int unsigned GROUPS   = GROUPS_DEF,
  parameter int unsigned WB_DEPTH = 1024,
  parameter int unsigned IB_DEPTH = 1024,
  parameter int unsigned OB_DEPTH = 64
) (
  input  logic                                   clk,
  input  logic                                   rst_n,
  // configuration
  input  logic [3:0]                             w_prec,
  input  logic [3:0]                             a_prec,
  input  logic                                   w_signed,
  input  logic                                   act_signed,
  // command
  input  logic                                   start,
  input  logic                                   load_w,
  input  logic [$clog2(WB_DEPTH)-1:0]            w_base,
  input  logic [$clog2(IB_DEPTH)-1:0]            in_base,
  input  logic [$clog2(IB_DEPTH):0]              n_vec,
  input  logic [$clog2(OB_DEPTH)-1:0]            out_base,
  output logic                                   busy,
  output logic                                   done,
  // host (off-chip memory side) ports
  input  logic                                   wb_we,
  input  logic [$clog2(WB_DEPTH)-1:0]            wb_waddr,
  input  logic [GROUPS*GCOLS*MAX_BITS-1:0]       wb_wdata,
  input  logic                                   ib_we,
  input  logic [$clog2(IB_DEPTH)-1:0]            ib_waddr,
  input  logic [ROWS*MAX_BITS-1:0]               ib_wdata,
  input  logic                                   ob_re,
  input  logic [$clog2(OB_DEPTH)-1:0]            ob_raddr,
  output logic [GROUPS*GCOLS-1:0][SLOT_W-1:0]    ob_rdata
);

  localparam int unsigned COLS = GROUPS * GCOLS;
  localparam int unsigned OW   = out_w(ROWS);

  logic                               wb_re, ib_re, w_shift_en, ser_load;
  logic [$clog2(WB_DEPTH)-1:0]        wb_raddr;
  logic [$clog2(IB_DEPTH)-1:0]        ib_raddr;
  logic [COLS*MAX_BITS-1:0]           wb_rdata;
  logic [ROWS*MAX_BITS-1:0]           ib_rdata;
  logic [COLS-1:0][2:0]               w_cols;
  logic [ROWS-1:0]                    a_bits;
  logic                               a_valid, a_first, a_last;
  logic [COLS-1:0]                    slot_valid;
  logic signed [OW-1:0]               slot_data [COLS];
  logic [COLS-1:0]                    ob_we;
  logic [COLS-1:0][$clog2(OB_DEPTH)-1:0] ob_waddr;
  logic [COLS-1:0][SLOT_W-1:0]        ob_wdata;

  weight_buffer #(.W(COLS*MAX_BITS), .DEPTH(WB_DEPTH)) u_wbuf (
    .clk, .we(wb_we), .waddr(wb_waddr), .wdata(wb_wdata),
    .re(wb_re), .raddr(wb_raddr), .rdata(wb_rdata)
  );

  input_buffer #(.W(ROWS*MAX_BITS), .DEPTH(IB_DEPTH)) u_ibuf (
    .clk, .we(ib_we), .waddr(ib_waddr), .wdata(ib_wdata),
    .re(ib_re), .raddr(ib_raddr), .rdata(ib_rdata)
  );

  controller #(
    .ROWS(ROWS), .SLOTS(COLS), .GROUPS(GROUPS),
    .WB_DEPTH(WB_DEPTH), .IB_DEPTH(IB_DEPTH), .OB_DEPTH(OB_DEPTH)
  ) u_ctrl (
    .clk, .rst_n, .start, .load_w, .w_base, .in_base, .n_vec, .out_base,
    .a_prec, .busy, .done, .wb_re, .wb_raddr, .w_shift_en,
    .ib_re, .ib_raddr, .ser_load, .slot_valid, .ob_we, .ob_waddr
  );

  weight_decomposer #(.GROUPS(GROUPS)) u_dcp (
    .w_prec, .w_raw(wb_rdata), .w_cols
  );

  act_serializer #(.ROWS(ROWS)) u_ser (
    .clk, .rst_n, .a_prec, .load(ser_load), .word(ib_rdata),
    .bits(a_bits), .valid(a_valid), .first(a_first), .last(a_last)
  );

  pe_array #(.ROWS(ROWS), .GROUPS(GROUPS)) u_array (
    .clk, .rst_n, .w_prec, .w_signed, .act_signed,
    .w_shift_en, .w_cols, .a_bits, .a_valid, .a_first, .a_last,
    .slot_valid, .slot_data
  );

  always_comb
    for (int s = 0; s < int'(COLS); s++) ob_wdata[s] = SLOT_W'(slot_data[s]);

  output_buffer #(.SLOTS(COLS), .W(SLOT_W), .DEPTH(OB_DEPTH)) u_obuf (
    .clk, .we(ob_we), .waddr(ob_waddr), .wdata(ob_wdata),
    .re(ob_re), .raddr(ob_raddr), .rdata(ob_rdata)
  );

endmodule
