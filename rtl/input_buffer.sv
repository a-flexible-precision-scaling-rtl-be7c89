// input_buffer: on-chip input SRAM, modelled as a synchronous array.
//
// It stores activations: one word holds the 8-bit activations of all 64 rows for one input vector. Width 512 bits by 1024 words is 64 KB. The paper gives
// only the total on-chip buffer size (144 KB); the split into 64 KB of
// weight buffer, 64 KB of input buffer and 16 KB of output buffer, the word
// width and the one-read one-write port arrangement are this design's
// choices. The array is written as plain SystemVerilog so that synthesis
// may map it onto an SRAM macro.
//
// Timing: a write happens at the clock edge with we high; a read returns
// rdata the cycle after re (registered output). Reading and writing the
// same address in one cycle returns the old data.
module input_buffer #(
  parameter int unsigned W     = 512,
  parameter int unsigned DEPTH = 1024
) (
  input  logic                     clk,
  input  logic                     we,
  input  logic [$clog2(DEPTH)-1:0] waddr,
  input  logic [W-1:0]             wdata,
  input  logic                     re,
  input  logic [$clog2(DEPTH)-1:0] raddr,
  output logic [W-1:0]             rdata
);

  logic [W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) rdata <= mem[raddr];
  end

endmodule
