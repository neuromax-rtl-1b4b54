// input_sram: input feature-map buffer of one PE matrix.
//
// A word is one 6x3 tile of 6-bit log codes (108 bits, as in the paper):
// element (row r, column c) at bits [(3r+c)*6 +: 6]. In 3x3 layers a word holds
// rows 6s..6s+5 and columns 3k..3k+2 of one channel; in 1x1 layers it holds one
// row of six pixels times three channels (element (pixel p, channel c) at the
// same position as (row p, column c)).
// Two synchronous read ports let the state controller fetch two neighbouring
// words per cycle, from which it cuts the row-shifted tile; one write port is
// loaded by the host / DMA. The two read ports are this design's choice (the
// FPGA block RAMs are dual-ported); the paper gives only the word format.
//
// Timing: read data one clock after re_ with the address registered.
module input_sram
  import neuromax_pkg::*;
#(
  parameter int unsigned DEPTH = IN_DEPTH,
  parameter int unsigned AW    = $clog2(DEPTH)
) (
  input  logic                 clk,
  input  logic                 we,
  input  logic [AW-1:0]        waddr,
  input  logic [IN_WORD_W-1:0] wdata,
  input  logic                 re_a,
  input  logic [AW-1:0]        raddr_a,
  output logic [IN_WORD_W-1:0] rdata_a,
  input  logic                 re_b,
  input  logic [AW-1:0]        raddr_b,
  output logic [IN_WORD_W-1:0] rdata_b
);

  logic [IN_WORD_W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we)   mem[waddr] <= wdata;
    if (re_a) rdata_a <= mem[raddr_a];
    if (re_b) rdata_b <= mem[raddr_b];
  end

endmodule
