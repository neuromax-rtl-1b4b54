// weight_sram: weight buffer of one PE matrix.
//
// A word is one 2D weight array of nine 7-bit log codes (63 bits, as in the
// paper). For 3x3 layers it is one 3x3 filter of one channel, column-major:
// weight (row t, column c) at bits [(3c+t)*7 +: 7] (the paper's
// "wc0-2 wb0-2 wa0-2"). For 1x1 layers it is three channels of three filters,
// filter-major: (filter t, channel c) at bits [(3t+c)*7 +: 7] (the paper's
// "wc2 wb2 wa2 ... wc0 wb0 wa0"). The state controller reorders either form into
// the broadcast array.
//
// Timing: one write port, one synchronous read port, data one clock after re.
module weight_sram
  import neuromax_pkg::*;
#(
  parameter int unsigned DEPTH = WT_DEPTH,
  parameter int unsigned AW    = $clog2(DEPTH)
) (
  input  logic                 clk,
  input  logic                 we,
  input  logic [AW-1:0]        waddr,
  input  logic [WT_WORD_W-1:0] wdata,
  input  logic                 re,
  input  logic [AW-1:0]        raddr,
  output logic [WT_WORD_W-1:0] rdata
);

  logic [WT_WORD_W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) rdata <= mem[raddr];
  end

endmodule
