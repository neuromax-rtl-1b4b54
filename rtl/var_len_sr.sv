// var_len_sr: variable-length shift register for the boundary psums.
//
// In 3x3 convolutions the two bottom output rows of a 6-row input sector also
// need the first rows of the next sector. The paper stores the dependent psums in
// a shift register whose length follows the layer (its maximum is the input
// width) and reads them back when the tile at the same column of the next sector
// is processed. Here the register is a circular buffer of MAX_LEN words: each
// shift returns the word written len shifts earlier on dout and stores din in
// its place. A buffer instead of a chain of registers is this design's choice;
// it behaves the same and maps onto RAM. The default MAX_LEN (2560) is longer
// than an input row because the channel-summed 3x3 mode keeps one entry per
// output column and channel group.
//
// Interface: dout is combinational from the buffer (valid in the cycle of the
// shift); din is stored on the clock edge when shift is high. clr rewinds the
// pointer at the start of a layer; len must be 1..MAX_LEN and stay constant
// while shifting.
//
// Lint note: the assertion samples rst_n on the clock edge while the registers
// use it as an asynchronous reset, so a linter reports rst_n as used both
// ways; that use is only in the check and changes no logic.
module var_len_sr
  import neuromax_pkg::*;
#(
  parameter int unsigned WIDTH   = O_W + 1,
  parameter int unsigned MAX_LEN = SR_MAX_LEN,
  parameter int unsigned LW      = $clog2(MAX_LEN + 1)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             clr,
  input  logic             shift,
  input  logic [LW-1:0]    len,
  input  logic [WIDTH-1:0] din,
  output logic [WIDTH-1:0] dout
);

  localparam int unsigned PW = (MAX_LEN > 1) ? $clog2(MAX_LEN) : 1;

  logic [WIDTH-1:0] mem [MAX_LEN];
  logic [PW-1:0]    ptr;
  logic [LW-1:0]    last;

  assign last = (len == '0) ? '0 : LW'(len - 1'b1);
  assign dout = mem[ptr];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)      ptr <= '0;
    else if (clr)    ptr <= '0;
    else if (shift)  ptr <= (LW'(ptr) >= last) ? '0 : PW'(ptr + 1'b1);
  end

  always_ff @(posedge clk) begin
    if (shift && !clr) mem[ptr] <= din;
  end

  a_len_range: assert property (@(posedge clk)
                                (rst_n && shift) |-> (len >= 1 && 32'(len) <= MAX_LEN));

endmodule
