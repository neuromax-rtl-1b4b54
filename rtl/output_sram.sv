// output_sram: output buffer of one PE matrix / adder net 1.
//
// A word holds six 6-bit log codes (36 bits). Two write ports with per-lane
// masks let one step write the rows it finishes in the current sector (port a)
// and the boundary rows it finishes in the previous sector (port b) in the same
// clock; the controller never sets the same lane of the same word on both. One
// synchronous read port returns results to the host / DMA. Word format and ports
// are this design's choice; the paper gives only that results are stored as log
// values in output SRAMs.
//
// Timing: writes on the clock edge; read data one clock after re.
module output_sram
  import neuromax_pkg::*;
#(
  parameter int unsigned DEPTH = OUT_DEPTH,
  parameter int unsigned AW    = $clog2(DEPTH)
) (
  input  logic                  clk,
  input  logic [N_LANES-1:0]    we_a,
  input  logic [AW-1:0]         waddr_a,
  input  logic [OUT_WORD_W-1:0] wdata_a,
  input  logic [N_LANES-1:0]    we_b,
  input  logic [AW-1:0]         waddr_b,
  input  logic [OUT_WORD_W-1:0] wdata_b,
  input  logic                  re,
  input  logic [AW-1:0]         raddr,
  output logic [OUT_WORD_W-1:0] rdata
);

  logic [OUT_WORD_W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    for (int l = 0; l < N_LANES; l++) begin
      if (we_a[l]) mem[waddr_a][l*A_BITS +: A_BITS] <= wdata_a[l*A_BITS +: A_BITS];
      if (we_b[l]) mem[waddr_b][l*A_BITS +: A_BITS] <= wdata_b[l*A_BITS +: A_BITS];
    end
    if (re) rdata <= mem[raddr];
  end

  a_no_clash: assert property (@(posedge clk)
                               (|(we_a & we_b)) |-> (waddr_a != waddr_b));

endmodule
