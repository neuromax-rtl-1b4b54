// channel_accum: the channel accumulation stage behind one adder net 1.
//
// Per lane, as in the paper's channel accumulator figure: a pair adder, a
// register, then an adder whose second input is its own output register, i.e. an
// accumulator. The pair adder's second input is lane i+1 for even lanes when
// pair_en is set (1x1 convolutions add the halves of a 18-channel sum) and 0
// otherwise; the paper draws this choice as a 0/1 multiplexer set by the state
// controller. clear makes the accumulator load instead of add, which starts a
// new output; 3x3 layers clear on every step, so the stage is a two-register
// pipeline there.
//
// Timing: in, in_valid, pair_en and clear in cycle T; the accumulated value is on
// acc and out_valid is high in cycle T+2.
module channel_accum
  import neuromax_pkg::*;
(
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   in_valid,
  input  logic                   pair_en,
  input  logic                   clear,
  input  logic signed [S_W-1:0]  in  [N_LANES],
  output logic signed [ACC_W-1:0] acc [N_LANES],
  output logic                   out_valid
);

  logic signed [S_W-1:0] pair [N_LANES];
  logic signed [S_W-1:0] st1  [N_LANES];
  logic                  st1_valid, st1_clear;

  always_comb begin
    for (int l = 0; l < N_LANES; l++) begin
      if (pair_en && (l % 2 == 0)) pair[l] = in[l] + in[l + 1];
      else                         pair[l] = in[l];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st1_valid <= 1'b0;
      st1_clear <= 1'b0;
      out_valid <= 1'b0;
      for (int l = 0; l < N_LANES; l++) begin
        st1[l] <= '0;
        acc[l] <= '0;
      end
    end else begin
      st1_valid <= in_valid;
      out_valid <= st1_valid;
      if (in_valid) begin
        st1_clear <= clear;
        for (int l = 0; l < N_LANES; l++) st1[l] <= pair[l];
      end
      if (st1_valid) begin
        for (int l = 0; l < N_LANES; l++)
          acc[l] <= ACC_W'(st1[l]) + (st1_clear ? ACC_W'(0) : acc[l]);
      end
    end
  end

endmodule
