// log_thread: one compute thread of a NeuroMAX PE, a log-domain multiplier.
//
// The weight code w_code[5:0] and the activation code a_code are added into a
// 7-bit exponent S (both are log base sqrt(2), so S[0] is the one fractional bit
// and S[6:1] the integer part). S[0] picks 2^FRAC from a two-entry table
// (15'h7FFF or 15'h5A82), the entry is shifted right by the bit-inverted integer
// part ~S[6:1], and w_code[6], the weight's sign, selects the shifted value or
// its negation (0 - value). This is the datapath of the paper's thread diagram:
// RTL_ADD, RTL_MUX, RTL_INV, RTL_RSHIFT, RTL_SUB, RTL_MUX, and the equation
// w*a = sign(w) * (LUT(FRAC(g)) >> ~INT(g)).
//
// Own choice: the diagram does not print which table entry goes with which value
// of S[0]. Here S[0]=1 selects 15'h7FFF and S[0]=0 selects 15'h5A82, the only
// assignment under which the product grows monotonically with S: the product is
// about 2^((S-97)/2), and it is exactly 0 for S <= 97, so activation code 0 acts
// as zero for every weight.
//
// Interface: purely combinational, no clock. 7-bit weight code, 6-bit activation
// code in, 16-bit two's-complement product out.
module log_thread
  import neuromax_pkg::*;
(
  input  logic [W_BITS-1:0]   w_code,
  input  logic [A_BITS-1:0]   a_code,
  output logic signed [P_W-1:0] p
);

  logic [6:0]  s;          // S[6:0]
  logic [5:0]  s_int;      // S_Int[6:1]
  logic        s_frac;     // S_Frac[0]
  logic [14:0] mem;        // mem[14:0]
  logic [14:0] shifted;

  always_comb begin
    s       = {1'b0, w_code[5:0]} + {1'b0, a_code};
    s_int   = s[6:1];
    s_frac  = s[0];
    mem     = s_frac ? LUT_FRAC1 : LUT_FRAC0;
    shifted = mem >> (~s_int);
    p       = w_code[6] ? P_W'(16'd0 - {1'b0, shifted}) : P_W'({1'b0, shifted});
  end

endmodule
