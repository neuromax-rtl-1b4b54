// post_processing: ReLU and re-quantisation of linear results to log codes.
//
// The paper's post-processing block applies ReLU and maps the linear outputs back
// to log values with a pre-computed log table, so the output SRAMs hold the next
// layer's activation codes. Here, per lane: y <= 0 gives code 0 (the zero code);
// otherwise, with p the position of y's leading one and mant the next 15 bits
// (Q1.15 mantissa), round(log_sqrt2(y)) = 2p + (mant >= 2^0.25) + (mant >= 2^0.75),
// the two thresholds being the table (LOG_T1, LOG_T2). The code is that value plus
// the layer's q_offset, clipped to 1..63, and 0 if it falls below 1. The table
// form and q_offset are this design's choices; the paper gives only the function.
//
// Timing: one register stage; codes and out_valid one clock after in_valid.
module post_processing
  import neuromax_pkg::*;
(
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  input  logic signed [7:0]       q_offset,
  input  logic signed [ACC_W-1:0] y [N_LANES],
  output logic [A_BITS-1:0]       code [N_LANES],
  output logic                    out_valid
);

  function automatic logic [A_BITS-1:0] quantize(input logic signed [ACC_W-1:0] v,
                                                 input logic signed [7:0] q);
    logic [ACC_W-1:0] u;
    logic [15:0]      mant;
    int               p;
    int               k;
    u = ACC_W'(v);
    if (v <= 0) return '0;
    p = 0;
    for (int b = 0; b < ACC_W; b++) if (u[b]) p = b;
    if (p >= 15) mant = 16'(u >> (p - 15));
    else         mant = 16'(u << (15 - p));
    k = 2 * p + int'(mant >= LOG_T1) + int'(mant >= LOG_T2) + int'(q);
    if (k < 1)  return '0;
    if (k > 63) return 6'd63;
    return A_BITS'(k);
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      for (int l = 0; l < N_LANES; l++) code[l] <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid)
        for (int l = 0; l < N_LANES; l++) code[l] <= quantize(y[l], q_offset);
    end
  end

endmodule
