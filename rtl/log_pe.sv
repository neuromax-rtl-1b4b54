// log_pe: one NeuroMAX processing element, three log threads sharing one input.
//
// The PE receives one activation code and a vector of three weight codes (one
// column of the broadcast 2D weight array) and returns three products, one per
// thread, as in the paper's PE diagram (thread0..thread2 -> p11, p12, p13).
// Combinational; the registers sit after adder net 0 in pe_matrix.
// The PE structure is the paper's; bundling the three weights as a packed
// vector is this design's choice.
module log_pe
  import neuromax_pkg::*;
(
  input  logic [A_BITS-1:0]            a_code,
  input  logic [THREADS-1:0][W_BITS-1:0] w_codes,
  output logic signed [P_W-1:0]        p [THREADS]
);

  for (genvar t = 0; t < THREADS; t++) begin : g_thread
    log_thread u_thread (
      .w_code (w_codes[t]),
      .a_code (a_code),
      .p      (p[t])
    );
  end

endmodule
