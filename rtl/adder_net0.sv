// adder_net0: the fixed adder network behind one 6x3 PE matrix.
//
// For every PE row r it adds the products of the same thread across the three PE
// columns: o(3r+t+1) = p[r][0][t] + p[r][1][t] + p[r][2][t]. With the paper's
// numbering this is Row0: o1 = p11+p14+p17, o2 = p12+p15+p18, o3 = p13+p16+p19,
// and so on down to Row5: o18 = p63+p66+p69. The network never changes with the
// convolution type (paper). Here o[k] is zero-based: o[0] is the paper's o1.
//
// Combinational; 16-bit products in, 18-bit psums out (3 terms cannot overflow).
module adder_net0
  import neuromax_pkg::*;
(
  input  logic signed [P_W-1:0] p [PE_ROWS][PE_COLS][THREADS],
  output logic signed [O_W-1:0] o [N_PSUMS]
);

  always_comb begin
    for (int r = 0; r < PE_ROWS; r++) begin
      for (int t = 0; t < THREADS; t++) begin
        o[r*THREADS + t] = O_W'(p[r][0][t]) + O_W'(p[r][1][t]) + O_W'(p[r][2][t]);
      end
    end
  end

endmodule
