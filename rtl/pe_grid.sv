// pe_grid: the NeuroMAX PE grid, six 6x3 PE matrices (108 PEs, 324 threads) and
// their six adder net 0s (paper's top-level figure).
//
// Every matrix has its own tile and weight array (from its own input and weight
// SRAM); all run in lockstep on the same in_valid. Psums appear one clock after
// the tiles, o[m][k] being psum o(k+1) of matrix m.
// The 6x3x6 arrangement is the paper's; the single shared in_valid (all matrices
// in lockstep) is this design's choice.
module pe_grid
  import neuromax_pkg::*;
(
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  input  logic [A_BITS-1:0]       tile [N_MATRICES][PE_ROWS][PE_COLS],
  input  logic [THREADS-1:0][W_BITS-1:0] w [N_MATRICES][PE_COLS],
  output logic signed [O_W-1:0]   o [N_MATRICES][N_PSUMS]
);

  for (genvar m = 0; m < N_MATRICES; m++) begin : g_mat
    pe_matrix u_mat (
      .clk      (clk),
      .rst_n    (rst_n),
      .in_valid (in_valid),
      .tile     (tile[m]),
      .w        (w[m]),
      .o        (o[m])
    );
  end

endmodule
