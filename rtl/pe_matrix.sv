// pe_matrix: one 6x3 PE matrix of NeuroMAX with its adder net 0.
//
// Each PE (r, c) gets the activation tile[r][c] and the weight column w[c][0..2];
// the weight array is broadcast, so all PEs of a column share the same three
// weights (the paper's 2D weight broadcast dataflow). With a 3x3 filter column c
// of the filter goes to PE column c, thread t holds filter row t; with 1x1
// convolutions PE column c is an input channel and thread t a filter.
// The 18 psums of adder net 0 are registered once (en = in_valid); this pipeline
// register is this design's choice, the paper gives no timing.
//
// Interface: tile and weights in the cycle in_valid is high, psums o[0..17]
// (paper's o1..o18) one clock later.
module pe_matrix
  import neuromax_pkg::*;
(
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  input  logic [A_BITS-1:0]       tile [PE_ROWS][PE_COLS],
  input  logic [THREADS-1:0][W_BITS-1:0] w [PE_COLS],
  output logic signed [O_W-1:0]   o [N_PSUMS]
);

  logic signed [P_W-1:0] p [PE_ROWS][PE_COLS][THREADS];
  logic signed [O_W-1:0] o_comb [N_PSUMS];

  for (genvar r = 0; r < PE_ROWS; r++) begin : g_row
    for (genvar c = 0; c < PE_COLS; c++) begin : g_col
      log_pe u_pe (
        .a_code  (tile[r][c]),
        .w_codes (w[c]),
        .p       (p[r][c])
      );
    end
  end

  adder_net0 u_an0 (.p(p), .o(o_comb));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < N_PSUMS; k++) o[k] <= '0;
    end else if (in_valid) begin
      for (int k = 0; k < N_PSUMS; k++) o[k] <= o_comb[k];
    end
  end

endmodule
