// adder_net1: the configurable first adder stage behind PE matrix M.
//
// Its input connections follow the convolution type (paper, adder net 1
// figures). Zero-based psum names: o[k] is the paper's o(k+1).
//  3x3 stride 1: lane0 = o1+o5+o9, lane1 = o4+o8+o12, lane2 = o7+o11+o15,
//                lane3 = o10+o14+o18 (output rows 0..3 of the sector);
//                lane4 = SR(o13+o17) + o3 and lane5 = SR(o16) + o2+o6, the two
//                boundary rows that span the previous and the current sector.
//  3x3 stride 2: lane0 = o1+o5+o9, lane2 = o7+o11+o15, lane4 = SR(o13+o17) + o3
//                (boundary row), lane5 = o13+o17 directly (bottom row when the
//                sector is the last one and the row below is padding);
//                lanes 1 and 3 are unused (0).
//  1x1:          the adders take psum k of matrix M's position from all six
//                matrices: lane 2k+h = o(3M+k+1) of matrices 3h, 3h+1, 3h+2,
//                so the channel accumulator adds lane pairs into filter k.
// The two boundary shift registers (var_len_sr) shift on every valid step of a
// 3x3 layer, with length sr_len = output width (tile steps per sector), or output
// width x channel groups when the core sums over channels.
//
// Interface: combinational lanes from o_all, registers only in the shift
// registers. Which lanes are meaningful in a given step is known to the state
// controller, which masks the writes.
//
// Lint note: the shift registers' assertion samples rst_n on the clock edge while the registers
// use it as an asynchronous reset, so a linter reports rst_n as used both
// ways; that use is only in the check and changes no logic.
module adder_net1
  import neuromax_pkg::*;
#(
  parameter int unsigned M = 0
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  conv_mode_e             mode,
  input  logic                   valid,
  input  logic                   sr_clr,
  input  logic [SR_LW-1:0]       sr_len,
  input  logic signed [O_W-1:0]  o_all [N_MATRICES][N_PSUMS],
  output logic signed [S_W-1:0]  lane [N_LANES]
);

  logic signed [O_W-1:0] o [N_PSUMS];
  logic signed [O_W:0]   sr1_in, sr2_in, sr1_out, sr2_out;
  logic                  is3x3;

  assign o      = o_all[M];
  assign is3x3  = (mode == MODE_3X3_S1) || (mode == MODE_3X3_S2);
  assign sr1_in = (O_W+1)'(o[12]) + (O_W+1)'(o[16]);   // o13 + o17
  assign sr2_in = (O_W+1)'(o[15]);                     // o16

  var_len_sr #(.WIDTH(O_W + 1)) u_sr1 (
    .clk (clk), .rst_n (rst_n), .clr (sr_clr), .shift (valid && is3x3),
    .len (sr_len), .din (sr1_in), .dout (sr1_out)
  );

  var_len_sr #(.WIDTH(O_W + 1)) u_sr2 (
    .clk (clk), .rst_n (rst_n), .clr (sr_clr), .shift (valid && mode == MODE_3X3_S1),
    .len (sr_len), .din (sr2_in), .dout (sr2_out)
  );

  function automatic logic signed [S_W-1:0] sx(input logic signed [O_W:0] v);
    return S_W'(v);
  endfunction

  always_comb begin
    for (int l = 0; l < N_LANES; l++) lane[l] = '0;
    unique case (mode)
      MODE_3X3_S1: begin
        lane[0] = S_W'(o[0])  + S_W'(o[4])  + S_W'(o[8]);
        lane[1] = S_W'(o[3])  + S_W'(o[7])  + S_W'(o[11]);
        lane[2] = S_W'(o[6])  + S_W'(o[10]) + S_W'(o[14]);
        lane[3] = S_W'(o[9])  + S_W'(o[13]) + S_W'(o[17]);
        lane[4] = sx(sr1_out) + S_W'(o[2]);
        lane[5] = sx(sr2_out) + S_W'(o[1]) + S_W'(o[5]);
      end
      MODE_3X3_S2: begin
        lane[0] = S_W'(o[0])  + S_W'(o[4])  + S_W'(o[8]);
        lane[2] = S_W'(o[6])  + S_W'(o[10]) + S_W'(o[14]);
        lane[4] = sx(sr1_out) + S_W'(o[2]);
        lane[5] = sx(sr1_in);
      end
      MODE_1X1: begin
        for (int k = 0; k < THREADS; k++) begin
          for (int h = 0; h < 2; h++) begin
            lane[2*k + h] = S_W'(o_all[3*h][3*M + k]) + S_W'(o_all[3*h + 1][3*M + k])
                          + S_W'(o_all[3*h + 2][3*M + k]);
          end
        end
      end
      default: ;
    endcase
  end

endmodule
