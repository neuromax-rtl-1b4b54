// conv_core: the NeuroMAX CONV core, top level of this design.
//
// The core computes one convolution layer on log-quantised data: six PE matrices
// of 6x3 log PEs with three threads each (324 log multipliers), fed with tiles by
// the state controller, followed by six adder net 1s, six channel accumulators
// and six post-processing units that write log codes to the output SRAMs.
// Every matrix has its own input, weight and output SRAM (paper, top level).
//
// Pipeline (one tile step per clock, clocks counted from the issue cycle I):
//   I     state controller presents SRAM read addresses
//   I+1   SRAM data; I+2 tiles and broadcast weights registered
//   I+3   adder net 0 psums registered (pe_matrix); adder net 1 combinational,
//         boundary shift registers shift
//   I+4   channel accumulator first register; I+5 accumulator register
//   I+6   post-processing register; output SRAM write on that clock edge
// The ctl struct of each step travels down a shift of registers next to the data.
//
// Channel sum (params.ch_sum in a 3x3 mode): the lanes of all six adder net 1s
// are added and fed to matrix 0's channel accumulator, which accumulates the
// channel groups; only matrix 0's output SRAM is written. Without ch_sum each
// matrix convolves its own channel (depthwise). The paper says each matrix
// processes its own channel for standard convolution but not where the sum over
// channels is formed: this adder and the loop order are this design's own.
//
// Host side: the paper loads SRAMs through an AXI DMA and sends layer parameters
// over an AXI4 interconnect from the ARM core; neither is part of this RTL, so
// the core exposes plain SRAM write ports (input, weight), an output SRAM read
// port and a parameter/start/done port in their place.
// Output words: 3x3 stride 1: lanes 0..5 = output rows 6s..6s+5 of column x;
// 3x3 stride 2: lanes 0..2 = output rows 3s..3s+2 of column x; 1x1: lanes 0..2 =
// filters 3fg..3fg+2 of one pixel. The word addresses are given in
// state_controller.
//
// Lint note: the assertion samples rst_n on the clock edge while the registers
// use it as an asynchronous reset, so a linter reports rst_n as used both
// ways; that use is only in the check and changes no logic.
module conv_core
  import neuromax_pkg::*;
(
  input  logic                  clk,
  input  logic                  rst_n,
  // layer parameters and control
  input  layer_params_t         params,
  input  logic                  start,
  output logic                  busy,
  output logic                  done,
  // input SRAM load
  input  logic                  in_we,
  input  logic [2:0]            in_wsel,
  input  logic [IN_AW-1:0]      in_waddr,
  input  logic [IN_WORD_W-1:0]  in_wdata,
  // weight SRAM load
  input  logic                  wt_we,
  input  logic [2:0]            wt_wsel,
  input  logic [WT_AW-1:0]      wt_waddr,
  input  logic [WT_WORD_W-1:0]  wt_wdata,
  // output SRAM read-back
  input  logic                  out_re,
  input  logic [2:0]            out_rsel,
  input  logic [OUT_AW-1:0]     out_raddr,
  output logic [OUT_WORD_W-1:0] out_rdata
);

  // ---------------- memories ----------------
  logic                 in_re, wt_re;
  logic [IN_AW-1:0]     in_raddr_a, in_raddr_b;
  logic [WT_AW-1:0]     wt_raddr;
  logic [IN_WORD_W-1:0] in_rdata_a [N_MATRICES];
  logic [IN_WORD_W-1:0] in_rdata_b [N_MATRICES];
  logic [WT_WORD_W-1:0] wt_rdata   [N_MATRICES];
  logic [OUT_WORD_W-1:0] out_rd    [N_MATRICES];
  logic [2:0]           out_rsel_q;

  logic [N_LANES-1:0]    we_a [N_MATRICES];
  logic [N_LANES-1:0]    we_b [N_MATRICES];
  logic [OUT_WORD_W-1:0] wd_a [N_MATRICES];
  logic [OUT_WORD_W-1:0] wd_b [N_MATRICES];
  step_ctl_t             ctl4;

  for (genvar m = 0; m < N_MATRICES; m++) begin : g_mem
    input_sram u_in (
      .clk (clk),
      .we (in_we && in_wsel == 3'(m)), .waddr (in_waddr), .wdata (in_wdata),
      .re_a (in_re), .raddr_a (in_raddr_a), .rdata_a (in_rdata_a[m]),
      .re_b (in_re), .raddr_b (in_raddr_b), .rdata_b (in_rdata_b[m])
    );
    weight_sram u_wt (
      .clk (clk),
      .we (wt_we && wt_wsel == 3'(m)), .waddr (wt_waddr), .wdata (wt_wdata),
      .re (wt_re), .raddr (wt_raddr), .rdata (wt_rdata[m])
    );
    output_sram u_out (
      .clk (clk),
      .we_a (we_a[m]), .waddr_a (ctl4.addr_a), .wdata_a (wd_a[m]),
      .we_b (we_b[m]), .waddr_b (ctl4.addr_b), .wdata_b (wd_b[m]),
      .re (out_re && out_rsel == 3'(m)), .raddr (out_raddr), .rdata (out_rd[m])
    );
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)      out_rsel_q <= '0;
    else if (out_re) out_rsel_q <= out_rsel;
  end
  assign out_rdata = out_rd[out_rsel_q];

  // ---------------- state controller ----------------
  layer_params_t prm;
  logic          tile_valid, sr_clr, pipe_empty;
  logic [SR_LW-1:0] sr_len;
  logic          chsum;
  logic [A_BITS-1:0] tile [N_MATRICES][PE_ROWS][PE_COLS];
  logic [THREADS-1:0][W_BITS-1:0] wts [N_MATRICES][PE_COLS];
  step_ctl_t     ctl0, ctl1, ctl2, ctl3;

  state_controller u_ctrl (
    .clk (clk), .rst_n (rst_n), .start (start), .params (params),
    .pipe_empty (pipe_empty), .prm (prm), .busy (busy), .done (done), .sr_clr (sr_clr), .sr_len (sr_len),
    .in_re (in_re), .in_raddr_a (in_raddr_a), .in_raddr_b (in_raddr_b),
    .wt_re (wt_re), .wt_raddr (wt_raddr),
    .in_rdata_a (in_rdata_a), .in_rdata_b (in_rdata_b), .wt_rdata (wt_rdata),
    .tile_valid (tile_valid), .tile (tile), .wts (wts), .ctl (ctl0)
  );

  // ---------------- PE grid (6 matrices + adder net 0s) ----------------
  logic signed [O_W-1:0] psum [N_MATRICES][N_PSUMS];

  pe_grid u_grid (
    .clk (clk), .rst_n (rst_n), .in_valid (tile_valid),
    .tile (tile), .w (wts), .o (psum)
  );

  // ---------------- control pipeline ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ctl1 <= '0; ctl2 <= '0; ctl3 <= '0; ctl4 <= '0;
    end else begin
      ctl1 <= ctl0;
      ctl2 <= ctl1;
      ctl3 <= ctl2;
      ctl4 <= ctl3;
    end
  end
  assign pipe_empty = !(ctl0.valid || ctl1.valid || ctl2.valid || ctl3.valid || ctl4.valid);

  // ---------------- adder net 1, channel accumulators, post processing ------
  logic signed [S_W-1:0]   lane [N_MATRICES][N_LANES];
  logic signed [ACC_W-1:0] acc  [N_MATRICES][N_LANES];
  logic [A_BITS-1:0]       code [N_MATRICES][N_LANES];
  logic [N_MATRICES-1:0]   ca_valid, pp_valid;
  logic signed [S_W-1:0]   lane_sum [N_LANES];   // 3x3 channel sum: lanes of all matrices
  logic signed [S_W-1:0]   ca_in [N_MATRICES][N_LANES];

  assign chsum = prm.ch_sum && (prm.mode != MODE_1X1);

  always_comb begin
    for (int l = 0; l < N_LANES; l++) begin
      lane_sum[l] = '0;
      for (int k = 0; k < N_MATRICES; k++) lane_sum[l] = lane_sum[l] + lane[k][l];
    end
  end

  for (genvar m = 0; m < N_MATRICES; m++) begin : g_an1
    adder_net1 #(.M(m)) u_an1 (
      .clk (clk), .rst_n (rst_n), .mode (prm.mode), .valid (ctl1.valid),
      .sr_clr (sr_clr), .sr_len (sr_len), .o_all (psum), .lane (lane[m])
    );
    channel_accum u_ca (
      .clk (clk), .rst_n (rst_n), .in_valid (ctl1.valid),
      .pair_en (prm.mode == MODE_1X1), .clear (ctl1.ca_clear),
      .in (ca_in[m]), .acc (acc[m]), .out_valid (ca_valid[m])
    );
    post_processing u_pp (
      .clk (clk), .rst_n (rst_n), .in_valid (ca_valid[m]), .q_offset (prm.q_offset),
      .y (acc[m]), .code (code[m]), .out_valid (pp_valid[m])
    );

    // with the channel sum, matrix 0's accumulator adds the lanes of all six
    assign ca_in[m] = (chsum && m == 0) ? lane_sum : lane[m];

    // lanes of the result to the lanes of the output words
    always_comb begin
      wd_a[m] = '0;
      wd_b[m] = '0;
      unique case (prm.mode)
        MODE_3X3_S1: begin
          for (int l = 0; l < N_LANES; l++) begin
            wd_a[m][l*A_BITS +: A_BITS] = code[m][l];
            wd_b[m][l*A_BITS +: A_BITS] = code[m][l];
          end
        end
        MODE_3X3_S2: begin
          wd_a[m][0*A_BITS +: A_BITS] = code[m][0];
          wd_a[m][1*A_BITS +: A_BITS] = code[m][2];
          wd_a[m][2*A_BITS +: A_BITS] = code[m][5];
          wd_b[m][2*A_BITS +: A_BITS] = code[m][4];
        end
        MODE_1X1: begin
          for (int t = 0; t < THREADS; t++)
            wd_a[m][t*A_BITS +: A_BITS] = code[m][2*t];
        end
        default: ;
      endcase
      we_a[m] = (ctl4.valid && ctl4.wr && pp_valid[m] && (m == 0 || !chsum)) ? ctl4.mask_a : '0;
      we_b[m] = (ctl4.valid && ctl4.wr && pp_valid[m] && (m == 0 || !chsum)) ? ctl4.mask_b : '0;
    end
  end

  a_pp_aligned: assert property (@(posedge clk) (rst_n && ctl4.valid) |-> pp_valid[0]);

endmodule
