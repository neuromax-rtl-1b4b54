// state_controller: sequencer of the NeuroMAX CONV core.
//
// The host writes the layer parameters and pulses start. The controller then
// issues one tile step per clock to all six PE matrices in lockstep:
//  * it reads the input and weight SRAMs of every matrix (same addresses);
//  * it cuts the tile each matrix sees and broadcasts the weight array
//    (the paper's "row shifted pattern" of input tiles and 2D weight broadcast);
//  * it sends along each step the control the adder stages and the output
//    write need (step_ctl_t).
//
// 3x3 stride 1 / stride 2 (paper, 3x3 convolution section): the input of each
// channel is cut into sectors of 6 rows; within a sector the 6x3 tile window
// moves right by the stride, one step per output column. The tile at column
// col0 is made of input words k0 = col0/3 and k0+1 (each 6 rows x 3 columns);
// columns at or beyond the input width are zeros (right padding for stride 2).
// Each filter stays in the PEs for all sectors (weight word = filter index).
// Loop order: filter, sector, output column. Step (f, s, x) writes output rows
// 6s..6s+3 (stride 1) or 3s, 3s+1 (stride 2) to word (f*NS+s)*OW+x, and the
// boundary rows 6s-2, 6s-1 (stride 1) or 3s-1 (stride 2), which the boundary shift
// registers finish, to the word of the previous sector. In stride 2 the last
// sector also writes row 3s+2 directly (the row below it is padding).
//
// 1x1 (paper, 1x1 convolution section): matrix m takes channels 3m..3m+2 of an
// 18-channel group, PE row p is pixel p of a 6-pixel row segment, thread t is
// filter t of a 3-filter group; the weights change every pass over the image.
// Loop order: filter group, image row, pixel group, channel group (innermost, so
// the channel accumulators add channel groups of one output in consecutive
// steps; this order for more than 18 channels is this design's choice).
// Input word of matrix m: ((y*NG)+g)*NCG+cg; weight word: fg*NCG+cg; output
// word of matrix m: (fg*IH+y)*NG+g, lane t = filter 3fg+t at pixel 6g+m.
//
// 3x3 with ch_sum set (standard convolution, this design's addition): matrix m
// takes channels m, m+6, m+12, ... (channel group cg = channel/6). The channel
// groups are the innermost loop: filter, sector, output column, channel group.
// Input word of matrix m: (cg*NS+s)*NW+k; weight word f*NC6+cg. The boundary
// shift registers then run with length out_w*NC6 (sr_len), the core adds the six
// matrices' lanes, the channel accumulator clears on cg = 0 and the result is
// written on the last group, to matrix 0's output SRAM only.
//
// Matrices beyond the channel count, channels beyond the count and pixels beyond
// the width get zero activations (code 0, which the threads turn into 0).
//
// Timing: SRAM addresses are combinational in the issue cycle; SRAM data return
// one clock later; tiles, weights and ctl are registered one clock after that,
// i.e. two clocks after issue. done pulses once every step has been issued and
// the core reports its pipeline empty (pipe_empty).
//
// Lint note: the assertion samples rst_n on the clock edge while the registers
// use it as an asynchronous reset, so a linter reports rst_n as used both
// ways; that use is only in the check and changes no logic.
module state_controller
  import neuromax_pkg::*;
(
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   start,
  input  layer_params_t          params,
  input  logic                   pipe_empty,
  output layer_params_t          prm,          // latched parameters
  output logic                   busy,
  output logic                   done,
  output logic                   sr_clr,       // rewind boundary shift registers
  output logic [SR_LW-1:0]       sr_len,       // boundary shift register length
  // SRAM read side, shared by all matrices
  output logic                   in_re,
  output logic [IN_AW-1:0]       in_raddr_a,
  output logic [IN_AW-1:0]       in_raddr_b,
  output logic                   wt_re,
  output logic [WT_AW-1:0]       wt_raddr,
  input  logic [IN_WORD_W-1:0]   in_rdata_a [N_MATRICES],
  input  logic [IN_WORD_W-1:0]   in_rdata_b [N_MATRICES],
  input  logic [WT_WORD_W-1:0]   wt_rdata   [N_MATRICES],
  // to the PE grid
  output logic                   tile_valid,
  output logic [A_BITS-1:0]      tile [N_MATRICES][PE_ROWS][PE_COLS],
  output logic [THREADS-1:0][W_BITS-1:0] wts [N_MATRICES][PE_COLS],
  output step_ctl_t              ctl
);

  typedef enum logic [1:0] { S_IDLE, S_RUN, S_DRAIN } state_e;
  state_e    state;
  step_ctl_t ctl_s1;

  // ---- derived sizes ----
  logic [8:0] n_w;    // input words per sector row (ceil(in_w/3))
  logic [8:0] n_s;    // sectors (ceil(in_h/6))
  logic [8:0] n_g;    // 1x1: pixel groups per row (ceil(in_w/6))
  logic [9:0] n_cg;   // 1x1: channel groups (ceil(channels/18))
  logic [9:0] n_fg;   // 1x1: filter groups (ceil(filters/3))
  logic [9:0] n_c6;   // 3x3 channel sum: channel groups of six (ceil(channels/6))
  logic [IN_AW-1:0] sec_words;  // input words of one channel (n_s*n_w)
  logic [1:0] stride;
  logic       is1x1;
  logic       chsum;  // 3x3 with the sum over channels

  always_comb begin
    n_w    = 9'((10'(prm.in_w) + 10'd2) / 10'd3);
    n_s    = 9'((10'(prm.in_h) + 10'd5) / 10'd6);
    n_g    = 9'((10'(prm.in_w) + 10'd5) / 10'd6);
    n_cg   = 10'((11'(prm.channels) + 11'd17) / 11'd18);
    n_fg   = 10'((11'(prm.filters) + 11'd2) / 11'd3);
    stride = (prm.mode == MODE_3X3_S2) ? 2'd2 : 2'd1;
    is1x1  = (prm.mode == MODE_1X1);
    n_c6   = 10'((11'(prm.channels) + 11'd5) / 11'd6);
    sec_words = IN_AW'(n_s * n_w);
    chsum  = !is1x1 && prm.ch_sum;
    sr_len = chsum ? SR_LW'(19'(prm.out_w) * 19'(n_c6)) : SR_LW'(prm.out_w);
  end

  // ---- loop counters ----
  logic [9:0]        f;        // filter (3x3) or filter group (1x1)
  logic [8:0]        s;        // sector (3x3) or image row (1x1)
  logic [8:0]        x;        // output column (3x3) or pixel group (1x1)
  logic [9:0]        cg;       // 1x1 channel group
  logic [8:0]        col0;     // first input column of the tile
  logic [8:0]        k0;       // input word of that column
  logic [1:0]        off;      // col0 mod 3
  logic [IN_AW-1:0]  in_base;  // 3x3: s*n_w; 1x1: running input word
  logic [WT_AW-1:0]  wt_base;  // 1x1: f*n_cg
  logic [OUT_AW-1:0] oaddr;    // running output word
  logic [IN_AW-1:0]  cgoff;    // 3x3 channel sum: cg*n_s*n_w
  logic              last_step;

  assign in_re      = (state == S_RUN);
  assign wt_re      = (state == S_RUN);
  assign in_raddr_a = is1x1 ? in_base : IN_AW'(cgoff + in_base + IN_AW'(k0));
  assign in_raddr_b = IN_AW'(cgoff + in_base + IN_AW'(k0) + 1'b1);
  assign wt_raddr   = (is1x1 || chsum) ? WT_AW'(wt_base + WT_AW'(cg)) : WT_AW'(f);

  always_comb begin
    if (is1x1)
      last_step = (cg == n_cg - 1) && (x == n_g - 1) && (9'(s) == prm.in_h - 1)
                  && (f == n_fg - 1);
    else
      last_step = (x == prm.out_w - 1) && (s == n_s - 1) && (f == prm.filters - 1)
                  && (!chsum || cg == n_c6 - 1);
  end

  // ---- control of the step being issued ----
  step_ctl_t ctl_issue;
  always_comb begin
    ctl_issue             = '0;
    ctl_issue.valid       = (state == S_RUN);
    ctl_issue.mode        = prm.mode;
    ctl_issue.last_sector = (s == n_s - 1);
    ctl_issue.addr_a      = oaddr;
    ctl_issue.addr_b      = OUT_AW'(oaddr - OUT_AW'(prm.out_w));
    unique case (prm.mode)
      MODE_3X3_S1: begin
        ctl_issue.ca_clear = !chsum || (cg == 0);
        ctl_issue.wr       = !chsum || (cg == n_c6 - 1);
        for (int i = 0; i < 4; i++)
          ctl_issue.mask_a[i] = (11'(s) * 11'd6 + 11'(i)) < 11'(prm.out_h);
        ctl_issue.mask_b[4] = (s != 0);
        ctl_issue.mask_b[5] = (s != 0);
      end
      MODE_3X3_S2: begin
        ctl_issue.ca_clear  = !chsum || (cg == 0);
        ctl_issue.wr        = !chsum || (cg == n_c6 - 1);
        ctl_issue.mask_a[0] = (11'(s) * 11'd3)         < 11'(prm.out_h);
        ctl_issue.mask_a[1] = (11'(s) * 11'd3 + 11'd1) < 11'(prm.out_h);
        ctl_issue.mask_a[2] = (s == n_s - 1) && ((11'(s) * 11'd3 + 11'd2) < 11'(prm.out_h));
        ctl_issue.mask_b[2] = (s != 0);
      end
      MODE_1X1: begin
        ctl_issue.ca_clear = (cg == 0);
        ctl_issue.wr       = (cg == n_cg - 1);
        for (int t = 0; t < THREADS; t++)
          ctl_issue.mask_a[t] = (12'(f) * 12'd3 + 12'(t)) < 12'(prm.filters);
      end
      default: ;
    endcase
    if (!ctl_issue.wr) begin
      ctl_issue.mask_a = '0;
      ctl_issue.mask_b = '0;
    end
  end

  // ---- FSM and counters ----
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      prm     <= '0;
      f       <= '0; s <= '0; x <= '0; cg <= '0;
      col0    <= '0; k0 <= '0; off <= '0;
      in_base <= '0; wt_base <= '0; oaddr <= '0; cgoff <= '0;
      done    <= 1'b0;
      sr_clr  <= 1'b0;
    end else begin
      done   <= 1'b0;
      sr_clr <= 1'b0;
      unique case (state)
        S_IDLE: begin
          if (start) begin
            prm     <= params;
            state   <= S_RUN;
            sr_clr  <= 1'b1;
            f <= '0; s <= '0; x <= '0; cg <= '0;
            col0 <= '0; k0 <= '0; off <= '0;
            in_base <= '0; wt_base <= '0; oaddr <= '0; cgoff <= '0;
          end
        end
        S_RUN: begin
          if (last_step) state <= S_DRAIN;
          if (is1x1) begin
            in_base <= IN_AW'(in_base + 1'b1);
            if (cg == n_cg - 1) begin
              cg    <= '0;
              oaddr <= OUT_AW'(oaddr + 1'b1);
              if (x == n_g - 1) begin
                x <= '0;
                if (9'(s) == prm.in_h - 1) begin
                  s       <= '0;
                  f       <= f + 1'b1;
                  in_base <= '0;
                  wt_base <= WT_AW'(wt_base + WT_AW'(n_cg));
                end else begin
                  s <= s + 1'b1;
                end
              end else begin
                x <= x + 1'b1;
              end
            end else begin
              cg <= cg + 1'b1;
            end
          end else if (chsum && cg != n_c6 - 1) begin
            // next six channels of the same output column
            cg    <= cg + 1'b1;
            cgoff <= IN_AW'(cgoff + sec_words);
          end else begin
            cg    <= '0;
            cgoff <= '0;
            oaddr <= OUT_AW'(oaddr + 1'b1);
            if (x == prm.out_w - 1) begin
              x <= '0; col0 <= '0; k0 <= '0; off <= '0;
              if (s == n_s - 1) begin
                s       <= '0;
                in_base <= '0;
                f       <= f + 1'b1;
                wt_base <= WT_AW'(wt_base + WT_AW'(n_c6));
              end else begin
                s       <= s + 1'b1;
                in_base <= IN_AW'(in_base + IN_AW'(n_w));
              end
            end else begin
              x    <= x + 1'b1;
              col0 <= col0 + 9'(stride);
              if (3'(off) + 3'(stride) >= 3'd3) begin
                off <= 2'(3'(off) + 3'(stride) - 3'd3);
                k0  <= k0 + 1'b1;
              end else begin
                off <= off + stride;
              end
            end
          end
        end
        S_DRAIN: begin
          if (pipe_empty && !ctl_s1.valid) begin
            state <= S_IDLE;
            done  <= 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy = (state != S_IDLE);

  // ---- stage 1: SRAM data arrive; remember how to cut the tile ----
  logic [1:0] off_s1;
  logic [8:0] col0_s1;
  logic       bval_s1;
  logic [8:0] pix0_s1;   // 1x1: first pixel of the group
  logic [9:0] ch0_s1;    // 1x1: first channel of the group
  logic [9:0] chm_s1;    // 3x3: channel of matrix 0 (6*cg with the channel sum)

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ctl_s1  <= '0;
      off_s1  <= '0; col0_s1 <= '0; bval_s1 <= 1'b0; pix0_s1 <= '0; ch0_s1 <= '0;
      chm_s1  <= '0;
    end else begin
      ctl_s1  <= ctl_issue;
      off_s1  <= off;
      col0_s1 <= col0;
      bval_s1 <= (k0 + 1'b1) < n_w;
      pix0_s1 <= 9'(12'(x) * 12'd6);
      ch0_s1  <= 10'(cg * 10'd18);
      chm_s1  <= chsum ? 10'(cg * 10'd6) : 10'd0;
    end
  end

  // ---- stage 2: cut tiles, reorder weights, register ----
  logic [A_BITS-1:0] tile_c [N_MATRICES][PE_ROWS][PE_COLS];
  logic [THREADS-1:0][W_BITS-1:0] wts_c [N_MATRICES][PE_COLS];

  always_comb begin
    for (int m = 0; m < N_MATRICES; m++) begin
      for (int r = 0; r < PE_ROWS; r++) begin
        for (int c = 0; c < PE_COLS; c++) begin
          logic [A_BITS-1:0] v;
          int                wc;
          logic              keep;
          wc = 0;
          if (is1x1) begin
            v    = in_rdata_a[m][(r*PE_COLS + c)*A_BITS +: A_BITS];
            keep = (10'(pix0_s1) + 10'(r) < 10'(prm.in_w)) &&
                   (11'(ch0_s1) + 11'(m*3 + c) < 11'(prm.channels));
          end else begin
            wc = int'(off_s1) + c;
            if (wc < PE_COLS) v = in_rdata_a[m][(r*PE_COLS + wc)*A_BITS +: A_BITS];
            else              v = in_rdata_b[m][(r*PE_COLS + wc - PE_COLS)*A_BITS +: A_BITS];
            keep = (10'(col0_s1) + 10'(c) < 10'(prm.in_w)) &&
                   (wc < PE_COLS || bval_s1) &&
                   (11'(chm_s1) + 11'(m) < 11'(prm.channels));
          end
          tile_c[m][r][c] = keep ? v : '0;
        end
      end
      for (int c = 0; c < PE_COLS; c++)
        for (int t = 0; t < THREADS; t++)
          wts_c[m][c][t] = is1x1 ? wt_rdata[m][(t*PE_COLS + c)*W_BITS +: W_BITS]
                                 : wt_rdata[m][(c*THREADS + t)*W_BITS +: W_BITS];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ctl        <= '0;
      tile_valid <= 1'b0;
      for (int m = 0; m < N_MATRICES; m++) begin
        for (int r = 0; r < PE_ROWS; r++)
          for (int c = 0; c < PE_COLS; c++) tile[m][r][c] <= '0;
        for (int c = 0; c < PE_COLS; c++) wts[m][c] <= '0;
      end
    end else begin
      ctl        <= ctl_s1;
      tile_valid <= ctl_s1.valid;
      if (ctl_s1.valid) begin
        tile <= tile_c;
        wts  <= wts_c;
      end
    end
  end

  a_start_idle: assert property (@(posedge clk) (rst_n && start) |-> (state == S_IDLE));

endmodule
