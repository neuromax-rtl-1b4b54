// tb_conv_core: end-to-end testbench of the NeuroMAX CONV core at its default
// (paper) size; this is also the full-size testbench, as conv_core is
// instantiated without parameter overrides.
//
// How it works: for each layer in a list, the testbench draws random log codes
// for activations and weights, loads them into the six input and six weight
// SRAMs through the core's load ports in the layouts given in state_controller,
// programs the layer parameters, pulses start, waits for done, reads every
// output word back and compares each output code with a reference convolution
// built from tb_ref_pkg (thread_ref products, integer sums, quant_ref).
// Layers: 3x3 stride 1 and stride 2 (with and without partial last sectors and
// odd widths), 1x1 with one channel group and with three channel groups, in an
// order that switches modes between consecutive layers. The first two layers
// are the worked examples of the architecture (3x3 on a 12x6 input, 1x1 on a
// 3x6x6 input with six filters); for them and several others the number of
// issue cycles is checked against one tile step per clock (8 and 6 steps).
//
// Mechanism counters (each must be seen at least once or it counts a failure):
//   boundary_sr     : a 3x3 result written through the boundary port (port B),
//                     i.e. a row finished by the boundary shift registers
//   s2_padding      : a checked stride-2 output whose window covers the zero
//                     padding column or row
//   channel_accum   : a 1x1 step that adds to the accumulator without clearing
//   mode_switch     : a layer whose mode differs from the previous layer's
//   direct_tail_row : a stride-2 last-sector row written directly (lane 2, port A)
// It also requires that a fair share of the checked codes are neither 0 nor 63,
// so the comparisons are not vacuous.
//
// Timing: inputs change on the falling clock edge; output reads return one clock
// after out_re. A watchdog ends the run with a failure if it hangs.
// The host load protocol is this design's own (the paper uses AXI DMA).
module tb_conv_core;
  import neuromax_pkg::*;
  import tb_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  layer_params_t params;
  logic start = 0, busy, done;
  logic in_we = 0, wt_we = 0, out_re = 0;
  logic [2:0] in_wsel, wt_wsel, out_rsel;
  logic [IN_AW-1:0] in_waddr;
  logic [IN_WORD_W-1:0] in_wdata;
  logic [WT_AW-1:0] wt_waddr;
  logic [WT_WORD_W-1:0] wt_wdata;
  logic [OUT_AW-1:0] out_raddr;
  logic [OUT_WORD_W-1:0] out_rdata;

  conv_core dut (
    .clk(clk), .rst_n(rst_n), .params(params), .start(start), .busy(busy), .done(done),
    .in_we(in_we), .in_wsel(in_wsel), .in_waddr(in_waddr), .in_wdata(in_wdata),
    .wt_we(wt_we), .wt_wsel(wt_wsel), .wt_waddr(wt_waddr), .wt_wdata(wt_wdata),
    .out_re(out_re), .out_rsel(out_rsel), .out_raddr(out_raddr), .out_rdata(out_rdata)
  );

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int n_boundary = 0, n_pad = 0, n_cacc = 0, n_switch = 0, n_tail = 0;
  int n_mid = 0;

  // ---- data of the current layer ----
  localparam int MH = 24, MW = 48, MF = 4, MC = 64, MH1 = 8, MW1 = 16, MF1 = 8;
  int act3 [N_MATRICES][MH][MW];
  int wt3  [N_MATRICES][MF][3][3];
  int act1 [MC][MH1][MW1];
  int wt1  [MF1][MC];

  function automatic int rnd_act();
    return ($urandom % 8 == 0) ? 0 : 28 + $urandom % 36;
  endfunction
  function automatic int rnd_wt();
    return (($urandom % 2) << 6) | (26 + $urandom % 38);
  endfunction

  // mechanism counters read from the core's pipeline control
  always @(posedge clk) if (rst_n) begin
    if (dut.ctl4.valid && dut.ctl4.wr && |dut.ctl4.mask_b && dut.ctl4.mode != MODE_1X1)
      n_boundary++;
    if (dut.ctl4.valid && dut.ctl4.wr && dut.ctl4.mode == MODE_3X3_S2 && dut.ctl4.mask_a[2])
      n_tail++;
    if (dut.ctl1.valid && dut.ctl1.mode == MODE_1X1 && !dut.ctl1.ca_clear)
      n_cacc++;
  end

  task automatic wr_in(input int m, input int a, input logic [IN_WORD_W-1:0] d);
    @(negedge clk);
    in_we = 1; in_wsel = 3'(m); in_waddr = IN_AW'(a); in_wdata = d;
    @(negedge clk);
    in_we = 0;
  endtask
  task automatic wr_wt(input int m, input int a, input logic [WT_WORD_W-1:0] d);
    @(negedge clk);
    wt_we = 1; wt_wsel = 3'(m); wt_waddr = WT_AW'(a); wt_wdata = d;
    @(negedge clk);
    wt_we = 0;
  endtask
  task automatic rd_out(input int m, input int a, output logic [OUT_WORD_W-1:0] d);
    @(negedge clk);
    out_re = 1; out_rsel = 3'(m); out_raddr = OUT_AW'(a);
    @(negedge clk);
    out_re = 0;
    d = out_rdata;
  endtask

  task automatic check_code(input int got, input int exp, input string what);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures <= 20) $display("FAIL %s got %0d exp %0d", what, got, exp);
    end
    if (exp != 0 && exp != 63) n_mid++;
  endtask

  // issue cycles of the current layer (one tile step per clock)
  int n_issue;
  always @(posedge clk) if (rst_n && dut.in_re) n_issue++;

  task automatic run_layer(input layer_params_t p, input int exp_steps);
    int cyc;
    n_issue = 0;
    params = p;
    @(negedge clk);
    start = 1;
    @(negedge clk);
    start = 0;
    cyc = 0;
    while (!done) begin
      @(negedge clk);
      cyc++;
      if (cyc > 200000) begin
        failures++;
        $display("FAIL layer did not finish");
        break;
      end
    end
    checks++;
    @(negedge clk);
    if (busy) failures++;
    if (exp_steps >= 0) begin
      checks++;
      if (n_issue != exp_steps) begin
        failures++;
        $display("FAIL layer took %0d steps, expected %0d", n_issue, exp_steps);
      end
    end
  endtask

  // ---------------- 3x3 layer ----------------
  task automatic layer3(input conv_mode_e mode, input int ih, input int iw, input int ch,
                        input int nf, input int q, input int exp_steps = -1);
    layer_params_t p;
    int st, oh, ow, ns, nw;
    logic [IN_WORD_W-1:0] w;
    logic [WT_WORD_W-1:0] ww;
    logic [OUT_WORD_W-1:0] d;
    st = (mode == MODE_3X3_S2) ? 2 : 1;
    oh = (st == 1) ? ih - 2 : (ih + 1) / 2;
    ow = (st == 1) ? iw - 2 : (iw + 1) / 2;
    ns = (ih + 5) / 6;
    nw = (iw + 2) / 3;
    for (int m = 0; m < N_MATRICES; m++) begin
      for (int y = 0; y < MH; y++)
        for (int x = 0; x < MW; x++)
          act3[m][y][x] = (y < ih && x < iw) ? rnd_act() : 0;
      for (int f = 0; f < nf; f++)
        for (int i = 0; i < 3; i++)
          for (int j = 0; j < 3; j++) wt3[m][f][i][j] = rnd_wt();
      // columns beyond the width are masked by the core: put garbage there
      for (int s = 0; s < ns; s++)
        for (int k = 0; k < nw; k++) begin
          for (int r = 0; r < 6; r++)
            for (int c = 0; c < 3; c++)
              w[(3*r + c)*6 +: 6] = (3*k + c < iw) ? 6'(act3[m][6*s + r][3*k + c]) : 6'($urandom);
          wr_in(m, s*nw + k, w);
        end
      for (int f = 0; f < nf; f++) begin
        for (int c = 0; c < 3; c++)
          for (int t = 0; t < 3; t++) ww[(3*c + t)*7 +: 7] = 7'(wt3[m][f][t][c]);
        wr_wt(m, f, ww);
      end
    end
    p = '0;
    p.mode = mode; p.in_w = 9'(iw); p.in_h = 9'(ih); p.out_w = 9'(ow); p.out_h = 9'(oh);
    p.channels = 10'(ch); p.filters = 10'(nf); p.q_offset = 8'(q);
    run_layer(p, exp_steps);
    for (int m = 0; m < N_MATRICES; m++)
      for (int f = 0; f < nf; f++)
        for (int y = 0; y < oh; y++)
          for (int x = 0; x < ow; x++) begin
            int sum, a, e, s, l;
            bit pad;
            sum = 0; pad = 0;
            for (int i = 0; i < 3; i++)
              for (int j = 0; j < 3; j++) begin
                if (y*st + i >= ih || x*st + j >= iw) pad = 1;
                a = (m < ch) ? act3[m][y*st + i][x*st + j] : 0;
                sum += thread_ref(wt3[m][f][i][j], a);
              end
            e = quant_ref(longint'(sum), q);
            s = (st == 1) ? y / 6 : y / 3;
            l = (st == 1) ? y % 6 : y % 3;
            rd_out(m, (f*ns + s)*ow + x, d);
            check_code(int'(d[l*6 +: 6]),
                       e, $sformatf("3x3 s%0d m%0d f%0d y%0d x%0d", st, m, f, y, x));
            if (st == 2 && pad && m < ch) n_pad++;
          end
  endtask

  // ---------------- 1x1 layer ----------------
  task automatic layer1(input int ih, input int iw, input int ch, input int nf, input int q,
                        input int exp_steps = -1);
    layer_params_t p;
    int ng, ncg, nfg;
    logic [IN_WORD_W-1:0] w;
    logic [WT_WORD_W-1:0] ww;
    logic [OUT_WORD_W-1:0] d;
    ng = (iw + 5) / 6; ncg = (ch + 17) / 18; nfg = (nf + 2) / 3;
    for (int c = 0; c < MC; c++)
      for (int y = 0; y < MH1; y++)
        for (int x = 0; x < MW1; x++) act1[c][y][x] = (c < ch && x < iw) ? rnd_act() : 0;
    for (int fo = 0; fo < MF1; fo++)
      for (int c = 0; c < MC; c++) wt1[fo][c] = (fo < nf && c < ch) ? rnd_wt() : 0;
    for (int m = 0; m < N_MATRICES; m++) begin
      for (int y = 0; y < ih; y++)
        for (int g = 0; g < ng; g++)
          for (int cg = 0; cg < ncg; cg++) begin
            for (int r = 0; r < 6; r++)
              for (int c = 0; c < 3; c++) begin
                int chn = cg*18 + 3*m + c;
                // pixels and channels beyond the layer are masked: garbage there
                w[(3*r + c)*6 +: 6] = (chn < ch && 6*g + r < iw) ? 6'(act1[chn][y][6*g + r])
                                                                  : 6'($urandom);
              end
            wr_in(m, (y*ng + g)*ncg + cg, w);
          end
      for (int fg = 0; fg < nfg; fg++)
        for (int cg = 0; cg < ncg; cg++) begin
          for (int t = 0; t < 3; t++)
            for (int c = 0; c < 3; c++) begin
              int chn = cg*18 + 3*m + c;
              ww[(3*t + c)*7 +: 7] = (3*fg + t < nf && chn < ch) ? 7'(wt1[3*fg + t][chn]) : 7'd0;
            end
          wr_wt(m, fg*ncg + cg, ww);
        end
    end
    p = '0;
    p.mode = MODE_1X1; p.in_w = 9'(iw); p.in_h = 9'(ih); p.out_w = 9'(iw); p.out_h = 9'(ih);
    p.channels = 10'(ch); p.filters = 10'(nf); p.q_offset = 8'(q);
    run_layer(p, exp_steps);
    for (int fo = 0; fo < nf; fo++)
      for (int y = 0; y < ih; y++)
        for (int x = 0; x < iw; x++) begin
          longint sum;
          int e;
          sum = 0;
          for (int c = 0; c < ch; c++) sum += thread_ref(wt1[fo][c], act1[c][y][x]);
          e = quant_ref(sum, q);
          rd_out(x % 6, ((fo/3)*ih + y)*ng + x/6, d);
          check_code(int'(d[(fo%3)*6 +: 6]), e, $sformatf("1x1 f%0d y%0d x%0d", fo, y, x));
        end
  endtask


  // ---------------- 3x3 layer summed over channels (standard convolution) ------
  localparam int MCS = 16;
  int act3s [MCS][MH][MW];
  int wt3s  [MF][MCS][3][3];
  int n_chsum = 0;

  task automatic layer3c(input conv_mode_e mode, input int ih, input int iw, input int ch,
                         input int nf, input int q, input int exp_steps = -1);
    layer_params_t p;
    int st, oh, ow, ns, nw, nc6;
    logic [IN_WORD_W-1:0] w;
    logic [WT_WORD_W-1:0] ww;
    logic [OUT_WORD_W-1:0] d;
    st = (mode == MODE_3X3_S2) ? 2 : 1;
    oh = (st == 1) ? ih - 2 : (ih + 1) / 2;
    ow = (st == 1) ? iw - 2 : (iw + 1) / 2;
    ns = (ih + 5) / 6; nw = (iw + 2) / 3; nc6 = (ch + 5) / 6;
    for (int c = 0; c < MCS; c++) begin
      for (int y = 0; y < MH; y++)
        for (int x = 0; x < MW; x++)
          act3s[c][y][x] = (c < ch && y < ih && x < iw) ? rnd_act() : 0;
      for (int f = 0; f < nf; f++)
        for (int i = 0; i < 3; i++)
          for (int j = 0; j < 3; j++) wt3s[f][c][i][j] = (c < ch) ? rnd_wt() : 0;
    end
    // matrix m holds channels m, m+6, m+12, ...: input word (cg*NS+s)*NW+k,
    // weight word f*NC6+cg
    for (int m = 0; m < N_MATRICES; m++)
      for (int cg = 0; cg < nc6; cg++) begin
        int c = 6*cg + m;
        for (int s = 0; s < ns; s++)
          for (int k = 0; k < nw; k++) begin
            for (int r = 0; r < 6; r++)
              for (int cc = 0; cc < 3; cc++)
                w[(3*r + cc)*6 +: 6] = (c < ch && 3*k + cc < iw) ? 6'(act3s[c][6*s + r][3*k + cc])
                                                                 : 6'($urandom);
            wr_in(m, (cg*ns + s)*nw + k, w);
          end
        for (int f = 0; f < nf; f++) begin
          for (int cc = 0; cc < 3; cc++)
            for (int t = 0; t < 3; t++)
              ww[(3*cc + t)*7 +: 7] = (c < ch) ? 7'(wt3s[f][c][t][cc]) : 7'($urandom);
          wr_wt(m, f*nc6 + cg, ww);
        end
      end
    p = '0;
    p.mode = mode; p.in_w = 9'(iw); p.in_h = 9'(ih); p.out_w = 9'(ow); p.out_h = 9'(oh);
    p.channels = 10'(ch); p.filters = 10'(nf); p.q_offset = 8'(q); p.ch_sum = 1'b1;
    run_layer(p, exp_steps);
    if (nc6 > 1) n_chsum++;
    for (int f = 0; f < nf; f++)
      for (int y = 0; y < oh; y++)
        for (int x = 0; x < ow; x++) begin
          longint sum;
          int e, s, l;
          sum = 0;
          for (int c = 0; c < ch; c++)
            for (int i = 0; i < 3; i++)
              for (int j = 0; j < 3; j++)
                sum += thread_ref(wt3s[f][c][i][j], act3s[c][y*st + i][x*st + j]);
          e = quant_ref(sum, q);
          s = (st == 1) ? y / 6 : y / 3;
          l = (st == 1) ? y % 6 : y % 3;
          rd_out(0, (f*ns + s)*ow + x, d);
          check_code(int'(d[l*6 +: 6]), e, $sformatf("3x3 sum s%0d f%0d y%0d x%0d", st, f, y, x));
          if (st == 2 && (y*st + 2 >= ih || x*st + 2 >= iw)) n_pad++;
        end
  endtask

  conv_mode_e last_mode;
  bit         have_last = 0;
  task automatic note_mode(input conv_mode_e m);
    if (have_last && m != last_mode) n_switch++;
    last_mode = m; have_last = 1;
  endtask

  initial begin
    params = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // the two worked examples: 12x6 input, 10x4 output in 8 steps;
    // 3x6x6 input, six 1x1x6 filters, 6 steps on two matrices
    note_mode(MODE_3X3_S1); layer3(MODE_3X3_S1, 12, 6, 6, 1, 6, 8);
    note_mode(MODE_1X1);    layer1(3, 6, 6, 6, 8, 6);
    note_mode(MODE_3X3_S2); layer3(MODE_3X3_S2, 12, 6, 6, 2, 6, 2*2*3); // 6x3 output
    note_mode(MODE_3X3_S1); layer3(MODE_3X3_S1, 12, 6, 6, 2, 6, 2*2*4);
    note_mode(MODE_1X1);    layer1(6, 6, 3, 6, 8);                  // one channel group
    note_mode(MODE_3X3_S1); layer3(MODE_3X3_S1, 20, 40, 5, 2, 4);   // partial last sector
    note_mode(MODE_1X1);    layer1(4, 10, 40, 5, 2, 2*4*2*3);       // three channel groups
    note_mode(MODE_3X3_S2); layer3(MODE_3X3_S2, 14, 15, 6, 3, 6, 3*3*8); // odd width, tail row
    note_mode(MODE_3X3_S1); layer3(MODE_3X3_S1, 18, 9, 6, 1, 6);
    // standard convolution: 14 channels in three groups of six, summed
    note_mode(MODE_3X3_S1); layer3c(MODE_3X3_S1, 12, 10, 14, 2, 0, 2*2*8*3);
    note_mode(MODE_1X1);    layer1(3, 6, 6, 6, 8, 6);
    note_mode(MODE_3X3_S2); layer3c(MODE_3X3_S2, 14, 11, 9, 2, 0, 2*3*6*2);
    $display("mechanisms: boundary_sr=%0d s2_padding=%0d channel_accum=%0d mode_switch=%0d direct_tail_row=%0d channel_sum_3x3=%0d mid_codes=%0d",
             n_boundary, n_pad, n_cacc, n_switch, n_tail, n_chsum, n_mid);
    checks += 7;
    if (n_chsum == 0)    failures++;
    if (n_boundary == 0) failures++;
    if (n_pad == 0)      failures++;
    if (n_cacc == 0)     failures++;
    if (n_switch == 0)   failures++;
    if (n_tail == 0)     failures++;
    if (n_mid * 4 < checks) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
