// tb_state_controller: runs the sequencer alone against behavioural SRAM models
// (one clock read latency, like input_sram / weight_sram) holding random codes,
// and checks every tile step it issues:
//  * the tile each matrix gets (tile[m][r][c] = input row 6s+r, column x*stride+c
//    of channel m for 3x3; pixel 6g+r, channel 18cg+3m+c of row y for 1x1),
//    including zeros for padding columns and masked matrices/channels/pixels;
//  * the broadcast weights (3x3: PE column c, thread t = filter row t, column c;
//    1x1: thread t = filter 3fg+t, PE column c = channel 18cg+3m+c);
//  * the output word address and lane masks in ctl, and ca_clear / wr for 1x1;
//  * the number of steps and the done pulse.
// Layers: 3x3 stride 1 (12x6), 3x3 stride 2 (12x7, padding column), 1x1 with
// two channel groups, and 3x3 summed over 15 channels (groups of six innermost,
// shift-register length out_w x groups). The SRAM models and the timing of the checks are this
// testbench's own; the orders checked are the ones documented in the RTL.
module tb_state_controller;
  import neuromax_pkg::*;

  localparam int D = 256;
  logic clk = 0, rst_n = 0, start = 0;
  layer_params_t params, prm;
  logic pipe_empty, busy, done, sr_clr, in_re, wt_re, tile_valid;
  logic [SR_LW-1:0] sr_len;
  logic [IN_AW-1:0] in_raddr_a, in_raddr_b;
  logic [WT_AW-1:0] wt_raddr;
  logic [IN_WORD_W-1:0] in_rdata_a [N_MATRICES];
  logic [IN_WORD_W-1:0] in_rdata_b [N_MATRICES];
  logic [WT_WORD_W-1:0] wt_rdata   [N_MATRICES];
  logic [A_BITS-1:0] tile [N_MATRICES][PE_ROWS][PE_COLS];
  logic [THREADS-1:0][W_BITS-1:0] wts [N_MATRICES][PE_COLS];
  step_ctl_t ctl;

  logic [IN_WORD_W-1:0] mem_in [N_MATRICES][D];
  logic [WT_WORD_W-1:0] mem_wt [N_MATRICES][D];

  state_controller dut (.clk(clk), .rst_n(rst_n), .start(start), .params(params),
    .pipe_empty(pipe_empty), .prm(prm), .busy(busy), .done(done), .sr_clr(sr_clr), .sr_len(sr_len),
    .in_re(in_re), .in_raddr_a(in_raddr_a), .in_raddr_b(in_raddr_b),
    .wt_re(wt_re), .wt_raddr(wt_raddr),
    .in_rdata_a(in_rdata_a), .in_rdata_b(in_rdata_b), .wt_rdata(wt_rdata),
    .tile_valid(tile_valid), .tile(tile), .wts(wts), .ctl(ctl));

  always #5 clk = ~clk;

  always @(posedge clk) begin
    for (int m = 0; m < N_MATRICES; m++) begin
      if (in_re) begin
        in_rdata_a[m] <= mem_in[m][int'(in_raddr_a) % D];
        in_rdata_b[m] <= mem_in[m][int'(in_raddr_b) % D];
      end
      if (wt_re) wt_rdata[m] <= mem_wt[m][int'(wt_raddr) % D];
    end
  end

  // the core's pipeline after the controller: ctl stays 4 more clocks
  logic [3:0] pipe_v;
  always @(posedge clk or negedge rst_n)
    if (!rst_n) pipe_v <= '0;
    else        pipe_v <= {pipe_v[2:0], ctl.valid};
  assign pipe_empty = !(ctl.valid || |pipe_v);

  int checks = 0, failures = 0;
  int n_steps;
  layer_params_t cur;

  function automatic int in3(int m, int y, int x, int cg);
    int nw = (int'(cur.in_w) + 2) / 3, ns = (int'(cur.in_h) + 5) / 6;
    int s = y / 6, k = x / 3;
    if (x >= int'(cur.in_w) || 6*cg + m >= int'(cur.channels)) return 0;
    return int'(mem_in[m][(cg*ns + s)*nw + k][((y%6)*3 + x%3)*6 +: 6]);
  endfunction

  task automatic chk(input int got, input int exp, input string what);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures <= 20) $display("FAIL step %0d %s got %0d exp %0d", n_steps, what, got, exp);
    end
  endtask

  // check one issued step (sampled after the clock edge that registered it)
  always @(negedge clk) if (rst_n && tile_valid) check_step();

  task automatic check_step();
    int n = n_steps;
    if (cur.mode != MODE_1X1) begin
      int st = (cur.mode == MODE_3X3_S2) ? 2 : 1;
      int ow = int'(cur.out_w), ns = (int'(cur.in_h) + 5) / 6;
      int nc = cur.ch_sum ? (int'(cur.channels) + 5) / 6 : 1;
      int cg = n % nc, x = (n / nc) % ow, s = (n / (nc*ow)) % ns, f = n / (nc * ow * ns);
      for (int m = 0; m < N_MATRICES; m++)
        for (int r = 0; r < 6; r++)
          for (int c = 0; c < 3; c++)
            chk(int'(tile[m][r][c]), in3(m, 6*s + r, x*st + c, cg), $sformatf("tile m%0d r%0d c%0d", m, r, c));
      for (int m = 0; m < N_MATRICES; m++)
        for (int c = 0; c < 3; c++)
          for (int t = 0; t < 3; t++)
            chk(int'(wts[m][c][t]), int'(mem_wt[m][f*nc + cg][(3*c + t)*7 +: 7]), "wt3");
      chk(int'(ctl.addr_a), (f*ns + s)*ow + x, "addr_a");
      if (s > 0) chk(int'(ctl.addr_b), (f*ns + s)*ow + x - ow, "addr_b");
      chk(int'(ctl.mask_b), (s == 0 || cg != nc - 1) ? 0 : (st == 1 ? 6'b110000 : 6'b000100), "mask_b");
      chk(int'(ctl.ca_clear), int'(cg == 0), "ca_clear3");
      chk(int'(ctl.wr), int'(cg == nc - 1), "wr3");
      chk(int'(sr_len), ow * nc, "sr_len");
    end else begin
      int ih = int'(cur.in_h), iw = int'(cur.in_w), ch = int'(cur.channels);
      int ng = (iw + 5) / 6, ncg = (ch + 17) / 18;
      int cg = n % ncg, g = (n / ncg) % ng, y = (n / (ncg*ng)) % ih, fg = n / (ncg*ng*ih);
      for (int m = 0; m < N_MATRICES; m++) begin
        for (int r = 0; r < 6; r++)
          for (int c = 0; c < 3; c++) begin
            int chn = cg*18 + 3*m + c, e;
            e = (chn < ch && 6*g + r < iw) ?
                int'(mem_in[m][(y*ng + g)*ncg + cg][(3*r + c)*6 +: 6]) : 0;
            chk(int'(tile[m][r][c]), e, "tile1");
          end
        for (int c = 0; c < 3; c++)
          for (int t = 0; t < 3; t++)
            chk(int'(wts[m][c][t]), int'(mem_wt[m][fg*ncg + cg][(3*t + c)*7 +: 7]), "wt1");
      end
      chk(int'(ctl.ca_clear), int'(cg == 0), "ca_clear");
      chk(int'(ctl.wr), int'(cg == ncg - 1), "wr");
      if (cg == ncg - 1) chk(int'(ctl.addr_a), (fg*ih + y)*ng + g, "addr1");
    end
    n_steps++;
  endtask

  task automatic run(input layer_params_t p, input int exp_steps);
    int cyc = 0;
    cur = p; params = p; n_steps = 0;
    for (int m = 0; m < N_MATRICES; m++)
      for (int a = 0; a < D; a++) begin
        mem_in[m][a] = {$urandom, $urandom, $urandom, $urandom};
        mem_wt[m][a] = {$urandom, $urandom};
      end
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    while (!done && cyc < 5000) begin @(negedge clk); cyc++; end
    chk(int'(done), 1, "done");
    chk(n_steps, exp_steps, "step count");
    @(negedge clk);
    chk(int'(busy), 0, "busy after done");
  endtask

  initial begin
    layer_params_t p;
    repeat (2) @(negedge clk);
    rst_n = 1;
    p = '0; p.mode = MODE_3X3_S1; p.in_h = 12; p.in_w = 6; p.out_h = 10; p.out_w = 4;
    p.channels = 6; p.filters = 2;
    run(p, 2 * 2 * 4);
    p = '0; p.mode = MODE_3X3_S2; p.in_h = 12; p.in_w = 7; p.out_h = 6; p.out_w = 4;
    p.channels = 4; p.filters = 1;
    run(p, 2 * 4);
    // channel sum over 15 channels (three groups of six), stride 1
    p = '0; p.mode = MODE_3X3_S1; p.in_h = 12; p.in_w = 8; p.out_h = 10; p.out_w = 6;
    p.channels = 15; p.filters = 2; p.ch_sum = 1;
    run(p, 2 * 2 * 6 * 3);
    p = '0; p.mode = MODE_1X1; p.in_h = 3; p.in_w = 8; p.out_h = 3; p.out_w = 8;
    p.channels = 30; p.filters = 4;
    run(p, 2 * 3 * 2 * 2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
