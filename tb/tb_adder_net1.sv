// tb_adder_net1: drives random psums of all six matrices into adder net 1
// (matrix index M = 2) and checks each lane against the connection tables of the
// paper: stride 1 (o1+o5+o9, ..., SR(o13+o17)+o3, SR(o16)+o2+o6), stride 2
// (o1+o5+o9, o7+o11+o15, SR(o13+o17)+o3, o13+o17) and 1x1 (psum 3M+k of
// matrices 0-2 and 3-5). The shift registers run with length 3, so the boundary
// lanes must combine the current psums with those of three steps before.
// Timing: inputs change on the falling edge; lanes are combinational and sampled
// before the next rising edge, where the shift registers advance. The lane tables
// come from the paper's adder net 1 figures; the lane numbering and the short
// shift-register length are this testbench's own.
module tb_adder_net1;
  import neuromax_pkg::*;
  localparam int M = 2;
  localparam int L = 3;

  logic clk = 0, rst_n = 0, valid = 0, sr_clr = 0;
  conv_mode_e mode;
  logic signed [O_W-1:0] o_all [N_MATRICES][N_PSUMS];
  logic signed [S_W-1:0] lane [N_LANES];
  int hist13_17 [$], hist16 [$];
  int checks = 0, failures = 0;

  adder_net1 #(.M(M)) dut (.clk(clk), .rst_n(rst_n), .mode(mode), .valid(valid),
    .sr_clr(sr_clr), .sr_len(SR_LW'(L)), .o_all(o_all), .lane(lane));

  always #5 clk = ~clk;

  function automatic int ps(int m, int n);   // paper numbering o1..o18
    return int'(o_all[m][n-1]);
  endfunction

  task automatic chk(int l, int exp);
    checks++;
    if (int'(lane[l]) != exp) begin
      failures++;
      if (failures < 10) $display("FAIL mode=%0d lane%0d got %0d exp %0d", mode, l, lane[l], exp);
    end
  endtask

  task automatic randomize_psums();
    for (int m = 0; m < N_MATRICES; m++)
      for (int k = 0; k < N_PSUMS; k++) o_all[m][k] = O_W'($signed($urandom % 200000) - 100000);
  endtask

  task automatic run_mode(conv_mode_e md, int steps);
    @(negedge clk);
    mode = md; sr_clr = 1; valid = 0;
    @(negedge clk);
    sr_clr = 0;
    hist13_17.delete(); hist16.delete();
    for (int n = 0; n < steps; n++) begin
      randomize_psums();
      valid = 1;
      #1;
      if (md == MODE_3X3_S1) begin
        chk(0, ps(M,1) + ps(M,5) + ps(M,9));
        chk(1, ps(M,4) + ps(M,8) + ps(M,12));
        chk(2, ps(M,7) + ps(M,11) + ps(M,15));
        chk(3, ps(M,10) + ps(M,14) + ps(M,18));
        if (n >= L) begin
          chk(4, hist13_17[n-L] + ps(M,3));
          chk(5, hist16[n-L] + ps(M,2) + ps(M,6));
        end
      end else if (md == MODE_3X3_S2) begin
        chk(0, ps(M,1) + ps(M,5) + ps(M,9));
        chk(2, ps(M,7) + ps(M,11) + ps(M,15));
        chk(5, ps(M,13) + ps(M,17));
        chk(1, 0);
        chk(3, 0);
        if (n >= L) chk(4, hist13_17[n-L] + ps(M,3));
      end else begin
        for (int k = 0; k < 3; k++) begin
          chk(2*k,   ps(0,3*M+k+1) + ps(1,3*M+k+1) + ps(2,3*M+k+1));
          chk(2*k+1, ps(3,3*M+k+1) + ps(4,3*M+k+1) + ps(5,3*M+k+1));
        end
      end
      hist13_17.push_back(ps(M,13) + ps(M,17));
      hist16.push_back(ps(M,16));
      @(negedge clk);
      valid = 0;
    end
  endtask

  initial begin
    mode = MODE_3X3_S1;
    randomize_psums();
    repeat (2) @(posedge clk);
    rst_n = 1;
    run_mode(MODE_3X3_S1, 30);
    run_mode(MODE_3X3_S2, 30);
    run_mode(MODE_1X1, 30);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
