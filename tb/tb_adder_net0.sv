// tb_adder_net0: random products in, checks every psum against the row-wise
// same-thread sums of the paper's adder net 0 table (o1 = p11+p14+p17, ...).
// The DUT is combinational: inputs are set, then outputs are compared after a
// short delay. The connection table is the paper's; the random stimulus and the
// 18-bit psum width checked here are this design's own.
module tb_adder_net0;
  import neuromax_pkg::*;

  logic signed [P_W-1:0] p [PE_ROWS][PE_COLS][THREADS];
  logic signed [O_W-1:0] o [N_PSUMS];
  int checks = 0, failures = 0;

  adder_net0 dut (.p(p), .o(o));

  initial begin
    for (int n = 0; n < 500; n++) begin
      for (int r = 0; r < PE_ROWS; r++)
        for (int c = 0; c < PE_COLS; c++)
          for (int t = 0; t < THREADS; t++)
            p[r][c][t] = (n == 0) ? 16'sh8001 : P_W'($urandom);
      #1;
      // paper numbering: PE (r,c) outputs p_{r+1, 3c+t+1}; o_{3r+t+1} sums c = 0..2
      for (int k = 0; k < N_PSUMS; k++) begin
        int exp;
        exp = int'(p[k/3][0][k%3]) + int'(p[k/3][1][k%3]) + int'(p[k/3][2][k%3]);
        checks++;
        if (int'(o[k]) != exp) begin
          failures++;
          if (failures < 10) $display("FAIL o%0d got %0d exp %0d", k+1, o[k], exp);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
