// tb_pe_grid: six matrices with different random tiles and weights; checks
// every psum of every matrix (so a matrix wired to the wrong tile or weights
// fails) one clock after in_valid.
// Interface: tiles and weights set on the falling edge with in_valid. Six
// matrices in a grid are the paper's; the stimulus is random.
module tb_pe_grid;
  import neuromax_pkg::*;
  import tb_ref_pkg::*;

  logic clk = 0, rst_n = 0, in_valid = 0;
  logic [A_BITS-1:0] tile [N_MATRICES][PE_ROWS][PE_COLS];
  logic [THREADS-1:0][W_BITS-1:0] w [N_MATRICES][PE_COLS];
  logic signed [O_W-1:0] o [N_MATRICES][N_PSUMS];
  int exp [N_MATRICES][N_PSUMS];
  int checks = 0, failures = 0;

  pe_grid dut (.clk(clk), .rst_n(rst_n), .in_valid(in_valid), .tile(tile), .w(w), .o(o));

  always #5 clk = ~clk;

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 50; n++) begin
      @(negedge clk);
      for (int m = 0; m < N_MATRICES; m++) begin
        for (int r = 0; r < PE_ROWS; r++)
          for (int c = 0; c < PE_COLS; c++) tile[m][r][c] = 6'(32 + $urandom % 32);
        for (int c = 0; c < PE_COLS; c++)
          for (int t = 0; t < THREADS; t++) w[m][c][t] = 7'($urandom);
        for (int k = 0; k < N_PSUMS; k++) begin
          exp[m][k] = 0;
          for (int c = 0; c < PE_COLS; c++) exp[m][k] += thread_ref(w[m][c][k%3], tile[m][k/3][c]);
        end
      end
      in_valid = 1;
      @(negedge clk);
      in_valid = 0;
      for (int m = 0; m < N_MATRICES; m++)
        for (int k = 0; k < N_PSUMS; k++) begin
          checks++;
          if (int'(o[m][k]) != exp[m][k]) begin
            failures++;
            if (failures < 10) $display("FAIL m%0d o%0d got %0d exp %0d", m, k+1, o[m][k], exp[m][k]);
          end
        end
    end
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
