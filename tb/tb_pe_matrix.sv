// tb_pe_matrix: random tiles and weight arrays into one 6x3 PE matrix; checks
// the registered psums one clock later against
// o(3r+t+1) = sum over c of product(w[c][t], tile[r][c]), and that the psums hold
// when in_valid is low.
// Interface: tile/w/in_valid set on the falling edge; psums read after the next
// rising edge. The 6x3 matrix with broadcast weights is the paper's; the output
// register is this design's pipeline stage.
module tb_pe_matrix;
  import neuromax_pkg::*;
  import tb_ref_pkg::*;

  logic clk = 0, rst_n = 0, in_valid = 0;
  logic [A_BITS-1:0] tile [PE_ROWS][PE_COLS];
  logic [THREADS-1:0][W_BITS-1:0] w [PE_COLS];
  logic signed [O_W-1:0] o [N_PSUMS];
  int exp [N_PSUMS];
  int checks = 0, failures = 0, cycles = 0;

  pe_matrix dut (.clk(clk), .rst_n(rst_n), .in_valid(in_valid), .tile(tile), .w(w), .o(o));

  always #5 clk = ~clk;
  always @(posedge clk) cycles++;

  initial begin
    for (int r = 0; r < PE_ROWS; r++) for (int c = 0; c < PE_COLS; c++) tile[r][c] = '0;
    for (int c = 0; c < PE_COLS; c++) w[c] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 300; n++) begin
      @(negedge clk);
      for (int r = 0; r < PE_ROWS; r++)
        for (int c = 0; c < PE_COLS; c++) tile[r][c] = 6'(32 + $urandom % 32);
      for (int c = 0; c < PE_COLS; c++)
        for (int t = 0; t < THREADS; t++) w[c][t] = 7'(($urandom % 2) * 64 + 32 + $urandom % 32);
      for (int k = 0; k < N_PSUMS; k++) begin
        exp[k] = 0;
        for (int c = 0; c < PE_COLS; c++) exp[k] += thread_ref(w[c][k%3], tile[k/3][c]);
      end
      in_valid = 1;
      @(negedge clk);
      in_valid = 0;
      for (int k = 0; k < N_PSUMS; k++) begin
        checks++;
        if (int'(o[k]) != exp[k]) begin
          failures++;
          if (failures < 10) $display("FAIL o%0d got %0d exp %0d", k+1, o[k], exp[k]);
        end
      end
      // hold check: change the inputs with in_valid low
      tile[0][0] = ~tile[0][0];
      @(negedge clk);
      checks++;
      if (int'(o[0]) != exp[0]) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
