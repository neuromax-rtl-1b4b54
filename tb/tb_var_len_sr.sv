// tb_var_len_sr: the boundary shift register returns each word exactly len
// shifts after it was written, holds while shift is low, and restarts with a new
// length after clr. Lengths 4 (the paper's 12x6 example: four tile steps per
// sector), 1 and 7 are tried with a small MAX_LEN.
// Interface: shift/din/clr driven on the falling edge, dout sampled before the
// next rising edge. A delay register whose length is set at run time is the
// paper's; the circular-buffer behaviour checked here is this design's own.
module tb_var_len_sr;
  localparam int MAXL = 8;
  localparam int LW = $clog2(MAXL + 1);
  logic clk = 0, rst_n = 0, clr = 0, shift = 0;
  logic [LW-1:0] len;
  logic [18:0] din, dout;
  logic [18:0] hist [$];
  int checks = 0, failures = 0;

  var_len_sr #(.WIDTH(19), .MAX_LEN(MAXL)) dut (
    .clk(clk), .rst_n(rst_n), .clr(clr), .shift(shift), .len(len), .din(din), .dout(dout));

  always #5 clk = ~clk;

  task automatic run_len(input int l, input int nshift);
    @(negedge clk);
    len = LW'(l); clr = 1; shift = 0;
    @(negedge clk);
    clr = 0;
    hist.delete();
    for (int n = 0; n < nshift; n++) begin
      din = 19'($urandom);
      shift = 1;
      #1;
      if (n >= l) begin
        checks++;
        if (dout != hist[n - l]) begin
          failures++;
          if (failures < 10) $display("FAIL len=%0d n=%0d got %0h exp %0h", l, n, dout, hist[n-l]);
        end
      end
      hist.push_back(din);
      @(negedge clk);
      // occasional idle cycle: nothing may move
      if (n % 5 == 2) begin
        shift = 0; din = ~din;
        @(negedge clk);
      end
    end
    shift = 0;
  endtask

  initial begin
    len = 4; din = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    run_len(4, 40);
    run_len(1, 20);
    run_len(7, 40);
    run_len(8, 40);
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
