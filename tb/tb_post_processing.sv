// tb_post_processing: ReLU and log re-quantisation of random and hand-picked
// values against the exact integer reference (y^4 against powers of two), with
// several q_offsets, and the one-clock latency.
// Interface: y/q_offset with in_valid on the falling edge; code checked one clock
// later with out_valid. ReLU and log re-quantisation are the paper's; rounding to
// the nearest power of sqrt(2) and q_offset are this design's own.
module tb_post_processing;
  import neuromax_pkg::*;
  import tb_ref_pkg::*;

  logic clk = 0, rst_n = 0, in_valid = 0;
  logic signed [7:0] q;
  logic signed [ACC_W-1:0] y [N_LANES];
  logic [A_BITS-1:0] code [N_LANES];
  logic out_valid;
  int checks = 0, failures = 0;

  post_processing dut (.clk(clk), .rst_n(rst_n), .in_valid(in_valid), .q_offset(q),
    .y(y), .code(code), .out_valid(out_valid));

  always #5 clk = ~clk;

  initial begin
    int unsigned e [N_LANES];
    q = 0;
    for (int l = 0; l < N_LANES; l++) y[l] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 1000; n++) begin
      @(negedge clk);
      q = (n % 4 == 0) ? 8'sd0 : (n % 4 == 1) ? -8'sd10 : (n % 4 == 2) ? 8'sd20 : -8'sd40;
      for (int l = 0; l < N_LANES; l++) begin
        int sh;
        sh = $urandom % 31;
        y[l] = ACC_W'($signed($urandom) >>> sh);
        if (n == 0) y[l] = ACC_W'(l);          // 0..5: 0 -> code 0, 1 -> k=0
        if (n == 1) y[l] = -ACC_W'(l + 1);     // negatives: ReLU
        e[l] = quant_ref(longint'(y[l]), int'(q));
      end
      in_valid = 1;
      @(negedge clk);
      in_valid = 0;
      checks++;
      if (!out_valid) failures++;
      for (int l = 0; l < N_LANES; l++) begin
        checks++;
        if (int'(code[l]) != int'(e[l])) begin
          failures++;
          if (failures < 10) $display("FAIL y=%0d q=%0d got %0d exp %0d", y[l], q, code[l], e[l]);
        end
      end
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
