// tb_channel_accum: checks the two-clock latency, the pair adder (pair_en) and
// accumulation over groups of 1..4 consecutive inputs started by clear, against
// sums kept by the testbench. Inputs arrive back to back and with gaps.
// Interface: in/pair_en/clear on the falling edge with in_valid; acc checked two
// clocks later when out_valid is high. The two-stage structure follows the paper's
// channel accumulator figure; the clear semantics are this design's own.
module tb_channel_accum;
  import neuromax_pkg::*;

  logic clk = 0, rst_n = 0, in_valid = 0, pair_en = 0, clear = 0;
  logic signed [S_W-1:0]   in  [N_LANES];
  logic signed [ACC_W-1:0] acc [N_LANES];
  logic out_valid;
  longint run [N_LANES];
  longint expq [$];   // expected lane values, 6 per accepted input
  int checks = 0, failures = 0, outs = 0, ins = 0;

  channel_accum dut (.clk(clk), .rst_n(rst_n), .in_valid(in_valid), .pair_en(pair_en),
    .clear(clear), .in(in), .acc(acc), .out_valid(out_valid));

  always #5 clk = ~clk;

  // compare on every clock where out_valid is high
  always @(posedge clk) if (rst_n && out_valid) begin
    outs++;
    for (int l = 0; l < N_LANES; l++) begin
      longint e;
      e = expq.pop_front();
      checks++;
      if (longint'(acc[l]) != e) begin
        failures++;
        if (failures < 10) $display("FAIL out %0d lane %0d got %0d exp %0d", outs, l, acc[l], e);
      end
    end
  end

  initial begin
    for (int l = 0; l < N_LANES; l++) begin in[l] = '0; run[l] = 0; end
    repeat (2) @(posedge clk);
    @(negedge clk);
    rst_n = 1;
    for (int grp = 0; grp < 40; grp++) begin
      int len;
      len = 1 + grp % 4;
      for (int n = 0; n < len; n++) begin
        @(negedge clk);
        pair_en = (grp % 3 != 0);
        for (int l = 0; l < N_LANES; l++) in[l] = S_W'($signed($urandom % 2000000) - 1000000);
        clear = (n == 0);
        in_valid = 1;
        for (int l = 0; l < N_LANES; l++) begin
          longint v;
          v = (pair_en && l % 2 == 0) ? longint'(in[l]) + longint'(in[l+1]) : longint'(in[l]);
          run[l] = clear ? v : run[l] + v;
          expq.push_back(run[l]);
        end
        ins++;
        if (grp % 5 == 4) begin
          @(negedge clk);
          in_valid = 0;
        end
      end
    end
    @(negedge clk);
    in_valid = 0;
    repeat (4) @(negedge clk);
    checks++;
    if (outs != ins) begin failures++; $display("FAIL outs %0d ins %0d", outs, ins); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
