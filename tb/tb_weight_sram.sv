// tb_weight_sram: writes random 63-bit weight words and reads them back with
// one clock of latency, including a write and a read in the same clock.
// Interface: we/waddr/wdata and re/raddr on the falling edge, rdata one clock
// later. The weight SRAM per matrix is the paper's; the depth is this design's.
module tb_weight_sram;
  import neuromax_pkg::*;
  localparam int D = 32;
  localparam int AW = $clog2(D);
  logic clk = 0, we = 0, re = 0;
  logic [AW-1:0] waddr, raddr;
  logic [WT_WORD_W-1:0] wdata, rdata;
  logic [WT_WORD_W-1:0] model [D];
  int checks = 0, failures = 0;

  weight_sram #(.DEPTH(D)) dut (.clk(clk), .we(we), .waddr(waddr), .wdata(wdata),
    .re(re), .raddr(raddr), .rdata(rdata));

  always #5 clk = ~clk;

  initial begin
    for (int i = 0; i < D; i++) begin
      @(negedge clk);
      we = 1; waddr = AW'(i); wdata = {$urandom, $urandom}; model[i] = wdata;
    end
    for (int n = 0; n < 200; n++) begin
      @(negedge clk);
      we = (n % 2 == 0); waddr = AW'($urandom); wdata = {$urandom, $urandom};
      raddr = AW'($urandom);
      if (raddr == waddr) raddr = raddr + 1'b1;
      re = 1;
      @(negedge clk);
      if (we) model[waddr] = wdata;
      we = 0; re = 0;
      checks++;
      if (rdata != model[raddr]) failures++;
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
