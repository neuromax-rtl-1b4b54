// tb_input_sram: writes random 108-bit words, reads them back on both read
// ports at different addresses, and checks the one-clock read latency and that
// a read port holds its data while its enable is low.
// Interface: we/waddr/wdata and re_x/raddr_x on the falling edge, rdata_x one
// clock later. The input SRAM per matrix is the paper's; the two read ports and
// the small DEPTH used here are this design's own.
module tb_input_sram;
  import neuromax_pkg::*;
  localparam int D = 64;
  localparam int AW = $clog2(D);
  logic clk = 0, we = 0, re_a = 0, re_b = 0;
  logic [AW-1:0] waddr, ra, rb;
  logic [IN_WORD_W-1:0] wdata, da, db;
  logic [IN_WORD_W-1:0] model [D];
  int checks = 0, failures = 0;

  input_sram #(.DEPTH(D)) dut (.clk(clk), .we(we), .waddr(waddr), .wdata(wdata),
    .re_a(re_a), .raddr_a(ra), .rdata_a(da), .re_b(re_b), .raddr_b(rb), .rdata_b(db));

  always #5 clk = ~clk;

  initial begin
    for (int i = 0; i < D; i++) begin
      @(negedge clk);
      we = 1; waddr = AW'(i);
      wdata = {$urandom, $urandom, $urandom, $urandom};
      model[i] = wdata;
    end
    @(negedge clk);
    we = 0;
    for (int n = 0; n < 200; n++) begin
      @(negedge clk);
      ra = AW'($urandom); rb = AW'($urandom); re_a = 1; re_b = 1;
      @(negedge clk);
      re_a = 0; re_b = 0;
      checks += 2;
      if (da != model[ra]) failures++;
      if (db != model[rb]) failures++;
      ra = ra + 1'b1;
      @(negedge clk);
      checks++;
      if (da != model[AW'(ra - 1'b1)]) failures++;   // held
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
