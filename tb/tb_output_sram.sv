// tb_output_sram: random lane-masked writes on both write ports (different
// words, as the controller guarantees), checked word by word through the read
// port against a model that applies the same masks.
// Interface: lane masks, addresses and data on the falling edge; read data one
// clock after re. The output SRAM per matrix is the paper's; the two masked
// write ports are this design's own.
module tb_output_sram;
  import neuromax_pkg::*;
  localparam int D = 16;
  localparam int AW = $clog2(D);
  logic clk = 0, re = 0;
  logic [N_LANES-1:0] we_a = '0, we_b = '0;
  logic [AW-1:0] wa, wb, ra;
  logic [OUT_WORD_W-1:0] da, db, rdata;
  logic [OUT_WORD_W-1:0] model [D];
  int checks = 0, failures = 0;

  output_sram #(.DEPTH(D)) dut (.clk(clk), .we_a(we_a), .waddr_a(wa), .wdata_a(da),
    .we_b(we_b), .waddr_b(wb), .wdata_b(db), .re(re), .raddr(ra), .rdata(rdata));

  always #5 clk = ~clk;

  initial begin
    for (int i = 0; i < D; i++) begin
      @(negedge clk);
      we_a = '1; wa = AW'(i); da = {$urandom, $urandom}; model[i] = da;
    end
    for (int n = 0; n < 300; n++) begin
      @(negedge clk);
      we_a = N_LANES'($urandom); we_b = N_LANES'($urandom);
      wa = AW'($urandom); wb = AW'(wa + 1 + $urandom % (D - 1));
      da = {$urandom, $urandom}; db = {$urandom, $urandom};
      for (int l = 0; l < N_LANES; l++) begin
        if (we_a[l]) model[wa][l*A_BITS +: A_BITS] = da[l*A_BITS +: A_BITS];
        if (we_b[l]) model[wb][l*A_BITS +: A_BITS] = db[l*A_BITS +: A_BITS];
      end
      @(negedge clk);
      we_a = '0; we_b = '0;
      ra = (n % 2 == 0) ? wa : wb; re = 1;
      @(negedge clk);
      re = 0;
      checks++;
      if (rdata != model[ra]) begin
        failures++;
        if (failures < 10) $display("FAIL addr %0d got %h exp %h", ra, rdata, model[ra]);
      end
    end
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
