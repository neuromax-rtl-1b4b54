// tb_log_pe: random check of one PE: three threads share the activation, each
// uses its own weight; every output is compared with the reference product.
// Combinational DUT, sampled after a short delay. The three-thread PE is the
// paper's; the reference (tb_ref_pkg) restates the thread's number format.
module tb_log_pe;
  import neuromax_pkg::*;
  import tb_ref_pkg::*;

  logic [A_BITS-1:0] a;
  logic [THREADS-1:0][W_BITS-1:0] w;
  logic signed [P_W-1:0] p [THREADS];
  int checks = 0, failures = 0;

  log_pe dut (.a_code(a), .w_codes(w), .p(p));

  initial begin
    for (int n = 0; n < 2000; n++) begin
      a = A_BITS'($urandom);
      for (int t = 0; t < THREADS; t++) w[t] = W_BITS'($urandom);
      if (n < 64) begin a = 6'h3F; w[n % 3] = 7'(n); end
      #1;
      for (int t = 0; t < THREADS; t++) begin
        checks++;
        if (int'(p[t]) != thread_ref(w[t], a)) begin
          failures++;
          if (failures < 10) $display("FAIL t=%0d w=%0h a=%0h got %0d", t, w[t], a, p[t]);
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
