// tb_log_thread: exhaustive check of one log thread against the reference
// formula, over all 128 weight codes and 64 activation codes, plus a few
// products worked out by hand (largest magnitude, sign, zero code).
// Combinational DUT, sampled after a short delay. The table entries 7FFF/5A82
// and the shift are the paper's; which fraction bit selects which entry is this
// design's own reading, and the reference follows the same reading.
module tb_log_thread;
  import neuromax_pkg::*;
  import tb_ref_pkg::*;

  logic [W_BITS-1:0] w;
  logic [A_BITS-1:0] a;
  logic signed [P_W-1:0] p;
  int checks = 0, failures = 0;

  log_thread dut (.w_code(w), .a_code(a), .p(p));

  task automatic check(input int exp, input string what);
    checks++;
    if (int'(p) != exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s w=%0h a=%0h got %0d exp %0d", what, w, a, p, exp);
    end
  endtask

  initial begin
    for (int wi = 0; wi < 128; wi++) begin
      for (int ai = 0; ai < 64; ai++) begin
        w = W_BITS'(wi); a = A_BITS'(ai); #1;
        check(thread_ref(wi, ai), "exhaustive");
      end
    end
    // hand-worked: S = 127 -> 7FFF unshifted; S = 126 -> 5A82; sign; zero code
    w = 7'h3F; a = 6'h3F; #1; check(16'sh5A82, "S=126");
    w = 7'h3F; a = 6'h3F; #1; check(23170, "S=126 dec");
    w = 7'h40 | 7'h3F; a = 6'h3F; #1; check(-23170, "neg");
    w = 7'h20; a = 6'h3F; #1; check(32767 >> 16, "S=95");
    w = 7'h3F; a = 6'h00; #1; check(0, "zero act");
    w = 7'h31; a = 6'h31; #1; check(32767 >> 14, "S=98");   // INT=49: 7FFF>>14 = 1
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
