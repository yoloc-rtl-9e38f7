// pool_unit_tb: checks the element-wise max of two activation words, signed
// and unsigned, over random and equal-value inputs.
module pool_unit_tb;
  import yoloc_pkg::*;
  int checks = 0, failures = 0;
  act_t [LANES-1:0] a, b, y; logic is_signed;
  pool_unit dut (.a, .b, .is_signed, .y);
  initial begin
    #100000;
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int t = 0; t < 2000; t++) begin
      is_signed = 1'($urandom);
      for (int i = 0; i < LANES; i++) begin a[i] = 8'($urandom); b[i] = (t % 10 == 0) ? a[i] : 8'($urandom); end
      #1;
      for (int i = 0; i < LANES; i++) begin
        int va, vb, e;
        va = is_signed ? int'($signed(a[i])) : int'(a[i]);
        vb = is_signed ? int'($signed(b[i])) : int'(b[i]);
        e = (va > vb) ? va : vb;
        checks++;
        if (y[i] != 8'(e)) begin failures++; if (failures < 10) $display("FAIL a %0d b %0d s %0d y %0d", a[i], b[i], is_signed, y[i]); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
