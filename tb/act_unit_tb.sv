// act_unit_tb: checks requantisation (arithmetic shift), ReLU and saturation
// to signed or unsigned 8 bits against a reference, with random and edge-case
// partial sums.
module act_unit_tb;
  import yoloc_pkg::*;
  int checks = 0, failures = 0;
  acc_t [LANES-1:0] psum; logic [4:0] shift; logic relu, out_signed;
  act_t [LANES-1:0] y;
  act_unit dut (.psum, .shift, .relu, .out_signed, .y);
  initial begin
    #100000;
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int t = 0; t < 3000; t++) begin
      shift = 5'($urandom_range(0, 20)); relu = 1'($urandom); out_signed = 1'($urandom);
      for (int i = 0; i < LANES; i++) begin
        int r; r = $urandom_range(0, 3);
        psum[i] = (r == 0) ? acc_t'($urandom) : (r == 1) ? acc_t'($urandom_range(0, 600)) - 300 :
                  (r == 2) ? acc_t'($urandom_range(0, 1 << 20)) - (1 << 19) : acc_t'(i * 64 - 256);
      end
      #1;
      for (int i = 0; i < LANES; i++) begin
        longint v; int e;
        v = longint'(psum[i]);
        v = (v < 0) ? -((-v + (1 << shift) - 1) / (1 << shift)) : v / (1 << shift);  // floor division
        if (relu && v < 0) v = 0;
        if (out_signed) e = (v > 127) ? 127 : (v < -128) ? -128 : int'(v);
        else            e = (v > 255) ? 255 : (v < 0) ? 0 : int'(v);
        checks++;
        if (y[i] != 8'(e)) begin failures++; if (failures < 10) $display("FAIL psum %0d sh %0d relu %0d s %0d y %0d exp %0d", psum[i], shift, relu, out_signed, y[i], e); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
