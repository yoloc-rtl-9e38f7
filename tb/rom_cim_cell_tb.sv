// rom_cim_cell_tb: checks the 1T cell truth table (I*W = R) for a fused ('1')
// and a grounded ('0') cell over random word-line values.
module rom_cim_cell_tb;
  int checks = 0, failures = 0;
  logic wl;
  logic pd1, pd0;
  rom_cim_cell #(.FUSED(1'b1)) u1 (.wl, .bl_pd(pd1));
  rom_cim_cell #(.FUSED(1'b0)) u0 (.wl, .bl_pd(pd0));

  initial begin
    #10000;
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int i = 0; i < 32; i++) begin
      wl = (i < 2) ? 1'(i) : 1'($urandom_range(0, 1));
      #1;
      checks++; if (pd1 !== (wl == 1'b1)) begin failures++; $display("FAIL fused wl=%0b pd=%0b", wl, pd1); end
      checks++; if (pd0 !== 1'b0)         begin failures++; $display("FAIL grounded wl=%0b pd=%0b", wl, pd0); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
