// yoloc_top_tb: runs one complete ReBranch layer on the chip at its default
// size and checks the result end to end.
//
// Layer (compression ratio D = 4, decompression ratio U = 4):
//   x   : N = 64 unsigned 8-bit input channels (cache words 0..7)
//   trunk: 64 -> M = 32, ROM-CiM macro 0, rows 0..63
//   Res-Compress: 64 -> N/D = 16, ROM-CiM macro 1, rows 0..63, outputs 0..15
//   Res-Conv: 16 -> M/U = 8, SRAM-CiM rows 0..15, outputs 0..7 (weights loaded
//         from the host at the start, as at power-on)
//   Res-Decompress: 8 -> 32, ROM-CiM macro 0, rows 64..71, added onto the
//         trunk sums (the trunk + branch merge)
//   output: ReLU, requantised to unsigned 8 bits, then max pooling of pairs.
// Branch intermediates are signed, so the Res-Conv and Res-Decompress
// operations use the two-pass signed mode. The reference is computed here
// from the ROM reference function and the loaded SRAM weights. Besides the
// values, the test counts the mechanisms: stalls on a busy macro, cycles with
// macros computing in parallel, signed operations, accumulation without
// clear (merge), ReLU clamps, saturations, pooling and read-backs; each must
// occur at least once.
module yoloc_top_tb;
  import yoloc_pkg::*;
  import tb_ref_pkg::*;
  localparam int N = 64, M = 32, NB = 16, MB = 8;
  localparam int S1 = 10, S2 = 8, S3 = 10;
  int checks = 0, failures = 0;
  int n_stall = 0, n_parallel = 0, n_signed_ops = 0, n_merge = 0, n_relu = 0, n_sat = 0, n_pool = 0, n_rd = 0;
  logic clk = 0, rst_n = 0, cmd_valid = 0, cmd_ready, resp_valid, stall;
  cmd_t cmd; cword_t resp_data; logic [2:0] m_busy;
  cword_t resp_q [$];

  yoloc_top dut (.clk, .rst_n, .cmd_valid, .cmd_ready, .cmd, .resp_valid, .resp_data, .stall, .m_busy);
  always #5 clk = ~clk;

  always @(negedge clk) if (rst_n) begin
    if (resp_valid) begin resp_q.push_back(resp_data); n_rd++; end
    if (stall) n_stall++;
    if ($countones(m_busy) >= 2) n_parallel++;
  end

  initial begin
    repeat (40000) @(posedge clk);
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic send(cmd_t c);
    @(negedge clk); cmd = c; cmd_valid = 1;
    #1; while (!cmd_ready) begin @(negedge clk); #1; end   // taken at the next rising edge
    @(negedge clk); cmd_valid = 0;
    if (c.op == OP_MVM && c.in_signed) n_signed_ops++;
    if (c.op == OP_POOL) n_pool++;
  endtask
  function automatic cmd_t mk(op_e op);
    cmd_t c; c = '0; c.op = op; return c;
  endfunction
  function automatic cmd_t mvm(int m, int g, int a, bit sg, bit clr);
    cmd_t c; c = mk(OP_MVM); c.macro = 2'(m); c.group = 4'(g); c.addr_a = CADDR_W'(a);
    c.in_signed = sg; c.acc_clear = clr; return c;
  endfunction
  function automatic cmd_t wb(int m, int lb, int d, int sh, bit rl, bit sg);
    cmd_t c; c = mk(OP_WB); c.macro = 2'(m); c.lane_blk = 2'(lb); c.addr_d = CADDR_W'(d);
    c.shift = 5'(sh); c.relu = rl; c.out_signed = sg; return c;
  endfunction
  function automatic int rq(longint p, int sh, bit rl, bit sg);   // reference requantisation
    longint v; v = p >>> sh;
    if (rl && v < 0) v = 0;
    if (sg) begin if (v > 127 || v < -128) n_sat++; return (v > 127) ? 127 : (v < -128) ? -128 : int'(v); end
    if (v > 255) n_sat++;
    return (v > 255) ? 255 : (v < 0) ? 0 : int'(v);
  endfunction

  int x [N]; int wb_w [NB][MB];
  longint trunk [M], cmp [NB], res [MB], outv [M];
  int b1 [NB], b2 [MB], y [M], pooled [M/2];

  initial begin
    cmd_t c; cword_t w;
    repeat (3) @(posedge clk); rst_n = 1;
    // ---- reference ----
    for (int i = 0; i < N; i++) x[i] = (i < 4) ? 255 : $urandom_range(0, 255);
    for (int j = 0; j < NB; j++) for (int k = 0; k < MB; k++) wb_w[j][k] = $urandom_range(0, 255) - 128;
    for (int o = 0; o < M; o++) begin trunk[o] = 0; for (int i = 0; i < N; i++) trunk[o] += x[i] * ref_rom_w(1, i, o); end
    for (int j = 0; j < NB; j++) begin cmp[j] = 0; for (int i = 0; i < N; i++) cmp[j] += x[i] * ref_rom_w(2, i, j); end
    for (int j = 0; j < NB; j++) b1[j] = rq(cmp[j], S1, 0, 1);
    for (int k = 0; k < MB; k++) begin res[k] = 0; for (int j = 0; j < NB; j++) res[k] += b1[j] * wb_w[j][k]; end
    for (int k = 0; k < MB; k++) b2[k] = rq(res[k], S2, 0, 1);
    for (int o = 0; o < M; o++) begin
      outv[o] = trunk[o];
      for (int k = 0; k < MB; k++) outv[o] += b2[k] * ref_rom_w(1, 64 + k, o);
      if (outv[o] < 0) n_relu++;
      y[o] = rq(outv[o], S3, 1, 0);
    end
    for (int p = 0; p < M / 2; p++) begin
      int a, b; a = y[(p / 8) * 16 + p % 8]; b = y[(p / 8) * 16 + 8 + p % 8];
      pooled[p] = (a > b) ? a : b;
    end
    // ---- power-on: load the Res-Conv weights into the SRAM-CiM ----
    for (int j = 0; j < NB; j++)
      for (int wd = 0; wd < 8; wd++) begin
        c = mk(OP_SWR); c.srow = 7'(j); c.sword = 3'(wd);
        for (int q = 0; q < 4; q++) begin
          int o; o = 4 * wd + q;
          c.data[8*q +: 8] = (o < MB) ? 8'(wb_w[j][o]) : 8'h00;
        end
        send(c);
      end
    // ---- input feature vector into the cache ----
    for (int g = 0; g < N / 8; g++) begin
      c = mk(OP_CWR); c.addr_d = CADDR_W'(g);
      for (int i = 0; i < 8; i++) c.data[8*i +: 8] = 8'(x[8*g + i]);
      send(c);
    end
    // ---- trunk (ROM 0) and Res-Compress (ROM 1) in parallel ----
    for (int g = 0; g < N / 8; g++) begin
      send(mvm(0, g, g, 0, g == 0));
      send(mvm(1, g, g, 0, g == 0));
    end
    send(wb(1, 0, 16, S1, 0, 1));
    send(wb(1, 1, 17, S1, 0, 1));
    // ---- Res-Conv on the SRAM-CiM (signed inputs) ----
    send(mvm(2, 0, 16, 1, 1));
    send(mvm(2, 1, 17, 1, 0));
    send(wb(2, 0, 18, S2, 0, 1));
    // ---- Res-Decompress on ROM 0, accumulated onto the trunk (merge) ----
    send(mvm(0, 8, 18, 1, 0)); n_merge++;
    for (int lb = 0; lb < 4; lb++) send(wb(0, lb, 20 + lb, S3, 1, 0));
    // ---- max pooling of output word pairs ----
    c = mk(OP_POOL); c.addr_a = 12'd20; c.addr_b = 12'd21; c.addr_d = 12'd24; send(c);
    c = mk(OP_POOL); c.addr_a = 12'd22; c.addr_b = 12'd23; c.addr_d = 12'd25; send(c);
    // ---- read back ----
    for (int a = 16; a <= 25; a++) if (a != 19) begin c = mk(OP_CRD); c.addr_a = CADDR_W'(a); send(c); end
    repeat (20) @(negedge clk);
    // branch intermediates
    for (int a = 16; a <= 18; a++) begin
      w = resp_q.pop_front();
      for (int i = 0; i < 8; i++) begin
        int e; e = (a < 18) ? b1[8*(a-16) + i] : b2[i];
        checks++;
        if (int'($signed(w[8*i +: 8])) != e) begin failures++; $display("FAIL branch word %0d lane %0d got %0d exp %0d", a, i, $signed(w[8*i +: 8]), e); end
      end
    end
    for (int a = 20; a <= 25; a++) begin
      w = resp_q.pop_front();
      for (int i = 0; i < 8; i++) begin
        int e; e = (a < 24) ? y[8*(a-20) + i] : pooled[8*(a-24) + i];
        checks++;
        if (int'(w[8*i +: 8]) != e) begin failures++; $display("FAIL out word %0d lane %0d got %0d exp %0d", a, i, w[8*i +: 8], e); end
      end
    end
    $display("mechanisms: stall=%0d parallel=%0d signed=%0d merge=%0d relu=%0d sat=%0d pool=%0d read=%0d",
             n_stall, n_parallel, n_signed_ops, n_merge, n_relu, n_sat, n_pool, n_rd);
    checks++; if (n_stall == 0)      begin failures++; $display("FAIL no stall"); end
    checks++; if (n_parallel == 0)   begin failures++; $display("FAIL no parallel macros"); end
    checks++; if (n_signed_ops == 0) begin failures++; $display("FAIL no signed op"); end
    checks++; if (n_relu == 0)       begin failures++; $display("FAIL no ReLU clamp"); end
    checks++; if (n_sat == 0)        begin failures++; $display("FAIL no saturation"); end
    checks++; if (n_pool == 0 || n_rd == 0 || n_merge == 0) begin failures++; $display("FAIL no pool/read/merge"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
