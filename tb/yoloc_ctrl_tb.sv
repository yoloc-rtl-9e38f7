// yoloc_ctrl_tb: drives the chip controller with a real cache and three
// simple macro stand-ins (busy for a random number of cycles after start,
// results set by the testbench). Checks cache write/read through commands,
// that MVM passes the cache word, group, sign and clear flags to the right
// macro and never starts a busy macro (stall), that WB writes the
// requantised (shift/ReLU/saturate) results, that SWR reaches the SRAM-CiM
// write port, and that POOL writes the element-wise max.
module yoloc_ctrl_tb;
  import yoloc_pkg::*;
  localparam int NM = 3;
  int checks = 0, failures = 0, stalls = 0;
  logic clk = 0, rst_n = 0;
  logic cmd_valid = 0, cmd_ready, resp_valid, stall;
  cmd_t cmd; cword_t resp_data;
  logic c_we, c_re; logic [CADDR_W-1:0] c_waddr, c_raddr; cword_t c_wdata, c_rdata;
  logic [NM-1:0] m_start, m_busy;
  logic [3:0] m_group; act_t [ACTIVE_ROWS-1:0] m_act; logic m_in_signed, m_acc_clear;
  acc_t [NM-1:0][N_OUT-1:0] m_result;
  logic s_we; logic [6:0] s_wrow; logic [2:0] s_wword; logic [31:0] s_wdata;
  int busy_cnt [NM];
  int pending = 0;   // CRD commands sent but not yet answered
  cmd_t last_start [NM]; cword_t last_act [NM]; int nstart [NM];
  cword_t resp_q [$];
  int swr_seen = 0; logic [6:0] swr_row; logic [2:0] swr_word; logic [31:0] swr_data;

  yoloc_ctrl #(.N_ROM(2)) dut (.clk, .rst_n, .cmd_valid, .cmd_ready, .cmd, .resp_valid, .resp_data,
    .c_we, .c_waddr, .c_wdata, .c_re, .c_raddr, .c_rdata, .m_start, .m_group, .m_act,
    .m_in_signed, .m_acc_clear, .m_busy, .m_result, .s_we, .s_wrow, .s_wword, .s_wdata, .stall);
  cache u_cache (.clk, .we(c_we), .waddr(c_waddr), .wdata(c_wdata), .re(c_re), .raddr(c_raddr), .rdata(c_rdata));
  always #5 clk = ~clk;

  // macro stand-ins
  for (genvar m = 0; m < NM; m++) begin : g_m
    assign m_busy[m] = (busy_cnt[m] != 0);
  end
  always @(negedge clk) begin
    for (int m = 0; m < NM; m++) begin
      if (m_start[m]) begin
        checks++; if (m_busy[m]) begin failures++; $display("FAIL start while busy m%0d", m); end
        busy_cnt[m] = $urandom_range(5, 40); nstart[m]++;
        last_start[m].group <= m_group; last_start[m].in_signed <= m_in_signed;
        last_start[m].acc_clear <= m_acc_clear; last_act[m] <= m_act;
      end else if (busy_cnt[m] != 0) busy_cnt[m]--;
    end
    if (resp_valid) begin resp_q.push_back(resp_data); pending--; end
    if (stall) stalls++;
    if (s_we) begin swr_seen++; swr_row <= s_wrow; swr_word <= s_wword; swr_data <= s_wdata; end
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic send(cmd_t c);
    @(negedge clk); cmd = c; cmd_valid = 1;
    #1; while (!cmd_ready) begin @(negedge clk); #1; end   // taken at the next rising edge
    @(negedge clk); cmd_valid = 0;
    if (c.op == OP_CRD) pending++;
  endtask
  // a marker read: commands run in order, so its answer means all earlier
  // commands have been executed; then wait for the macros to finish
  task automatic drain();
    cmd_t c;
    c = '0; c.op = OP_CRD; send(c);
    while (pending != 0) @(negedge clk);
    void'(resp_q.pop_back());
    while (m_busy != 0) @(negedge clk);
    repeat (2) @(negedge clk);
  endtask
  function automatic cmd_t mk(op_e op);
    cmd_t c; c = '0; c.op = op; return c;
  endfunction
  function automatic act_t ref_act(acc_t p, int sh, bit relu, bit sg);
    longint v; v = longint'(p) >>> sh;
    if (relu && v < 0) v = 0;
    if (sg) return act_t'((v > 127) ? 127 : (v < -128) ? -128 : v);
    return act_t'((v > 255) ? 255 : (v < 0) ? 0 : v);
  endfunction

  cword_t words [16];
  initial begin
    cmd_t c; cword_t w;
    for (int m = 0; m < NM; m++) begin busy_cnt[m] = 0; nstart[m] = 0; end
    repeat (3) @(posedge clk); rst_n = 1;
    // cache write / read
    for (int i = 0; i < 16; i++) begin
      words[i] = {$urandom, $urandom};
      c = mk(OP_CWR); c.addr_d = CADDR_W'(100 + i); c.data = words[i]; send(c);
    end
    for (int i = 0; i < 16; i++) begin c = mk(OP_CRD); c.addr_a = CADDR_W'(100 + i); send(c); end
    drain();
    for (int i = 0; i < 16; i++) begin
      checks++;
      if (resp_q.size() == 0 || resp_q.pop_front() != words[i]) begin failures++; $display("FAIL CRD %0d", i); end
    end
    // back-to-back MVMs to the same and to different macros
    for (int k = 0; k < 9; k++) begin
      int m; m = k % NM;
      c = mk(OP_MVM); c.macro = 2'(m); c.group = 4'(k); c.in_signed = 1'(k % 2); c.acc_clear = 1'(k < 3);
      c.addr_a = CADDR_W'(100 + k); send(c);
      if (k % 3 == 2) begin
        drain();
        for (int mm = 0; mm < NM; mm++) begin
          int kk; kk = k - 2 + mm;
          checks++;
          if (last_act[mm] != words[kk] || int'(last_start[mm].group) != kk ||
              last_start[mm].in_signed != 1'(kk % 2) || last_start[mm].acc_clear != 1'(kk < 3)) begin
            failures++; $display("FAIL MVM k%0d macro %0d", kk, mm);
          end
        end
      end
    end
    for (int k = 0; k < 6; k++) begin
      c = mk(OP_MVM); c.macro = 2'd1; c.addr_a = 12'd100; send(c);   // same macro: must stall
    end
    drain();
    checks++; if (nstart[1] != 9 || stalls == 0) begin failures++; $display("FAIL stall %0d %0d", nstart[1], stalls); end
    // write-back with requantisation
    for (int t = 0; t < 12; t++) begin
      int m, lb, sh; bit rl, sg;
      m = t % NM; lb = $urandom_range(0, 3); sh = $urandom_range(0, 12); rl = 1'($urandom); sg = 1'($urandom);
      for (int o = 0; o < N_OUT; o++) m_result[m][o] = acc_t'($urandom_range(0, 1 << 20)) - (1 << 19);
      c = mk(OP_WB); c.macro = 2'(m); c.lane_blk = 2'(lb); c.shift = 5'(sh); c.relu = rl; c.out_signed = sg;
      c.addr_d = CADDR_W'(200 + t); send(c);
      c = mk(OP_CRD); c.addr_a = CADDR_W'(200 + t); send(c);
      drain();
      for (int i = 0; i < LANES; i++) w[8*i +: 8] = ref_act(m_result[m][8*lb + i], sh, rl, sg);
      checks++; if (resp_q.size() == 0 || resp_q.pop_front() != w) begin failures++; $display("FAIL WB t%0d", t); end
    end
    // SRAM-CiM weight load
    c = mk(OP_SWR); c.srow = 7'd77; c.sword = 3'd5; c.data = 64'h1234_5678_9ABC_DEF0; send(c);
    drain();
    checks++; if (swr_seen != 1 || swr_row != 7'd77 || swr_word != 3'd5 || swr_data != 32'h9ABC_DEF0) begin
      failures++; $display("FAIL SWR");
    end
    // pooling
    for (int t = 0; t < 4; t++) begin
      c = mk(OP_POOL); c.addr_a = CADDR_W'(100 + 2*t); c.addr_b = CADDR_W'(101 + 2*t); c.out_signed = 1'(t % 2);
      c.addr_d = CADDR_W'(300 + t); send(c);
      c = mk(OP_CRD); c.addr_a = CADDR_W'(300 + t); send(c);
      drain();
      for (int i = 0; i < LANES; i++) begin
        act_t a, b;
        a = words[2*t][8*i +: 8]; b = words[2*t+1][8*i +: 8];
        if (t % 2) w[8*i +: 8] = ($signed(a) > $signed(b)) ? a : b;
        else       w[8*i +: 8] = (a > b) ? a : b;
      end
      checks++; if (resp_q.size() == 0 || resp_q[0] != w) begin failures++; $display("FAIL POOL t%0d exp %h got %h a %h b %h", t, w, resp_q[0], words[2*t], words[2*t+1]); end
      if (resp_q.size() != 0) void'(resp_q.pop_front());
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
