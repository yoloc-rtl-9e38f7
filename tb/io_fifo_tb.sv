// io_fifo_tb: pushes and pops random 16-bit words with random valid/ready
// patterns through a 4-deep FIFO and checks order, no loss, no duplication,
// that in_ready drops when full and out_valid when empty.
module io_fifo_tb;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, in_valid = 0, out_ready = 0, in_ready, out_valid;
  logic [15:0] in_data, out_data;
  logic [15:0] q[$];
  int sent = 0, recv = 0, full_seen = 0, empty_seen = 0;
  io_fifo #(.T(logic [15:0]), .DEPTH(4)) dut (.clk, .rst_n, .in_valid, .in_ready, .in_data,
                                             .out_valid, .out_ready, .out_data);
  always #5 clk = ~clk;
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 4000; t++) begin
      @(negedge clk);
      in_valid = ($urandom_range(0, 3) != 0) && (t < 3500) && !(t > 1000 && t < 1100);
      in_data = 16'($urandom);
      out_ready = (t < 500) ? ($urandom_range(0, 3) == 0) : ($urandom_range(0, 1) == 1);
      #1;
      checks++;
      if (in_ready != (q.size() < 4)) begin failures++; $display("FAIL in_ready %0d size %0d", in_ready, q.size()); end
      checks++;
      if (out_valid != (q.size() > 0)) begin failures++; $display("FAIL out_valid %0d size %0d", out_valid, q.size()); end
      if (q.size() == 4) full_seen++;
      if (q.size() == 0) empty_seen++;
      if (out_valid && out_ready) begin
        checks++;
        if (out_data != q[0]) begin failures++; if (failures < 10) $display("FAIL data %h exp %h", out_data, q[0]); end
        void'(q.pop_front()); recv++;
      end
      if (in_valid && in_ready) begin q.push_back(in_data); sent++; end
    end
    checks++; if (full_seen == 0 || empty_seen == 0 || recv < 100) begin failures++; $display("FAIL coverage"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
