// io_fifo: command FIFO of the chip's IO port.
//
// Decouples the off-chip command stream from the controller: DEPTH entries of
// T, valid/ready on both sides, first in first out. The paper draws an IO
// block inside the controller; the FIFO and its handshake are this design's.
//
// Interface: a word moves in when in_valid && in_ready, out when
// out_valid && out_ready (same cycle allowed). out_data is the head entry.
module io_fifo #(
  parameter type         T     = yoloc_pkg::cmd_t,
  parameter int unsigned DEPTH = 4
) (
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  output logic in_ready,
  input  T     in_data,
  output logic out_valid,
  input  logic out_ready,
  output T     out_data
);
  localparam int unsigned AW = $clog2(DEPTH);
  T                 mem [DEPTH];
  logic [AW-1:0]    rp, wp;
  logic [AW:0]      cnt;
  logic             push, pop;

  always_comb begin
    in_ready  = (cnt != (AW+1)'(DEPTH));
    out_valid = (cnt != '0);
    out_data  = mem[rp];
    push      = in_valid && in_ready;
    pop       = out_valid && out_ready;
  end

  always_ff @(posedge clk) if (push) mem[wp] <= in_data;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rp <= '0; wp <= '0; cnt <= '0;
    end else begin
      if (push) wp <= (int'(wp) == DEPTH - 1) ? '0 : wp + 1'b1;
      if (pop)  rp <= (int'(rp) == DEPTH - 1) ? '0 : rp + 1'b1;
      cnt <= cnt + (AW+1)'(push) - (AW+1)'(pop);
    end
  end

  a_count_range: assert property (@(posedge clk) disable iff (!rst_n) cnt <= (AW+1)'(DEPTH));
endmodule
