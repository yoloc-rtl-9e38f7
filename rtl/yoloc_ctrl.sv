// yoloc_ctrl: chip controller of YOLoC.
//
// Schedules data between the cache and the CiM macros and performs the
// non-CiM computing (activation function and pooling), the two duties the
// paper gives the controller; it also holds the IO command FIFO that the
// paper draws inside the controller. Commands (yoloc_pkg::cmd_t) arrive from
// off-chip; one is executed at a time:
//   CWR  write a cache word          CRD  read a cache word (resp port)
//   SWR  load SRAM-CiM weight bits   MVM  read 8 activations, start a macro
//   WB   requantise 8 results of a macro (act_unit) into the cache
//   POOL max of two cache words (pool_unit) into the cache
// MVM only starts a macro and returns, so several macros compute at the same
// time; an MVM, WB (or SWR to the SRAM-CiM) aimed at a macro that is still
// busy waits (stall is high) until it is free. The command set, this
// overlap and all timing are this design's own.
//
// Timing: a command is taken in the idle cycle, executed in the next; CWR,
// SWR and WB take 2 cycles, CRD and MVM 3, POOL 4, plus any stall. The CRD
// result appears on resp_data with resp_valid for one cycle.
module yoloc_ctrl
  import yoloc_pkg::*;
#(
  parameter int unsigned N_ROM      = 2,
  parameter int unsigned FIFO_DEPTH = 4,
  parameter int unsigned NM         = N_ROM + 1   // macros: ROMs, then the SRAM-CiM
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // IO: commands and read responses
  input  logic                          cmd_valid,
  output logic                          cmd_ready,
  input  cmd_t                          cmd,
  output logic                          resp_valid,
  output cword_t                        resp_data,
  // cache
  output logic                          c_we,
  output logic [CADDR_W-1:0]            c_waddr,
  output cword_t                        c_wdata,
  output logic                          c_re,
  output logic [CADDR_W-1:0]            c_raddr,
  input  cword_t                        c_rdata,
  // CiM macros (shared operands, one start per macro)
  output logic [NM-1:0]                 m_start,
  output logic [$clog2(GROUPS)-1:0]     m_group,
  output act_t [ACTIVE_ROWS-1:0]        m_act,
  output logic                          m_in_signed,
  output logic                          m_acc_clear,
  input  logic [NM-1:0]                 m_busy,
  input  acc_t [NM-1:0][N_OUT-1:0]      m_result,
  // SRAM-CiM weight load
  output logic                          s_we,
  output logic [$clog2(ROWS)-1:0]       s_wrow,
  output logic [$clog2(COLS/SRAM_WR_W)-1:0] s_wword,
  output logic [SRAM_WR_W-1:0]          s_wdata,
  // status
  output logic                          stall
);
  typedef enum logic [2:0] {S_IDLE, S_EXEC, S_RESP, S_MVM2, S_POOL2, S_POOL3} state_e;
  state_e state;
  cmd_t   c;
  cword_t a_q;
  logic   q_valid;
  cmd_t   q_cmd;
  logic   tgt_busy;
  acc_t [LANES-1:0] wb_psum;
  act_t [LANES-1:0] wb_y, pool_y;

  io_fifo #(.T(cmd_t), .DEPTH(FIFO_DEPTH)) u_io (
    .clk, .rst_n, .in_valid(cmd_valid), .in_ready(cmd_ready), .in_data(cmd),
    .out_valid(q_valid), .out_ready(state == S_IDLE), .out_data(q_cmd));

  always_comb begin
    for (int i = 0; i < LANES; i++) wb_psum[i] = m_result[c.macro][LANES*c.lane_blk + i];
  end
  act_unit  u_act  (.psum(wb_psum), .shift(c.shift), .relu(c.relu), .out_signed(c.out_signed), .y(wb_y));
  pool_unit u_pool (.a(a_q), .b(c_rdata), .is_signed(c.out_signed), .y(pool_y));

  always_comb begin
    tgt_busy = (c.op == OP_SWR) ? m_busy[N_ROM] : m_busy[c.macro];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; c <= '0; a_q <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (q_valid) begin c <= q_cmd; state <= S_EXEC; end
        S_EXEC: unique case (c.op)
          OP_CRD:  state <= S_RESP;
          OP_MVM:  if (!tgt_busy) state <= S_MVM2;
          OP_WB, OP_SWR: if (!tgt_busy) state <= S_IDLE;
          OP_POOL: state <= S_POOL2;
          default: state <= S_IDLE;
        endcase
        S_RESP:  state <= S_IDLE;
        S_MVM2:  state <= S_IDLE;
        S_POOL2: begin a_q <= c_rdata; state <= S_POOL3; end
        S_POOL3: state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  always_comb begin
    c_we = 1'b0; c_waddr = c.addr_d; c_wdata = c.data;
    c_re = 1'b0; c_raddr = c.addr_a;
    m_start = '0; m_group = c.group; m_in_signed = c.in_signed; m_acc_clear = c.acc_clear;
    m_act = c_rdata;
    s_we = 1'b0; s_wrow = c.srow; s_wword = c.sword; s_wdata = c.data[SRAM_WR_W-1:0];
    resp_valid = (state == S_RESP); resp_data = c_rdata;
    stall = (state == S_EXEC) && (c.op inside {OP_MVM, OP_WB, OP_SWR}) && tgt_busy;
    unique case (state)
      S_EXEC: unique case (c.op)
        OP_CWR:  c_we = 1'b1;
        OP_CRD:  c_re = 1'b1;
        OP_MVM:  c_re = !tgt_busy;
        OP_SWR:  s_we = !tgt_busy;
        OP_WB:   begin c_we = !tgt_busy; c_wdata = wb_y; end
        OP_POOL: c_re = 1'b1;
        default: ;
      endcase
      S_MVM2:  m_start[c.macro] = 1'b1;
      S_POOL2: begin c_re = 1'b1; c_raddr = c.addr_b; end
      S_POOL3: begin c_we = 1'b1; c_wdata = pool_y; end
      default: ;
    endcase
  end

  a_macro_range: assert property (@(posedge clk) disable iff (!rst_n)
                                  state == S_EXEC && c.op inside {OP_MVM, OP_WB} |-> int'(c.macro) < NM);
endmodule
